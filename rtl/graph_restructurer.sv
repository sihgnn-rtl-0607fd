// graph_restructurer: rewrites the layout of one bipartite semantic graph so
// that its edges come out grouped by community.
//
// One epoch: start latches the vertex counts, the topology loader takes the
// edge stream and builds the source-side and destination-side adjacency
// buffers, the decoupler finds a maximum matching (backbone candidates),
// the recoupler selects the backbone, pushes every vertex into its class
// FIFO and re-emits the edges as three subgraphs. done pulses at the end of
// the epoch; busy is high from start to done. Only one epoch is in flight at
// a time: the source-side adjacency buffer is read by the decoupler and then
// by the recoupler through one port, switched by the decoupler's busy flag.
//
// Structure (Decoupler, Recoupler, their buffers) follows the paper; the
// strictly sequential epoch is this design's simplification of the paper's
// pipelined Decoupler / Recoupler / accelerator flow.
//
// Lint note: the wide-replication and reset-use notes reported here come
// from the sub-blocks and are explained in their opening comments.
module graph_restructurer
  import sihgnn_pkg::*;
#(
  parameter int V_W        = DEF_V_W,
  parameter int E_W        = DEF_E_W,
  parameter int FIFO_DEPTH = 4096
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [V_W:0]   num_src,
  input  logic [V_W:0]   num_dst,
  // topology stream from memory
  input  logic           e_valid,
  output logic           e_ready,
  input  logic [V_W-1:0] e_src,
  input  logic [V_W-1:0] e_dst,
  input  logic           e_last,
  // vertex class streams: 0 Src_in, 1 Src_out, 2 Dst_in, 3 Dst_out
  output logic [3:0]     cls_valid,
  input  logic [3:0]     cls_ready,
  output logic [V_W-1:0] cls_id [4],
  // restructured topology to the accelerator
  output logic           sg_valid,
  input  logic           sg_ready,
  output logic [V_W-1:0] sg_src,
  output logic [V_W-1:0] sg_dst,
  output subgraph_e      sg_id,
  // status
  output logic [E_W:0]   num_edges,
  output logic           overflow,
  output logic [V_W:0]   match_count,
  output logic [31:0]    rematch_count,
  output logic [E_W:0]   sub_count [3],
  output logic [31:0]    search_stalls,
  output logic [31:0]    gen_stalls,
  output logic           busy,
  output logic           done
);
  logic [V_W:0] nsrc, ndst;
  logic         run;

  // loader <-> adjacency buffers
  logic           s_clr, s_pfx, s_cnt, s_put, s_busy;
  logic           d_clr, d_pfx, d_cnt, d_put, d_busy;
  logic [V_W-1:0] s_key, s_val, d_key, d_val;
  logic           ld_done, ld_busy;

  // readers
  logic [V_W-1:0] sadj_key, dadj_key, dec_key, rec_skey;
  logic [E_W-1:0] sadj_idx, dadj_idx, dec_idx, rec_sidx;
  logic [E_W:0]   sadj_begin, sadj_end, dadj_begin, dadj_end;
  logic [V_W-1:0] sadj_val, dadj_val;
  logic [E_W-1:0] rd_e;
  logic [V_W-1:0] el_src, el_dst;

  logic           dec_busy, dec_done;
  logic           cand_clear, cand_we;
  logic [V_W-1:0] cand_wsrc, cand_wdst;
  logic [V_W-1:0] q_src, q_dst;
  logic           q_src_matched, q_dst_matched;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      nsrc <= '0;
      ndst <= '0;
      run  <= 1'b0;
    end else if (start && !run) begin
      nsrc <= num_src;
      ndst <= num_dst;
      run  <= 1'b1;
    end else if (done) begin
      run  <= 1'b0;
    end
  end

  logic ld_start;
  assign ld_start = start && !run;
  assign busy     = run;

  topology_loader #(.V_W(V_W), .E_W(E_W)) u_loader (
    .clk, .rst_n, .start(ld_start),
    .e_valid, .e_ready, .e_src, .e_dst, .e_last,
    .s_clr, .s_pfx, .s_cnt, .s_put, .s_key, .s_val, .s_busy,
    .d_clr, .d_pfx, .d_cnt, .d_put, .d_key, .d_val, .d_busy,
    .rd_e, .rd_src(el_src), .rd_dst(el_dst),
    .num_edges, .overflow, .busy(ld_busy), .done(ld_done)
  );

  adj_buffer #(.V_W(V_W), .E_W(E_W)) u_src_adj (
    .clk, .rst_n, .clr_start(s_clr), .pfx_start(s_pfx), .n_keys(ld_busy ? nsrc : num_src),
    .busy(s_busy), .cnt_en(s_cnt), .cnt_key(s_key),
    .put_en(s_put), .put_key(s_key), .put_val(s_val),
    .rd_key(sadj_key), .rd_begin(sadj_begin), .rd_end(sadj_end),
    .rd_idx(sadj_idx), .rd_val(sadj_val)
  );

  adj_buffer #(.V_W(V_W), .E_W(E_W)) u_dst_adj (
    .clk, .rst_n, .clr_start(d_clr), .pfx_start(d_pfx), .n_keys(ld_busy ? ndst : num_dst),
    .busy(d_busy), .cnt_en(d_cnt), .cnt_key(d_key),
    .put_en(d_put), .put_key(d_key), .put_val(d_val),
    .rd_key(dadj_key), .rd_begin(dadj_begin), .rd_end(dadj_end),
    .rd_idx(dadj_idx), .rd_val(dadj_val)
  );

  assign sadj_key = dec_busy ? dec_key : rec_skey;
  assign sadj_idx = dec_busy ? dec_idx : rec_sidx;

  decoupler #(.V_W(V_W), .E_W(E_W)) u_decoupler (
    .clk, .rst_n, .start(ld_done), .num_src(nsrc),
    .adj_key(dec_key), .adj_begin(sadj_begin), .adj_end(sadj_end),
    .adj_idx(dec_idx), .adj_val(sadj_val),
    .cand_clear, .cand_we, .cand_src(cand_wsrc), .cand_dst(cand_wdst),
    .q_src, .q_src_matched, .q_dst, .q_dst_matched,
    .match_count, .rematch_count, .busy(dec_busy), .done(dec_done)
  );

  recoupler #(.V_W(V_W), .E_W(E_W), .FIFO_DEPTH(FIFO_DEPTH)) u_recoupler (
    .clk, .rst_n, .start(dec_done), .num_src(nsrc), .num_dst(ndst), .num_edges,
    .cand_clear, .cand_we, .cand_wsrc, .cand_wdst,
    .sadj_key(rec_skey), .sadj_begin, .sadj_end, .sadj_idx(rec_sidx), .sadj_val,
    .dadj_key, .dadj_begin, .dadj_end, .dadj_idx, .dadj_val,
    .q_src, .q_src_matched, .q_dst, .q_dst_matched,
    .rd_e, .e_src(el_src), .e_dst(el_dst),
    .cls_valid, .cls_ready, .cls_id,
    .sg_valid, .sg_ready, .sg_src, .sg_dst, .sg_id, .sub_count,
    .cand_count(), .search_stalls, .gen_stalls, .busy(), .done
  );
endmodule
