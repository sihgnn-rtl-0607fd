// recoupler: graph recoupling stage of the Graph Restructurer.
//
// Holds the candidate buffer (written by the decoupler), the Backbone
// Searcher, the four class FIFOs Src_in, Src_out, Dst_in, Dst_out and the
// Graph Generator. On start the searcher classifies every vertex, pushing it
// into its class FIFO; when it finishes the generator re-emits the edges as
// three subgraphs. The class FIFOs are drained by the downstream
// accelerator through valid/ready ports (index 0 Src_in, 1 Src_out,
// 2 Dst_in, 3 Dst_out); a full FIFO stalls the searcher. done pulses when
// the generator has emitted the last edge.
//
// The block structure follows the paper's figure of the Recoupler. The FIFO
// depth is this design's choice; the paper gives only the 480 KB total of
// the Recoupler.
//
// Lint note: the wide-replication and reset-use notes reported here come
// from the sub-blocks and are explained in their opening comments.
module recoupler
  import sihgnn_pkg::*;
#(
  parameter int V_W        = 14,
  parameter int E_W        = 16,
  parameter int FIFO_DEPTH = 4096
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [V_W:0]   num_src,
  input  logic [V_W:0]   num_dst,
  input  logic [E_W:0]   num_edges,
  // candidate buffer write port
  input  logic           cand_clear,
  input  logic           cand_we,
  input  logic [V_W-1:0] cand_wsrc,
  input  logic [V_W-1:0] cand_wdst,
  // adjacency buffers
  output logic [V_W-1:0] sadj_key,
  input  logic [E_W:0]   sadj_begin,
  input  logic [E_W:0]   sadj_end,
  output logic [E_W-1:0] sadj_idx,
  input  logic [V_W-1:0] sadj_val,
  output logic [V_W-1:0] dadj_key,
  input  logic [E_W:0]   dadj_begin,
  input  logic [E_W:0]   dadj_end,
  output logic [E_W-1:0] dadj_idx,
  input  logic [V_W-1:0] dadj_val,
  // matching bitmaps
  output logic [V_W-1:0] q_src,
  input  logic           q_src_matched,
  output logic [V_W-1:0] q_dst,
  input  logic           q_dst_matched,
  // edge list
  output logic [E_W-1:0] rd_e,
  input  logic [V_W-1:0] e_src,
  input  logic [V_W-1:0] e_dst,
  // vertex class streams
  output logic [3:0]     cls_valid,
  input  logic [3:0]     cls_ready,
  output logic [V_W-1:0] cls_id [4],
  // subgraph edge stream
  output logic           sg_valid,
  input  logic           sg_ready,
  output logic [V_W-1:0] sg_src,
  output logic [V_W-1:0] sg_dst,
  output subgraph_e      sg_id,
  output logic [E_W:0]   sub_count [3],
  output logic [V_W:0]   cand_count,
  output logic [31:0]    search_stalls,
  output logic [31:0]    gen_stalls,
  output logic           busy,
  output logic           done
);
  logic [V_W-1:0] cand_idx, cand_src, cand_dst;
  logic [3:0]     push, fifo_full, fifo_empty;
  logic [V_W-1:0] push_id;
  logic [V_W-1:0] g_src, g_dst;
  logic           g_src_in, g_dst_in;
  logic           bs_done, bs_busy, gen_busy;

  candidate_buffer #(.V_W(V_W)) u_cand (
    .clk, .rst_n, .clear(cand_clear), .wr_en(cand_we),
    .wr_src(cand_wsrc), .wr_dst(cand_wdst),
    .rd_idx(cand_idx), .rd_src(cand_src), .rd_dst(cand_dst), .count(cand_count)
  );

  backbone_searcher #(.V_W(V_W), .E_W(E_W)) u_searcher (
    .clk, .rst_n, .start, .num_src, .num_dst,
    .cand_count, .cand_idx, .cand_src, .cand_dst,
    .sadj_key, .sadj_begin, .sadj_end, .sadj_idx, .sadj_val,
    .dadj_key, .dadj_begin, .dadj_end, .dadj_idx, .dadj_val,
    .q_src, .q_src_matched, .q_dst, .q_dst_matched,
    .push, .push_id, .fifo_full,
    .g_src, .g_src_in, .g_dst, .g_dst_in,
    .stall_cycles(search_stalls), .busy(bs_busy), .done(bs_done)
  );

  for (genvar c = 0; c < 4; c++) begin : g_cls
    sync_fifo #(.WIDTH(V_W), .DEPTH(FIFO_DEPTH)) u_fifo (
      .clk, .rst_n, .clear(1'b0), .push(push[c]), .din(push_id),
      .pop(cls_ready[c] && !fifo_empty[c]), .dout(cls_id[c]),
      .empty(fifo_empty[c]), .full(fifo_full[c]), .count()
    );
    assign cls_valid[c] = !fifo_empty[c];
  end

  graph_generator #(.V_W(V_W), .E_W(E_W)) u_gen (
    .clk, .rst_n, .start(bs_done), .num_edges,
    .rd_e, .e_src, .e_dst,
    .g_src, .g_src_in, .g_dst, .g_dst_in,
    .sg_valid, .sg_ready, .sg_src, .sg_dst, .sg_id, .sub_count,
    .stall_cycles(gen_stalls), .busy(gen_busy), .done
  );

  assign busy = bs_busy || gen_busy;
endmodule
