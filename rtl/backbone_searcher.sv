// backbone_searcher: selects the graph backbone from the backbone
// candidates and sorts every vertex into Src_in, Src_out, Dst_in or Dst_out
// (graph recoupling, Algorithm 2 of the paper).
//
// Pass S walks the matched pairs and reads the out-neighbours of each
// matched source from the source-side adjacency buffer, one per cycle. Each
// neighbour not set in the destination matching bitmap goes to Dst_out (once,
// guarded by a class bitmap); if the source had at least one, the source
// goes to Src_in. Pass T does the same for each matched destination with its
// in-neighbours: unmatched ones go to Src_out, the destination to Dst_in.
// Pass R puts every source not yet classified in Src_out and every
// destination not yet classified in Dst_out.
//
// A vertex is pushed into its class FIFO with a one-hot push and a shared
// id. When the target FIFO is full the searcher waits (stall_cycles counts
// these cycles). The class bitmaps Src_in / Dst_in stay readable for the
// Graph Generator. Cost: pairs + sum of the candidates' degrees + n_src +
// n_dst cycles plus stalls.
//
// The classification rules are Algorithm 2; the bitmaps that keep a vertex
// from being pushed twice and the pass-by-pass sequencing are this design's.
//
// Lint note: rst_n is the asynchronous reset of every flop here and is also
// read in the disable iff of the assertions; a linter reports that second
// use as a synchronous one. The circuit uses it only asynchronously.//
// Lint note: the matching / class bitmaps are 2**V_W flops wide and are
// cleared in one cycle with '0; at the default V_W = 14 a linter reports that
// as a suspiciously wide replication. The one-cycle clear is intended.
module backbone_searcher #(
  parameter int V_W = 14,
  parameter int E_W = 16
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [V_W:0]   num_src,
  input  logic [V_W:0]   num_dst,
  // candidate buffer
  input  logic [V_W:0]   cand_count,
  output logic [V_W-1:0] cand_idx,
  input  logic [V_W-1:0] cand_src,
  input  logic [V_W-1:0] cand_dst,
  // source-side adjacency buffer
  output logic [V_W-1:0] sadj_key,
  input  logic [E_W:0]   sadj_begin,
  input  logic [E_W:0]   sadj_end,
  output logic [E_W-1:0] sadj_idx,
  input  logic [V_W-1:0] sadj_val,
  // destination-side adjacency buffer
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
  // class FIFOs: [0] Src_in, [1] Src_out, [2] Dst_in, [3] Dst_out
  output logic [3:0]     push,
  output logic [V_W-1:0] push_id,
  input  logic [3:0]     fifo_full,
  // class bitmap lookups for the Graph Generator
  input  logic [V_W-1:0] g_src,
  output logic           g_src_in,
  input  logic [V_W-1:0] g_dst,
  output logic           g_dst_in,
  output logic [31:0]    stall_cycles,
  output logic           busy,
  output logic           done
);
  localparam int NV = 1 << V_W;
  localparam int C_SRC_IN = 0, C_SRC_OUT = 1, C_DST_IN = 2, C_DST_OUT = 3;

  typedef enum logic [3:0] {B_IDLE, B_SLOAD, B_SSCAN, B_TLOAD, B_TSCAN,
                            B_RSRC, B_RDST, B_DONE} state_e;

  state_e         st;
  logic [V_W:0]   k;
  logic [E_W:0]   ptr, endp;
  logic           found;
  logic [V_W:0]   nsrc, ndst;
  logic [NV-1:0]  src_in_bm, src_out_bm, dst_in_bm, dst_out_bm;

  logic           scan_end;
  logic [3:0]     want;        // push this cycle would like to do
  logic           stall;

  assign cand_idx = k[V_W-1:0];
  assign sadj_key = cand_src;
  assign dadj_key = cand_dst;
  assign sadj_idx = ptr[E_W-1:0];
  assign dadj_idx = ptr[E_W-1:0];
  assign q_dst    = sadj_val;
  assign q_src    = dadj_val;
  assign scan_end = (ptr == endp);
  assign g_src_in = src_in_bm[g_src];
  assign g_dst_in = dst_in_bm[g_dst];
  assign busy     = (st != B_IDLE);
  assign done     = (st == B_DONE);

  // which class FIFO this cycle pushes into, and which vertex
  always_comb begin
    want    = '0;
    push_id = '0;
    unique case (st)
      B_SSCAN: if (scan_end) begin
        want[C_SRC_IN] = found;
        push_id        = cand_src;
      end else begin
        want[C_DST_OUT] = !q_dst_matched && !dst_out_bm[sadj_val];
        push_id         = sadj_val;
      end
      B_TSCAN: if (scan_end) begin
        want[C_DST_IN] = found;
        push_id        = cand_dst;
      end else begin
        want[C_SRC_OUT] = !q_src_matched && !src_out_bm[dadj_val];
        push_id         = dadj_val;
      end
      B_RSRC: if (k != nsrc) begin
        want[C_SRC_OUT] = !src_in_bm[k[V_W-1:0]] && !src_out_bm[k[V_W-1:0]];
        push_id         = k[V_W-1:0];
      end
      B_RDST: if (k != ndst) begin
        want[C_DST_OUT] = !dst_in_bm[k[V_W-1:0]] && !dst_out_bm[k[V_W-1:0]];
        push_id         = k[V_W-1:0];
      end
      default: ;
    endcase
  end

  assign stall = |(want & fifo_full);
  assign push  = stall ? 4'b0 : want;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st           <= B_IDLE;
      k            <= '0;
      ptr          <= '0;
      endp         <= '0;
      found        <= 1'b0;
      nsrc         <= '0;
      ndst         <= '0;
      src_in_bm    <= '0;
      src_out_bm   <= '0;
      dst_in_bm    <= '0;
      dst_out_bm   <= '0;
      stall_cycles <= '0;
    end else begin
      if (stall) stall_cycles <= stall_cycles + 1'b1;
      if (push[C_SRC_IN])  src_in_bm[push_id]  <= 1'b1;
      if (push[C_SRC_OUT]) src_out_bm[push_id] <= 1'b1;
      if (push[C_DST_IN])  dst_in_bm[push_id]  <= 1'b1;
      if (push[C_DST_OUT]) dst_out_bm[push_id] <= 1'b1;
      unique case (st)
        B_IDLE: if (start) begin
          src_in_bm    <= '0;
          src_out_bm   <= '0;
          dst_in_bm    <= '0;
          dst_out_bm   <= '0;
          nsrc         <= num_src;
          ndst         <= num_dst;
          k            <= '0;
          stall_cycles <= '0;
          st           <= B_SLOAD;
        end
        // pass S: matched sources
        B_SLOAD: begin
          if (k == cand_count) begin
            k  <= '0;
            st <= B_TLOAD;
          end else begin
            ptr   <= sadj_begin;
            endp  <= sadj_end;
            found <= 1'b0;
            st    <= B_SSCAN;
          end
        end
        B_SSCAN: if (!stall) begin
          if (scan_end) begin
            k  <= k + 1'b1;
            st <= B_SLOAD;
          end else begin
            ptr <= ptr + 1'b1;
            if (!q_dst_matched) found <= 1'b1;
          end
        end
        // pass T: matched destinations
        B_TLOAD: begin
          if (k == cand_count) begin
            k  <= '0;
            st <= B_RSRC;
          end else begin
            ptr   <= dadj_begin;
            endp  <= dadj_end;
            found <= 1'b0;
            st    <= B_TSCAN;
          end
        end
        B_TSCAN: if (!stall) begin
          if (scan_end) begin
            k  <= k + 1'b1;
            st <= B_TLOAD;
          end else begin
            ptr <= ptr + 1'b1;
            if (!q_src_matched) found <= 1'b1;
          end
        end
        // pass R: everything left over
        B_RSRC: if (!stall) begin
          if (k == nsrc) begin
            k  <= '0;
            st <= B_RDST;
          end else begin
            k <= k + 1'b1;
          end
        end
        B_RDST: if (!stall) begin
          if (k == ndst) st <= B_DONE;
          else           k  <= k + 1'b1;
        end
        B_DONE: st <= B_IDLE;
        default: st <= B_IDLE;
      endcase
    end
  end

  a_onehot_push: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(push));
endmodule
