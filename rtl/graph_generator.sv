// graph_generator: re-emits the edges of the semantic graph grouped into
// the three subgraphs of the restructured layout.
//
// It makes three passes over the edge list. Pass 0 emits the edges from a
// Src_in vertex to a destination outside Dst_in (Src_in -> Dst_out), pass 1
// the edges from a source outside Src_in to a Dst_in vertex
// (Src_out -> Dst_in), pass 2 every remaining edge (Src_in -> Dst_in, and
// any Src_out -> Dst_out edge, so no edge is lost). Each pass reads one edge
// per cycle; an edge that belongs to the pass is offered on a valid/ready
// stream with its subgraph id and waits there while ready is low
// (stall_cycles counts those cycles). sub_count gives the edges per
// subgraph. Cost: 3 x E cycles plus stalls.
//
// The paper states that the Graph Generator builds the subgraphs from the
// four vertex classes and that the edges touching Src_out all end in Dst_in
// and those touching Dst_out all start in Src_in; the three-pass order and
// the catch-all third subgraph are this design's own.
//
// Lint note: rst_n is the asynchronous reset of every flop here and is also
// read in the disable iff of the assertions; a linter reports that second
// use as a synchronous one. The circuit uses it only asynchronously.
module graph_generator
  import sihgnn_pkg::*;
#(
  parameter int V_W = 14,
  parameter int E_W = 16
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [E_W:0]   num_edges,
  // edge list
  output logic [E_W-1:0] rd_e,
  input  logic [V_W-1:0] e_src,
  input  logic [V_W-1:0] e_dst,
  // class bitmaps
  output logic [V_W-1:0] g_src,
  input  logic           g_src_in,
  output logic [V_W-1:0] g_dst,
  input  logic           g_dst_in,
  // subgraph edge stream
  output logic           sg_valid,
  input  logic           sg_ready,
  output logic [V_W-1:0] sg_src,
  output logic [V_W-1:0] sg_dst,
  output subgraph_e      sg_id,
  output logic [E_W:0]   sub_count [3],
  output logic [31:0]    stall_cycles,
  output logic           busy,
  output logic           done
);
  typedef enum logic [1:0] {G_IDLE, G_RUN, G_DONE} state_e;

  state_e       st;
  logic [1:0]   pass;
  logic [E_W:0] e, ne;
  subgraph_e    cls;

  assign rd_e   = e[E_W-1:0];
  assign g_src  = e_src;
  assign g_dst  = e_dst;
  assign sg_src = e_src;
  assign sg_dst = e_dst;
  assign sg_id  = subgraph_e'(pass);
  assign busy   = (st != G_IDLE);
  assign done   = (st == G_DONE);

  always_comb begin
    if (g_src_in && !g_dst_in)      cls = SUB_SRCIN_DSTOUT;
    else if (!g_src_in && g_dst_in) cls = SUB_SRCOUT_DSTIN;
    else                            cls = SUB_REST;
  end

  assign sg_valid = (st == G_RUN) && (e != ne) && (cls == subgraph_e'(pass));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st           <= G_IDLE;
      pass         <= '0;
      e            <= '0;
      ne           <= '0;
      sub_count    <= '{default: '0};
      stall_cycles <= '0;
    end else begin
      unique case (st)
        G_IDLE: if (start) begin
          pass         <= '0;
          e            <= '0;
          ne           <= num_edges;
          sub_count    <= '{default: '0};
          stall_cycles <= '0;
          st           <= G_RUN;
        end
        G_RUN: begin
          if (e == ne) begin
            e <= '0;
            if (pass == 2'd2) st <= G_DONE;
            else              pass <= pass + 1'b1;
          end else if (sg_valid && !sg_ready) begin
            stall_cycles <= stall_cycles + 1'b1;
          end else begin
            if (sg_valid) sub_count[pass] <= sub_count[pass] + 1'b1;
            e <= e + 1'b1;
          end
        end
        G_DONE: st <= G_IDLE;
        default: st <= G_IDLE;
      endcase
    end
  end

  a_sg_hold: assert property (@(posedge clk) disable iff (!rst_n)
    sg_valid && !sg_ready |=> sg_valid && $stable({sg_src, sg_dst, sg_id}));
endmodule
