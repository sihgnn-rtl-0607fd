// sihgnn_top: the SiHGNN accelerator frontend.
//
// Two independent halves share nothing but the clock:
//  * Semantic Graph Builder: the host sends a metapath; the builder returns
//    the generation list (which stored semantic graphs to join, in order)
//    and remembers the new metapath in its Callback Trie Tree.
//  * Graph Restructurer: the memory controller streams the topology of a
//    built semantic graph in; the restructurer streams out the vertex
//    classes (Src_in, Src_out, Dst_in, Dst_out) and the same edges
//    regrouped into three subgraphs for the downstream HGNN accelerator.
// The host processor, the shared memory controller / HBM and the
// accelerator are outside this design; their connections are the ports.
//
// All ports are plain signals or arrays; see the two sub-blocks for their
// protocols (every stream is valid/ready).
//
// Lint note: the wide-replication and reset-use notes reported here come
// from the sub-blocks and are explained in their opening comments.
module sihgnn_top
  import sihgnn_pkg::*;
#(
  parameter int CTT_WORDS  = CTT_DEPTH,
  parameter int V_W        = DEF_V_W,
  parameter int E_W        = DEF_E_W,
  parameter int FIFO_DEPTH = 4096
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // host: metapath request and generation list
  input  logic                 mp_valid,
  output logic                 mp_ready,
  input  logic                 mp_build,
  input  vtype_t [MAX_LEN-1:0] mp_path,
  input  len_t                 mp_len,
  output logic                 gl_valid,
  input  logic                 gl_ready,
  output gen_elem_t            gl_elem,
  output logic                 gl_last,
  output logic                 mp_done,
  output logic                 mp_err,
  output ctt_ptr_t             mp_sg_node,
  // memory controller: semantic graph topology
  input  logic                 rs_start,
  input  logic [V_W:0]         rs_num_src,
  input  logic [V_W:0]         rs_num_dst,
  input  logic                 e_valid,
  output logic                 e_ready,
  input  logic [V_W-1:0]       e_src,
  input  logic [V_W-1:0]       e_dst,
  input  logic                 e_last,
  // accelerator: vertex classes and restructured topology
  output logic [3:0]           cls_valid,
  input  logic [3:0]           cls_ready,
  output logic [V_W-1:0]       cls_id [4],
  output logic                 sg_valid,
  input  logic                 sg_ready,
  output logic [V_W-1:0]       sg_src,
  output logic [V_W-1:0]       sg_dst,
  output subgraph_e            sg_id,
  // status
  output logic [E_W:0]         rs_num_edges,
  output logic                 rs_overflow,
  output logic [V_W:0]         rs_match_count,
  output logic [31:0]          rs_rematch_count,
  output logic [E_W:0]         rs_sub_count [3],
  output logic [31:0]          rs_search_stalls,
  output logic [31:0]          rs_gen_stalls,
  output logic                 rs_busy,
  output logic                 rs_done
);
  semantic_graph_builder #(.DEPTH(CTT_WORDS)) u_builder (
    .clk, .rst_n,
    .req_valid(mp_valid), .req_ready(mp_ready), .req_build(mp_build),
    .req_path(mp_path), .req_len(mp_len),
    .gl_valid, .gl_ready, .gl_elem, .gl_last,
    .done(mp_done), .done_err(mp_err), .done_sg_node(mp_sg_node)
  );

  graph_restructurer #(.V_W(V_W), .E_W(E_W), .FIFO_DEPTH(FIFO_DEPTH)) u_restructurer (
    .clk, .rst_n, .start(rs_start), .num_src(rs_num_src), .num_dst(rs_num_dst),
    .e_valid, .e_ready, .e_src, .e_dst, .e_last,
    .cls_valid, .cls_ready, .cls_id,
    .sg_valid, .sg_ready, .sg_src, .sg_dst, .sg_id,
    .num_edges(rs_num_edges), .overflow(rs_overflow),
    .match_count(rs_match_count), .rematch_count(rs_rematch_count),
    .sub_count(rs_sub_count), .search_stalls(rs_search_stalls),
    .gen_stalls(rs_gen_stalls), .busy(rs_busy), .done(rs_done)
  );
endmodule
