// ctt_buffer: node store of the Callback Trie Tree.
//
// DEPTH words of ctt_node_t (Data, Next P., Callback P. as in the paper,
// plus a valid bit and an is_sg flag). Words are grouped in blocks of
// NUM_TYPES: block 0 holds the level-1 nodes, every other block holds the
// children of one node, indexed by child type. The default depth fills the
// 5 KB CTT buffer of the paper with 26-bit words.
//
// Two combinational read ports (the node at CP and its candidate child) and
// one write port. Valid bits are flops cleared by reset, so a freshly
// allocated block reads as empty; the payload array is not reset.
// Writes take effect at the rising clock edge.
module ctt_buffer
  import sihgnn_pkg::*;
#(
  parameter int DEPTH = CTT_DEPTH
) (
  input  logic      clk,
  input  logic      rst_n,
  input  ctt_ptr_t  rd_addr_a,
  output ctt_node_t rd_data_a,
  input  ctt_ptr_t  rd_addr_b,
  output ctt_node_t rd_data_b,
  input  logic      we,
  input  ctt_ptr_t  wr_addr,
  input  ctt_node_t wr_data
);
  localparam int PW = $bits(ctt_node_t) - 1;  // payload without valid

  logic [PW-1:0]    mem [DEPTH];
  logic [DEPTH-1:0] valid_q;

  always_ff @(posedge clk) begin
    if (we && int'(wr_addr) < DEPTH) mem[wr_addr] <= wr_data[PW-1:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                            valid_q <= '0;
    else if (we && int'(wr_addr) < DEPTH)  valid_q[wr_addr] <= wr_data.valid;
  end

  always_comb begin
    rd_data_a = '0;
    rd_data_b = '0;
    if (int'(rd_addr_a) < DEPTH) rd_data_a = {valid_q[rd_addr_a], mem[rd_addr_a]};
    if (int'(rd_addr_b) < DEPTH) rd_data_b = {valid_q[rd_addr_b], mem[rd_addr_b]};
  end
endmodule
