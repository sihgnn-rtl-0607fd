// candidate_buffer: holds the backbone candidates, i.e. the matched
// (source, destination) pairs written by the decoupler, for the recoupler.
//
// clear empties it, each wr_en appends one pair, rd_idx reads pair rd_idx
// combinationally, count gives the number of pairs. Entries beyond DEPTH are
// dropped. The paper names this buffer; storing pairs (rather than single
// vertices) is this design's choice, so the recoupler can walk the matched
// sources and then the matched destinations from one list.
module candidate_buffer #(
  parameter int V_W   = 14,
  parameter int DEPTH = 1 << V_W
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           clear,
  input  logic           wr_en,
  input  logic [V_W-1:0] wr_src,
  input  logic [V_W-1:0] wr_dst,
  input  logic [V_W-1:0] rd_idx,
  output logic [V_W-1:0] rd_src,
  output logic [V_W-1:0] rd_dst,
  output logic [V_W:0]   count
);
  logic [2*V_W-1:0] mem [DEPTH];

  assign {rd_src, rd_dst} = mem[rd_idx];

  always_ff @(posedge clk) begin
    if (wr_en && !clear && int'(count) < DEPTH) mem[count[V_W-1:0]] <= {wr_src, wr_dst};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                                  count <= '0;
    else if (clear)                              count <= '0;
    else if (wr_en && int'(count) < DEPTH)       count <= count + 1'b1;
  end
endmodule
