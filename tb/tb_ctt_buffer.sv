// tb_ctt_buffer: writes random node words to random addresses of a small
// CTT buffer and reads them back through both read ports against a model;
// words never written must read as invalid after reset.
module tb_ctt_buffer;
  import sihgnn_pkg::*;
  localparam int DEPTH = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  ctt_ptr_t  rd_addr_a, rd_addr_b, wr_addr;
  ctt_node_t rd_data_a, rd_data_b, wr_data;
  logic      we;
  ctt_buffer #(.DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  ctt_node_t model [DEPTH];
  bit        written [DEPTH];

  initial begin
    we = 0; wr_addr = 0; wr_data = '0; rd_addr_a = 0; rd_addr_b = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      we      = ($urandom_range(0, 1) == 1);
      wr_addr = ctt_ptr_t'($urandom_range(0, DEPTH - 1));
      wr_data = ctt_node_t'({$urandom, $urandom});
      wr_data.valid = 1'b1;
      rd_addr_a = ctt_ptr_t'($urandom_range(0, DEPTH - 1));
      rd_addr_b = ctt_ptr_t'($urandom_range(0, DEPTH - 1));
      #1;
      checks += 2;
      if (written[rd_addr_a] ? rd_data_a != model[rd_addr_a] : rd_data_a.valid) begin
        failures++; $display("FAIL: port a addr %0d", rd_addr_a);
      end
      if (written[rd_addr_b] ? rd_data_b != model[rd_addr_b] : rd_data_b.valid) begin
        failures++; $display("FAIL: port b addr %0d", rd_addr_b);
      end
      @(posedge clk);
      if (we) begin model[wr_addr] = wr_data; written[wr_addr] = 1; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
