// tb_candidate_buffer: appends random pairs, reads them back by index,
// checks count, the drop of writes beyond the depth, and clear.
module tb_candidate_buffer;
  localparam int V_W = 4, DEPTH = 12;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear, wr_en;
  logic [V_W-1:0] wr_src, wr_dst, rd_idx, rd_src, rd_dst;
  logic [V_W:0] count;
  candidate_buffer #(.V_W(V_W), .DEPTH(DEPTH)) dut (.*);
  int checks = 0, failures = 0;
  int ms [$], md [$];
  task automatic chk(input bit ok, input string w);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", w); end
  endtask
  initial begin
    clear = 0; wr_en = 0; wr_src = 0; wr_dst = 0; rd_idx = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < 3; r++) begin
      @(negedge clk); clear = 1; @(negedge clk); clear = 0;
      ms.delete(); md.delete();
      for (int k = 0; k < 15; k++) begin
        wr_en = 1; wr_src = V_W'($urandom); wr_dst = V_W'($urandom);
        if (ms.size() < DEPTH) begin ms.push_back(int'(wr_src)); md.push_back(int'(wr_dst)); end
        @(negedge clk);
      end
      wr_en = 0;
      chk(int'(count) == DEPTH, "count saturates at depth");
      foreach (ms[k]) begin
        rd_idx = V_W'(k); #1;
        chk(int'(rd_src) == ms[k] && int'(rd_dst) == md[k], $sformatf("pair %0d", k));
      end
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
