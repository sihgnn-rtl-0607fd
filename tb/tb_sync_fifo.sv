// tb_sync_fifo: random pushes and pops against a queue model, checking
// dout, empty, full and count every cycle, and clear.
module tb_sync_fifo;
  localparam int W = 8, D = 5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear, push, pop, empty, full;
  logic [W-1:0] din, dout;
  logic [$clog2(D+1)-1:0] count;
  sync_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);
  int checks = 0, failures = 0, nfull = 0;
  logic [W-1:0] q [$];
  initial begin
    clear = 0; push = 0; pop = 0; din = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      checks++;
      if (empty != (q.size() == 0) || full != (q.size() == D) || int'(count) != q.size() ||
          (q.size() > 0 && dout != q[0])) begin
        failures++; $display("FAIL: t=%0d size %0d count %0d", t, q.size(), count);
      end
      if (full) nfull++;
      clear = (t % 500 == 499);
      push  = !full && ($urandom_range(0, 2) != 0 || t % 200 < 20);
      pop   = !empty && ($urandom_range(0, 2) == 0);
      din   = W'($urandom);
      @(posedge clk);
      if (clear) q.delete();
      else begin
        if (pop) void'(q.pop_front());
        if (push) q.push_back(din);
      end
    end
    checks++;
    if (nfull == 0) begin failures++; $display("FAIL: never full"); end
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
