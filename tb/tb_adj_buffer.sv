// tb_adj_buffer: builds the buffer from random (key, value) pairs with the
// clear / count / prefix / put sequence and checks every list (begin, end
// and entries in put order) against a model; repeats with new sizes to
// show that a rebuild forgets the previous graph.
module tb_adj_buffer;
  localparam int V_W = 4, E_W = 6, NV = 1 << V_W;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clr_start, pfx_start, busy, cnt_en, put_en;
  logic [V_W:0] n_keys;
  logic [V_W-1:0] cnt_key, put_key, put_val, rd_key, rd_val;
  logic [E_W:0] rd_begin, rd_end;
  logic [E_W-1:0] rd_idx;
  adj_buffer #(.V_W(V_W), .E_W(E_W)) dut (.*);
  int checks = 0, failures = 0;
  int keys [$], vals [$];
  int lists [NV][$];
  task automatic chk(input bit ok, input string w);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", w); end
  endtask
  initial begin
    clr_start = 0; pfx_start = 0; cnt_en = 0; put_en = 0; n_keys = 0;
    cnt_key = 0; put_key = 0; put_val = 0; rd_key = 0; rd_idx = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < 4; r++) begin
      int nk = $urandom_range(1, NV), ne = $urandom_range(1, 1 << E_W);
      keys.delete(); vals.delete();
      foreach (lists[k]) lists[k].delete();
      for (int e = 0; e < ne; e++) begin
        keys.push_back($urandom_range(0, nk - 1)); vals.push_back($urandom_range(0, NV - 1));
        lists[keys[e]].push_back(vals[e]);
      end
      @(negedge clk); n_keys = (V_W+1)'(nk); clr_start = 1;
      @(negedge clk); clr_start = 0;
      while (busy) @(negedge clk);
      foreach (keys[e]) begin cnt_en = 1; cnt_key = V_W'(keys[e]); @(negedge clk); end
      cnt_en = 0; pfx_start = 1;
      @(negedge clk); pfx_start = 0;
      while (busy) @(negedge clk);
      foreach (keys[e]) begin
        put_en = 1; put_key = V_W'(keys[e]); put_val = V_W'(vals[e]); @(negedge clk);
      end
      put_en = 0;
      for (int k = 0; k < nk; k++) begin
        rd_key = V_W'(k); #1;
        chk(int'(rd_end) - int'(rd_begin) == lists[k].size(), $sformatf("degree of %0d", k));
        foreach (lists[k][j]) begin
          rd_idx = E_W'(int'(rd_begin) + j); #1;
          chk(int'(rd_val) == lists[k][j], $sformatf("entry %0d of %0d", j, k));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
