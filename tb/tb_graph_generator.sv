// tb_graph_generator: random edge lists and random Src_in / Dst_in
// memberships; the accelerator side drops ready at random. Checks that the
// edge stream is pass 0 (Src_in -> not Dst_in), pass 1 (not Src_in ->
// Dst_in), pass 2 (the rest), each in edge-list order, with the right
// subgraph id, that sub_count matches, and that the generator waited.
module tb_graph_generator;
  import sihgnn_pkg::*;
  localparam int V_W = 4, E_W = 6, NV = 1 << V_W;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, g_src_in, g_dst_in, sg_valid, sg_ready, busy, done;
  logic [E_W:0] num_edges;
  logic [E_W-1:0] rd_e;
  logic [V_W-1:0] e_src, e_dst, g_src, g_dst, sg_src, sg_dst;
  subgraph_e sg_id;
  logic [E_W:0] sub_count [3];
  logic [31:0] stall_cycles;
  graph_generator #(.V_W(V_W), .E_W(E_W)) dut (.*);

  int checks = 0, failures = 0, n_stall = 0;
  int es [1 << E_W], ed [1 << E_W];
  bit sin [NV], din [NV];
  assign e_src = V_W'(es[rd_e]);
  assign e_dst = V_W'(ed[rd_e]);
  assign g_src_in = sin[g_src];
  assign g_dst_in = din[g_dst];
  task automatic chk(input bit ok, input string w);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", w); end
  endtask
  int gs [$], gd [$], gk [$];
  always @(posedge clk) if (sg_valid && sg_ready) begin
    gs.push_back(int'(sg_src)); gd.push_back(int'(sg_dst)); gk.push_back(int'(sg_id));
  end
  always @(negedge clk) sg_ready = ($urandom_range(0, 2) != 0);

  initial begin
    start = 0; num_edges = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 20; t++) begin
      int ne, cnt [3];
      int xs [$], xd [$], xk [$];
      ne = $urandom_range(1, 1 << E_W);
      for (int e = 0; e < ne; e++) begin es[e] = $urandom_range(0, NV - 1); ed[e] = $urandom_range(0, NV - 1); end
      for (int v = 0; v < NV; v++) begin sin[v] = 1'($urandom); din[v] = 1'($urandom); end
      cnt = '{0, 0, 0};
      xs.delete(); xd.delete(); xk.delete();
      for (int p = 0; p < 3; p++)
        for (int e = 0; e < ne; e++) begin
          int k;
          k = (sin[es[e]] && !din[ed[e]]) ? 0 : (!sin[es[e]] && din[ed[e]]) ? 1 : 2;
          if (k == p) begin xs.push_back(es[e]); xd.push_back(ed[e]); xk.push_back(p); cnt[p]++; end
        end
      gs.delete(); gd.delete(); gk.delete();
      @(negedge clk); start = 1; num_edges = (E_W+1)'(ne);
      @(negedge clk); start = 0;
      while (!done) @(negedge clk);
      chk(gs == xs && gd == xd && gk == xk, "subgraph stream");
      chk(int'(sub_count[0]) == cnt[0] && int'(sub_count[1]) == cnt[1] && int'(sub_count[2]) == cnt[2], "sub_count");
      if (stall_cycles > 0) n_stall++;
    end
    chk(n_stall > 0, "generator waited on ready");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
