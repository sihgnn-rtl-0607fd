// tb_topology_loader: streams random unsorted edge lists (with gaps) into
// the loader, which drives two adjacency buffers, and checks the kept edge
// list, the edge count, and both adjacency sides (in stream order) against
// a model. The last run sends more edges than fit and expects overflow.
module tb_topology_loader;
  localparam int V_W = 4, E_W = 6, NV = 1 << V_W, NE = 1 << E_W;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, e_valid, e_ready, e_last, overflow, busy, done;
  logic [V_W-1:0] e_src, e_dst, rd_src, rd_dst;
  logic s_clr, s_pfx, s_cnt, s_put, s_busy, d_clr, d_pfx, d_cnt, d_put, d_busy;
  logic [V_W-1:0] s_key, s_val, d_key, d_val;
  logic [E_W-1:0] rd_e;
  logic [E_W:0] num_edges;
  logic [V_W:0] nsrc, ndst;
  logic [V_W-1:0] sk, dk, sv, dv;
  logic [E_W:0] sb, se, db, de;
  logic [E_W-1:0] si, di;

  topology_loader #(.V_W(V_W), .E_W(E_W)) dut (.*);
  adj_buffer #(.V_W(V_W), .E_W(E_W)) u_s (.clk, .rst_n, .clr_start(s_clr), .pfx_start(s_pfx),
    .n_keys(nsrc), .busy(s_busy), .cnt_en(s_cnt), .cnt_key(s_key), .put_en(s_put),
    .put_key(s_key), .put_val(s_val), .rd_key(sk), .rd_begin(sb), .rd_end(se), .rd_idx(si), .rd_val(sv));
  adj_buffer #(.V_W(V_W), .E_W(E_W)) u_d (.clk, .rst_n, .clr_start(d_clr), .pfx_start(d_pfx),
    .n_keys(ndst), .busy(d_busy), .cnt_en(d_cnt), .cnt_key(d_key), .put_en(d_put),
    .put_key(d_key), .put_val(d_val), .rd_key(dk), .rd_begin(db), .rd_end(de), .rd_idx(di), .rd_val(dv));

  int checks = 0, failures = 0;
  int es [$], ed [$];
  int sl [NV][$], dl [NV][$];
  task automatic chk(input bit ok, input string w);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", w); end
  endtask

  task automatic run(input int ns, input int nd, input int ne);
    int kept;
    es.delete(); ed.delete();
    foreach (sl[k]) begin sl[k].delete(); dl[k].delete(); end
    for (int e = 0; e < ne; e++) begin
      es.push_back($urandom_range(0, ns - 1)); ed.push_back($urandom_range(0, nd - 1));
      if (e < NE) begin sl[es[e]].push_back(ed[e]); dl[ed[e]].push_back(es[e]); end
    end
    @(negedge clk);
    start = 1; nsrc = (V_W+1)'(ns); ndst = (V_W+1)'(nd);
    @(negedge clk);
    start = 0;
    foreach (es[e]) begin
      while ($urandom_range(0, 2) == 0) @(negedge clk);
      e_valid = 1; e_src = V_W'(es[e]); e_dst = V_W'(ed[e]); e_last = (e == ne - 1);
      @(posedge clk);
      while (!e_ready) @(posedge clk);
      @(negedge clk);
      e_valid = 0; e_last = 0;
    end
    while (!done) @(negedge clk);
    kept = (ne < NE) ? ne : NE;
    chk(int'(num_edges) == kept && overflow == (ne > NE), "edge count / overflow");
    for (int e = 0; e < kept; e++) begin
      rd_e = E_W'(e); #1;
      chk(int'(rd_src) == es[e] && int'(rd_dst) == ed[e], "edge list");
    end
    for (int k = 0; k < ns; k++) begin
      sk = V_W'(k); #1;
      chk(int'(se) - int'(sb) == sl[k].size(), "source degree");
      foreach (sl[k][j]) begin si = E_W'(int'(sb) + j); #1; chk(int'(sv) == sl[k][j], "source list"); end
    end
    for (int k = 0; k < nd; k++) begin
      dk = V_W'(k); #1;
      chk(int'(de) - int'(db) == dl[k].size(), "destination degree");
      foreach (dl[k][j]) begin di = E_W'(int'(db) + j); #1; chk(int'(dv) == dl[k][j], "destination list"); end
    end
  endtask

  initial begin
    start = 0; e_valid = 0; e_last = 0; e_src = 0; e_dst = 0; rd_e = 0; nsrc = 0; ndst = 0;
    sk = 0; dk = 0; si = 0; di = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(16, 16, 40);
    run(5, 12, 20);
    run(16, 3, NE + 5);
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
