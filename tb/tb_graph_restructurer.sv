// tb_graph_restructurer: self-checking test of one restructuring epoch after
// another on random bipartite graphs (small V_W/E_W, tiny class FIFOs so
// that back-pressure happens).
//
// Reference, worked out in the testbench: the maximum matching size by a
// depth-first augmenting search; the vertex classes from the matched pairs
// the decoupler writes to the candidate buffer (Src_in = matched sources
// with an unmatched neighbour, Dst_in = matched destinations with an
// unmatched neighbour, everything else out); the edge order of the three
// subgraphs. Also checks that the pairs are edges and disjoint, that every
// vertex comes out in exactly one class, and counts the stall and
// re-matching events.
module tb_graph_restructurer;
  import sihgnn_pkg::*;
  localparam int V_W = 5, E_W = 8, NV = 1 << V_W;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic           start;
  logic [V_W:0]   num_src, num_dst;
  logic           e_valid, e_ready, e_last;
  logic [V_W-1:0] e_src, e_dst;
  logic [3:0]     cls_valid, cls_ready;
  logic [V_W-1:0] cls_id [4];
  logic           sg_valid, sg_ready;
  logic [V_W-1:0] sg_src, sg_dst;
  subgraph_e      sg_id;
  logic [E_W:0]   num_edges;
  logic           overflow;
  logic [V_W:0]   match_count;
  logic [31:0]    rematch_count, search_stalls, gen_stalls;
  logic [E_W:0]   sub_count [3];
  logic           busy, done;

  graph_restructurer #(.V_W(V_W), .E_W(E_W), .FIFO_DEPTH(4)) dut (.*);

  int checks = 0, failures = 0;
  int n_rematch = 0, n_sstall = 0, n_gstall = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // graph under test
  int ns, nd;
  int es [$], ed [$];
  int adj [NV][$];

  // reference maximum matching (Kuhn)
  int  rm_dst [NV];
  bit  rvis [NV];
  function automatic bit kuhn(int u);
    foreach (adj[u][k]) begin
      int v = adj[u][k];
      if (!rvis[v]) begin
        rvis[v] = 1;
        if (rm_dst[v] < 0 || kuhn(rm_dst[v])) begin
          rm_dst[v] = u;
          return 1;
        end
      end
    end
    return 0;
  endfunction

  // observed
  int pairs_s [$], pairs_d [$];
  int cls_q [4][$];
  int sg_s [$], sg_d [$], sg_k [$];

  always @(posedge clk) begin
    if (rst_n) begin
      if (dut.cand_we) begin
        pairs_s.push_back(int'(dut.cand_wsrc));
        pairs_d.push_back(int'(dut.cand_wdst));
      end
      for (int c = 0; c < 4; c++)
        if (cls_valid[c] && cls_ready[c]) cls_q[c].push_back(int'(cls_id[c]));
      if (sg_valid && sg_ready) begin
        sg_s.push_back(int'(sg_src)); sg_d.push_back(int'(sg_dst)); sg_k.push_back(int'(sg_id));
      end
    end
  end

  // random sinks
  always @(negedge clk) begin
    cls_ready = 4'($urandom_range(0, 15));
    sg_ready  = ($urandom_range(0, 3) != 0);
  end

  task automatic run_epoch(input int p_edge_pct);
    int ref_max, cyc;
    bit s_matched [NV], d_matched [NV], src_in [NV], dst_in [NV];
    bit seen_s [NV], seen_d [NV];
    int exp_s [$], exp_d [$], exp_k [$];
    // make graph
    es.delete(); ed.delete();
    foreach (adj[u]) adj[u].delete();
    for (int u = 0; u < ns; u++)
      for (int v = 0; v < nd; v++)
        if ($urandom_range(0, 99) < p_edge_pct) begin
          es.push_back(u); ed.push_back(v); adj[u].push_back(v);
        end
    if (es.size() == 0) begin es.push_back(0); ed.push_back(0); adj[0].push_back(0); end
    // shuffle edge order so the loader sees unsorted input
    for (int k = es.size() - 1; k > 0; k--) begin
      int j = $urandom_range(0, k);
      int t = es[k]; es[k] = es[j]; es[j] = t;
      t = ed[k]; ed[k] = ed[j]; ed[j] = t;
    end
    for (int v = 0; v < NV; v++) rm_dst[v] = -1;
    ref_max = 0;
    for (int u = 0; u < ns; u++) begin
      for (int v = 0; v < NV; v++) rvis[v] = 0;
      if (kuhn(u)) ref_max++;
    end
    pairs_s.delete(); pairs_d.delete(); sg_s.delete(); sg_d.delete(); sg_k.delete();
    for (int c = 0; c < 4; c++) cls_q[c].delete();
    // drive
    @(negedge clk);
    start = 1; num_src = (V_W+1)'(ns); num_dst = (V_W+1)'(nd);
    @(negedge clk);
    start = 0;
    for (int k = 0; k < es.size(); k++) begin
      while ($urandom_range(0, 3) == 0) @(negedge clk);
      e_valid = 1; e_src = V_W'(es[k]); e_dst = V_W'(ed[k]); e_last = (k == es.size() - 1);
      @(posedge clk);
      while (!e_ready) @(posedge clk);
      @(negedge clk);
      e_valid = 0; e_last = 0;
    end
    cyc = 0;
    while (!done) begin @(negedge clk); cyc++; end
    repeat (40) @(negedge clk);   // let the sinks drain the class FIFOs
    // matching
    check(int'(match_count) == ref_max, $sformatf("match %0d ref %0d", match_count, ref_max));
    check(pairs_s.size() == ref_max, "pair count");
    foreach (pairs_s[k]) begin
      bit is_edge = 0;
      foreach (adj[pairs_s[k]][j]) if (adj[pairs_s[k]][j] == pairs_d[k]) is_edge = 1;
      check(is_edge && !s_matched[pairs_s[k]] && !d_matched[pairs_d[k]], "pair is a disjoint edge");
      s_matched[pairs_s[k]] = 1; d_matched[pairs_d[k]] = 1;
    end
    // reference classes (Algorithm 2)
    foreach (es[k]) begin
      if (s_matched[es[k]] && !d_matched[ed[k]]) src_in[es[k]] = 1;
      if (d_matched[ed[k]] && !s_matched[es[k]]) dst_in[ed[k]] = 1;
    end
    check(cls_q[0].size() + cls_q[1].size() == ns, "every source classified once");
    check(cls_q[2].size() + cls_q[3].size() == nd, "every destination classified once");
    foreach (cls_q[0][k]) begin check(src_in[cls_q[0][k]] && !seen_s[cls_q[0][k]], "Src_in member"); seen_s[cls_q[0][k]] = 1; end
    foreach (cls_q[1][k]) begin check(!src_in[cls_q[1][k]] && !seen_s[cls_q[1][k]], "Src_out member"); seen_s[cls_q[1][k]] = 1; end
    foreach (cls_q[2][k]) begin check(dst_in[cls_q[2][k]] && !seen_d[cls_q[2][k]], "Dst_in member"); seen_d[cls_q[2][k]] = 1; end
    foreach (cls_q[3][k]) begin check(!dst_in[cls_q[3][k]] && !seen_d[cls_q[3][k]], "Dst_out member"); seen_d[cls_q[3][k]] = 1; end
    // subgraph edge order
    for (int p = 0; p < 3; p++)
      foreach (es[k]) begin
        int kk = (src_in[es[k]] && !dst_in[ed[k]]) ? 0 : (!src_in[es[k]] && dst_in[ed[k]]) ? 1 : 2;
        if (kk == p) begin exp_s.push_back(es[k]); exp_d.push_back(ed[k]); exp_k.push_back(p); end
      end
    check(sg_s.size() == es.size(), $sformatf("edge count %0d vs %0d", sg_s.size(), es.size()));
    check(sg_s == exp_s && sg_d == exp_d && sg_k == exp_k, "subgraph edge stream");
    check(int'(sub_count[0]) + int'(sub_count[1]) + int'(sub_count[2]) == es.size(), "sub_count");
    check(int'(num_edges) == es.size() && !overflow, "num_edges");
    if (rematch_count > 0) n_rematch++;
    if (search_stalls > 0) n_sstall++;
    if (gen_stalls > 0)    n_gstall++;
  endtask

  initial begin
    start = 0; num_src = 0; num_dst = 0; e_valid = 0; e_src = 0; e_dst = 0; e_last = 0;
    cls_ready = 0; sg_ready = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);
    for (int t = 0; t < 30; t++) begin
      ns = $urandom_range(1, NV); nd = $urandom_range(1, NV);
      run_epoch((t % 3 == 0) ? 5 : (t % 3 == 1) ? 12 : 30);
    end
    $display("epochs with re-matching %0d, searcher stalls %0d, generator stalls %0d",
             n_rematch, n_sstall, n_gstall);
    check(n_rematch > 0, "augmenting paths re-matched pairs");
    check(n_sstall > 0, "full class FIFO stalled the searcher");
    check(n_gstall > 0, "generator waited for the accelerator");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
