// tb_sihgnn_top: end-to-end test of the SiHGNN frontend at its default
// sizes (16384 vertices per side, 65536 edges, 1572-word CTT, 4096-entry
// class FIFOs).
//
// Builder half: loads the ACM relations AP, PA, PS, SP, builds APS, PAP,
// APA and APSPA and checks the generation lists against the decomposition
// worked out by hand (APSPA -> APS, SP, PA); ATA must be refused.
// Restructurer half: random bipartite graphs, each checked against an
// independent reference (maximum matching size by a depth-first augmenting
// search, vertex classes recomputed from the matched pairs, subgraph edge
// order), then a graph with 5000 mostly isolated sources while the
// accelerator refuses vertices (a full class FIFO must stall the searcher),
// then an edge stream longer than the edge buffer (overflow must be flagged
// and the first 65536 edges kept). Counts each mechanism and fails if one
// never happened.
module tb_sihgnn_top;
  import sihgnn_pkg::*;
  localparam int V_W = DEF_V_W, E_W = DEF_E_W, NV = 1 << V_W;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  // builder side
  logic                 mp_valid, mp_ready, mp_build;
  vtype_t [MAX_LEN-1:0] mp_path;
  len_t                 mp_len;
  logic                 gl_valid, gl_ready, gl_last;
  gen_elem_t            gl_elem;
  logic                 mp_done, mp_err;
  ctt_ptr_t             mp_sg_node;
  // restructurer side
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
  bit             hold_cls = 0;

  sihgnn_top dut (
    .clk, .rst_n,
    .mp_valid, .mp_ready, .mp_build, .mp_path, .mp_len,
    .gl_valid, .gl_ready, .gl_elem, .gl_last, .mp_done, .mp_err, .mp_sg_node,
    .rs_start(start), .rs_num_src(num_src), .rs_num_dst(num_dst),
    .e_valid, .e_ready, .e_src, .e_dst, .e_last,
    .cls_valid, .cls_ready, .cls_id,
    .sg_valid, .sg_ready, .sg_src, .sg_dst, .sg_id,
    .rs_num_edges(num_edges), .rs_overflow(overflow), .rs_match_count(match_count),
    .rs_rematch_count(rematch_count), .rs_sub_count(sub_count),
    .rs_search_stalls(search_stalls), .rs_gen_stalls(gen_stalls),
    .rs_busy(busy), .rs_done(done)
  );

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
  int p_dense_src = -1;   // when >= 0: only this many sources get edges

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
      if (dut.u_restructurer.cand_we) begin
        pairs_s.push_back(int'(dut.u_restructurer.cand_wsrc));
        pairs_d.push_back(int'(dut.u_restructurer.cand_wdst));
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
    if (hold_cls && search_stalls > 0) hold_cls = 0;
    cls_ready = hold_cls ? 4'b0 : 4'($urandom_range(0, 15));
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
    for (int u = 0; u < ((p_dense_src >= 0) ? p_dense_src : ns); u++)
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
    hold_cls = 0;
    while (cls_valid != 0) @(negedge clk);   // let the sinks drain the class FIFOs
    repeat (4) @(negedge clk);
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
    $display("epoch ns=%0d nd=%0d edges=%0d match=%0d cycles=%0d", ns, nd, es.size(), ref_max, cyc);
    if (rematch_count > 0) n_rematch++;
    if (search_stalls > 0) n_sstall++;
    if (gen_stalls > 0)    n_gstall++;
  endtask

  // ------------------------------------------------------------ builder
  int n_reuse = 0, n_refused = 0;
  gen_elem_t got [$];
  ctt_ptr_t  node_of [string];

  function automatic vtype_t t_of(input byte c);
    case (c)
      "A": return 2'd0;
      "P": return 2'd1;
      "S": return 2'd2;
      default: return 2'd3;
    endcase
  endfunction

  task automatic mp_request(input string mp, input bit build, output bit err);
    got.delete();
    @(negedge clk);
    mp_valid = 1; mp_build = build; mp_len = len_t'(mp.len()); mp_path = '0;
    for (int k = 0; k < mp.len(); k++) mp_path[k] = t_of(mp[k]);
    while (!mp_ready) @(negedge clk);
    @(negedge clk);
    mp_valid = 0;
    while (!mp_done) begin
      if (gl_valid) got.push_back(gl_elem);
      @(negedge clk);
    end
    err = mp_err;
    node_of[mp] = mp_sg_node;
  endtask

  task automatic mp_build_check(input string mp, input string pieces[$]);
    bit err;
    int pos = 0;
    mp_request(mp, 1, err);
    check(!err && got.size() == pieces.size(), {"generation list of ", mp});
    foreach (pieces[k]) if (k < got.size()) begin
      check(int'(got[k].first) == pos && got[k].sg_node == node_of[pieces[k]],
            $sformatf("%s piece %0d", mp, k));
      pos += pieces[k].len() - 1;
    end
    if (pieces.size() > 1 && pieces[0].len() > 2) n_reuse++;
  endtask

  string relations [4] = '{"AP", "PA", "PS", "SP"};

  initial begin
    bit err;
    start = 0; num_src = 0; num_dst = 0; e_valid = 0; e_src = 0; e_dst = 0; e_last = 0;
    cls_ready = 0; sg_ready = 0;
    mp_valid = 0; mp_build = 0; mp_path = '0; mp_len = '0; gl_ready = 1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);
    // builder
    foreach (relations[k]) begin
      mp_request(relations[k], 0, err);
      check(!err, {"store ", relations[k]});
    end
    mp_build_check("APS",   '{"AP", "PS"});
    mp_build_check("PAP",   '{"PA", "AP"});
    mp_build_check("APA",   '{"AP", "PA"});
    mp_build_check("APSPA", '{"APS", "SP", "PA"});
    mp_request("ATA", 1, err);
    if (err) n_refused++;
    // restructurer: random graphs
    for (int t = 0; t < 6; t++) begin
      ns = $urandom_range(20, 300); nd = $urandom_range(20, 300);
      run_epoch((t % 2 == 0) ? 1 : 3);
    end
    // many isolated sources while the accelerator holds its vertex port
    ns = 5000; nd = 60; p_dense_src = 60; hold_cls = 1;
    run_epoch(4);
    p_dense_src = -1;
    // overflow: more edges than the edge buffer holds
    begin
      int total = (1 << E_W) + 3;
      @(negedge clk);
      start = 1; num_src = 2; num_dst = 2;
      @(negedge clk);
      start = 0;
      for (int k = 0; k < total; k++) begin
        e_valid = 1; e_src = V_W'(k % 2); e_dst = V_W'((k / 2) % 2); e_last = (k == total - 1);
        @(posedge clk);
        while (!e_ready) @(posedge clk);
        @(negedge clk);
      end
      e_valid = 0; e_last = 0;
      while (!done) @(negedge clk);
      check(overflow && int'(num_edges) == (1 << E_W), "overflow flagged, buffer full");
      check(int'(match_count) == 2, "matching of the overflowed graph");
    end
    $display("reuse %0d refused %0d re-matching %0d searcher stalls %0d generator stalls %0d",
             n_reuse, n_refused, n_rematch, n_sstall, n_gstall);
    check(n_reuse > 0, "a stored multi-hop metapath was reused");
    check(n_refused > 0, "an undecomposable metapath was refused");
    check(n_rematch > 0, "augmenting paths re-matched pairs");
    check(n_sstall > 0, "full class FIFO stalled the searcher");
    check(n_gstall > 0, "generator waited for the accelerator");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
