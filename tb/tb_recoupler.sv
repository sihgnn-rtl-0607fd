// tb_recoupler: random bipartite graphs with a maximum matching computed
// here (depth-first augmenting search) that is written into the
// candidate buffer through the recoupler's write port. The testbench
// serves adjacency, matching bitmaps and the edge list, drains the four
// class streams with random ready and accepts subgraph edges with random
// ready. Small FIFOs (depth 4) force the searcher to stall. Checks the
// class sets against Algorithm 2, the subgraph edge stream order and ids,
// sub_count, cand_count, and that both stall counters moved at least once.
module tb_recoupler;
  import sihgnn_pkg::*;
  localparam int V_W = 4, E_W = 6, NV = 1 << V_W, NE = 1 << E_W;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, cand_clear, cand_we, q_src_matched, q_dst_matched;
  logic sg_valid, sg_ready, busy, done;
  logic [V_W:0] num_src, num_dst, cand_count;
  logic [E_W:0] num_edges, sadj_begin, sadj_end, dadj_begin, dadj_end;
  logic [V_W-1:0] cand_wsrc, cand_wdst, sadj_key, sadj_val, dadj_key, dadj_val;
  logic [V_W-1:0] q_src, q_dst, e_src, e_dst, sg_src, sg_dst;
  logic [E_W-1:0] sadj_idx, dadj_idx, rd_e;
  logic [3:0] cls_valid, cls_ready;
  logic [V_W-1:0] cls_id [4];
  subgraph_e sg_id;
  logic [E_W:0] sub_count [3];
  logic [31:0] search_stalls, gen_stalls;
  recoupler #(.V_W(V_W), .E_W(E_W), .FIFO_DEPTH(4)) dut (.*);

  int checks = 0, failures = 0, n_sstall = 0, n_gstall = 0;
  int sadj [NV][$], dadj [NV][$];
  int sptr [NV+1], dptr [NV+1], scol [NE], dcol [NE], es [NE], ed [NE];
  bit sm [NV], dm [NV];
  assign sadj_begin = (E_W+1)'(sptr[sadj_key]);
  assign sadj_end   = (E_W+1)'(sptr[sadj_key + 1]);
  assign sadj_val   = V_W'(scol[sadj_idx]);
  assign dadj_begin = (E_W+1)'(dptr[dadj_key]);
  assign dadj_end   = (E_W+1)'(dptr[dadj_key + 1]);
  assign dadj_val   = V_W'(dcol[dadj_idx]);
  assign q_src_matched = sm[q_src];
  assign q_dst_matched = dm[q_dst];
  assign e_src = V_W'(es[rd_e]);
  assign e_dst = V_W'(ed[rd_e]);

  int  rm [NV];
  bit  rvis [NV];
  function automatic bit kuhn(int u);
    foreach (sadj[u][k]) begin
      int v = sadj[u][k];
      if (!rvis[v]) begin
        rvis[v] = 1;
        if (rm[v] < 0 || kuhn(rm[v])) begin rm[v] = u; return 1; end
      end
    end
    return 0;
  endfunction
  task automatic chk(input bit ok, input string w);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", w); end
  endtask

  int got [4][$];
  int gs [$], gd [$], gk [$];
  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < 4; c++) if (cls_valid[c] && cls_ready[c]) got[c].push_back(int'(cls_id[c]));
    if (sg_valid && sg_ready) begin
      gs.push_back(int'(sg_src)); gd.push_back(int'(sg_dst)); gk.push_back(int'(sg_id));
    end
  end
  always @(negedge clk) begin
    cls_ready = 4'($urandom_range(0, 15)) & 4'($urandom_range(0, 15));
    sg_ready  = ($urandom_range(0, 2) != 0);
  end

  initial begin
    start = 0; num_src = 0; num_dst = 0; num_edges = 0;
    cand_clear = 0; cand_we = 0; cand_wsrc = 0; cand_wdst = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 25; t++) begin
      int ns, nd, ne, np, k;
      int xs [$], xd [$], xk [$];
      int cnt [3];
      bit sin [NV], din [NV], seen_s [NV], seen_d [NV];
      ns = $urandom_range(1, NV); nd = $urandom_range(1, NV); ne = 0; np = 0;
      foreach (sadj[u]) begin sadj[u].delete(); dadj[u].delete(); end
      for (int u = 0; u < ns; u++)
        for (int v = 0; v < nd; v++)
          if ($urandom_range(0, 99) < 5 + (t % 4) * 8 && ne < NE) begin
            sadj[u].push_back(v); dadj[v].push_back(u); es[ne] = u; ed[ne] = v; ne++;
          end
      // shuffle the edge list so that the generator order is not trivial
      for (int e = ne - 1; e > 0; e--) begin
        int j, a, b;
        j = $urandom_range(0, e); a = es[e]; b = ed[e];
        es[e] = es[j]; ed[e] = ed[j]; es[j] = a; ed[j] = b;
      end
      k = 0;
      for (int u = 0; u <= NV; u++) begin sptr[u] = k; if (u < NV) foreach (sadj[u][i]) scol[k++] = sadj[u][i]; end
      k = 0;
      for (int v = 0; v <= NV; v++) begin dptr[v] = k; if (v < NV) foreach (dadj[v][i]) dcol[k++] = dadj[v][i]; end
      for (int v = 0; v < NV; v++) begin rm[v] = -1; sm[v] = 0; dm[v] = 0; sin[v] = 0; din[v] = 0; seen_s[v] = 0; seen_d[v] = 0; end
      for (int u = 0; u < ns; u++) begin
        for (int v = 0; v < NV; v++) rvis[v] = 0;
        void'(kuhn(u));
      end
      // write the matching into the candidate buffer
      @(negedge clk); cand_clear = 1;
      @(negedge clk); cand_clear = 0;
      for (int v = 0; v < nd; v++) if (rm[v] >= 0) begin
        sm[rm[v]] = 1; dm[v] = 1; np++;
        cand_we = 1; cand_wsrc = V_W'(rm[v]); cand_wdst = V_W'(v);
        @(negedge clk);
      end
      cand_we = 0;
      chk(int'(cand_count) == np, "cand_count");
      for (int u = 0; u < ns; u++) foreach (sadj[u][i]) begin
        if (sm[u] && !dm[sadj[u][i]]) sin[u] = 1;
        if (dm[sadj[u][i]] && !sm[u]) din[sadj[u][i]] = 1;
      end
      xs.delete(); xd.delete(); xk.delete(); cnt = '{0, 0, 0};
      for (int p = 0; p < 3; p++)
        for (int e = 0; e < ne; e++) begin
          k = (sin[es[e]] && !din[ed[e]]) ? 0 : (!sin[es[e]] && din[ed[e]]) ? 1 : 2;
          if (k == p) begin xs.push_back(es[e]); xd.push_back(ed[e]); xk.push_back(p); cnt[p]++; end
        end
      for (int c = 0; c < 4; c++) got[c].delete();
      gs.delete(); gd.delete(); gk.delete();
      start = 1; num_src = (V_W+1)'(ns); num_dst = (V_W+1)'(nd); num_edges = (E_W+1)'(ne);
      @(negedge clk); start = 0;
      while (!done) @(negedge clk);
      repeat (20) @(negedge clk);   // let the class FIFOs drain
      chk(got[0].size() + got[1].size() == ns && got[2].size() + got[3].size() == nd, "all classified");
      foreach (got[0][i]) begin chk(sin[got[0][i]] && !seen_s[got[0][i]], "Src_in"); seen_s[got[0][i]] = 1; end
      foreach (got[1][i]) begin chk(!sin[got[1][i]] && !seen_s[got[1][i]], "Src_out"); seen_s[got[1][i]] = 1; end
      foreach (got[2][i]) begin chk(din[got[2][i]] && !seen_d[got[2][i]], "Dst_in"); seen_d[got[2][i]] = 1; end
      foreach (got[3][i]) begin chk(!din[got[3][i]] && !seen_d[got[3][i]], "Dst_out"); seen_d[got[3][i]] = 1; end
      chk(gs == xs && gd == xd && gk == xk, "subgraph stream");
      chk(int'(sub_count[0]) == cnt[0] && int'(sub_count[1]) == cnt[1] && int'(sub_count[2]) == cnt[2], "sub_count");
      if (search_stalls > 0) n_sstall++;
      if (gen_stalls > 0) n_gstall++;
    end
    chk(n_sstall > 0, "searcher stalled on a full class FIFO");
    chk(n_gstall > 0, "generator waited on sg_ready");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
