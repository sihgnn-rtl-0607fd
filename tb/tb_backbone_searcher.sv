// tb_backbone_searcher: serves random bipartite graphs, their adjacency on
// both sides, a maximum matching (computed here by a depth-first
// augmenting search) as the candidate list and the matching bitmaps, and
// randomly reports class FIFOs as full. Checks that the vertices pushed
// into Src_in, Src_out, Dst_in and Dst_out are exactly the sets that
// Algorithm 2 gives for that matching, each once, that nothing is pushed
// into a full FIFO, that the class bitmaps read back the same sets, and
// that the searcher did stall.
module tb_backbone_searcher;
  localparam int V_W = 5, E_W = 8, NV = 1 << V_W;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, busy, done, q_src_matched, q_dst_matched, g_src_in, g_dst_in;
  logic [V_W:0] num_src, num_dst, cand_count;
  logic [V_W-1:0] cand_idx, cand_src, cand_dst, sadj_key, sadj_val, dadj_key, dadj_val;
  logic [V_W-1:0] q_src, q_dst, push_id, g_src, g_dst;
  logic [E_W:0] sadj_begin, sadj_end, dadj_begin, dadj_end;
  logic [E_W-1:0] sadj_idx, dadj_idx;
  logic [3:0] push, fifo_full;
  logic [31:0] stall_cycles;
  backbone_searcher #(.V_W(V_W), .E_W(E_W)) dut (.*);

  int checks = 0, failures = 0, n_stall = 0;
  int sadj [NV][$], dadj [NV][$];
  int sptr [NV+1], dptr [NV+1], scol [1 << E_W], dcol [1 << E_W];
  int pair_s [NV], pair_d [NV];
  bit sm [NV], dm [NV];
  assign sadj_begin = (E_W+1)'(sptr[sadj_key]);
  assign sadj_end   = (E_W+1)'(sptr[sadj_key + 1]);
  assign sadj_val   = V_W'(scol[sadj_idx]);
  assign dadj_begin = (E_W+1)'(dptr[dadj_key]);
  assign dadj_end   = (E_W+1)'(dptr[dadj_key + 1]);
  assign dadj_val   = V_W'(dcol[dadj_idx]);
  assign cand_src   = V_W'(pair_s[cand_idx]);
  assign cand_dst   = V_W'(pair_d[cand_idx]);
  assign q_src_matched = sm[q_src];
  assign q_dst_matched = dm[q_dst];

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
  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < 4; c++) if (push[c]) begin
      got[c].push_back(int'(push_id));
      if (fifo_full[c]) begin failures++; $display("FAIL: push into full FIFO %0d", c); end
    end
  end
  always @(negedge clk) fifo_full = 4'($urandom_range(0, 15)) & 4'($urandom_range(0, 15));

  initial begin
    start = 0; num_src = 0; num_dst = 0; g_src = 0; g_dst = 0; cand_count = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 30; t++) begin
      int ns, nd, ne, np;
      bit sin [NV], din [NV], seen_s [NV], seen_d [NV];
      ns = $urandom_range(1, NV); nd = $urandom_range(1, NV); ne = 0; np = 0;
      foreach (sadj[u]) begin sadj[u].delete(); dadj[u].delete(); end
      for (int u = 0; u < ns; u++)
        for (int v = 0; v < nd; v++)
          if ($urandom_range(0, 99) < 4 + (t % 3) * 8 && ne < (1 << E_W)) begin
            sadj[u].push_back(v); dadj[v].push_back(u); ne++;
          end
      ne = 0;
      for (int u = 0; u <= NV; u++) begin sptr[u] = ne; if (u < NV) foreach (sadj[u][k]) scol[ne++] = sadj[u][k]; end
      ne = 0;
      for (int v = 0; v <= NV; v++) begin dptr[v] = ne; if (v < NV) foreach (dadj[v][k]) dcol[ne++] = dadj[v][k]; end
      for (int v = 0; v < NV; v++) begin rm[v] = -1; sm[v] = 0; dm[v] = 0; sin[v] = 0; din[v] = 0; seen_s[v] = 0; seen_d[v] = 0; end
      for (int u = 0; u < ns; u++) begin
        for (int v = 0; v < NV; v++) rvis[v] = 0;
        void'(kuhn(u));
      end
      for (int v = 0; v < nd; v++) if (rm[v] >= 0) begin
        pair_s[np] = rm[v]; pair_d[np] = v; np++; sm[rm[v]] = 1; dm[v] = 1;
      end
      // Algorithm 2 reference
      for (int u = 0; u < ns; u++) foreach (sadj[u][k]) begin
        if (sm[u] && !dm[sadj[u][k]]) sin[u] = 1;
        if (dm[sadj[u][k]] && !sm[u]) din[sadj[u][k]] = 1;
      end
      for (int c = 0; c < 4; c++) got[c].delete();
      @(negedge clk);
      start = 1; num_src = (V_W+1)'(ns); num_dst = (V_W+1)'(nd); cand_count = (V_W+1)'(np);
      @(negedge clk); start = 0;
      while (!done) @(negedge clk);
      chk(got[0].size() + got[1].size() == ns && got[2].size() + got[3].size() == nd, "all classified");
      foreach (got[0][k]) begin chk(sin[got[0][k]] && !seen_s[got[0][k]], "Src_in"); seen_s[got[0][k]] = 1; end
      foreach (got[1][k]) begin chk(!sin[got[1][k]] && !seen_s[got[1][k]], "Src_out"); seen_s[got[1][k]] = 1; end
      foreach (got[2][k]) begin chk(din[got[2][k]] && !seen_d[got[2][k]], "Dst_in"); seen_d[got[2][k]] = 1; end
      foreach (got[3][k]) begin chk(!din[got[3][k]] && !seen_d[got[3][k]], "Dst_out"); seen_d[got[3][k]] = 1; end
      for (int v = 0; v < NV; v++) begin
        g_src = V_W'(v); g_dst = V_W'(v); #1;
        chk(g_src_in == sin[v] && g_dst_in == din[v], "class bitmaps");
      end
      if (stall_cycles > 0) n_stall++;
    end
    chk(n_stall > 0, "searcher stalled on a full FIFO");
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
