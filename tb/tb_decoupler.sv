// tb_decoupler: runs the decoupler on random bipartite graphs served from a
// testbench adjacency model, and checks that the pairs written to the
// candidate buffer are edges, share no vertex, and are as many as the
// maximum matching found by an independent depth-first augmenting search;
// that the matching bitmaps agree with the pairs; and that augmenting
// paths re-matched existing pairs at least once.
module tb_decoupler;
  localparam int V_W = 5, E_W = 8, NV = 1 << V_W;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start, busy, done, cand_clear, cand_we, q_src_matched, q_dst_matched;
  logic [V_W:0] num_src, match_count;
  logic [V_W-1:0] adj_key, adj_val, cand_src, cand_dst, q_src, q_dst;
  logic [E_W:0] adj_begin, adj_end;
  logic [E_W-1:0] adj_idx;
  logic [31:0] rematch_count;
  decoupler #(.V_W(V_W), .E_W(E_W)) dut (.*);

  int checks = 0, failures = 0, n_rematch = 0;
  int adj [NV][$];
  int ptr [NV+1];
  int col [1 << E_W];
  assign adj_begin = (E_W+1)'(ptr[adj_key]);
  assign adj_end   = (E_W+1)'(ptr[adj_key + 1]);
  assign adj_val   = V_W'(col[adj_idx]);

  int  rm [NV];
  bit  rvis [NV];
  function automatic bit kuhn(int u);
    foreach (adj[u][k]) begin
      int v = adj[u][k];
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

  int ps [$], pd [$];
  always @(posedge clk) if (cand_we) begin ps.push_back(int'(cand_src)); pd.push_back(int'(cand_dst)); end

  initial begin
    start = 0; num_src = 0; q_src = 0; q_dst = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      int ns, nd, ne, ref_max, pct;
      bit sm [NV], dm [NV];
      ns = $urandom_range(1, NV); nd = $urandom_range(1, NV); ne = 0; ref_max = 0;
      pct = 3 + (t % 4) * 6;
      foreach (sm[v]) begin sm[v] = 0; dm[v] = 0; end
      foreach (adj[u]) adj[u].delete();
      for (int u = 0; u < ns; u++) begin
        ptr[u] = ne;
        for (int v = 0; v < nd; v++)
          if ($urandom_range(0, 99) < pct && ne < (1 << E_W)) begin adj[u].push_back(v); col[ne++] = v; end
      end
      for (int u = ns; u <= NV; u++) ptr[u] = ne;
      for (int v = 0; v < NV; v++) rm[v] = -1;
      for (int u = 0; u < ns; u++) begin
        for (int v = 0; v < NV; v++) rvis[v] = 0;
        if (kuhn(u)) ref_max++;
      end
      ps.delete(); pd.delete();
      @(negedge clk); start = 1; num_src = (V_W+1)'(ns);
      @(negedge clk); start = 0;
      while (!done) @(negedge clk);
      chk(ps.size() == ref_max && int'(match_count) == ref_max,
          $sformatf("matching size %0d ref %0d", ps.size(), ref_max));
      foreach (ps[k]) begin
        bit e = 0;
        foreach (adj[ps[k]][j]) if (adj[ps[k]][j] == pd[k]) e = 1;
        chk(e && !sm[ps[k]] && !dm[pd[k]], "pair is a disjoint edge");
        sm[ps[k]] = 1; dm[pd[k]] = 1;
      end
      for (int v = 0; v < NV; v++) begin
        q_src = V_W'(v); q_dst = V_W'(v); #1;
        chk(q_src_matched == sm[v] && q_dst_matched == dm[v], "matching bitmaps");
      end
      if (rematch_count > 0) n_rematch++;
    end
    chk(n_rematch > 0, "augmenting path re-matched a pair");
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
