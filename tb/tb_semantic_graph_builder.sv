// tb_semantic_graph_builder: self-checking test of the CTT-based builder.
//
// Loads the ACM relations AP, PA, PS, SP (A=0, P=1, S=2, T=3), then asks
// for APS, PAP, APA and APSPA and checks each generation list against the
// decomposition worked out by hand from the trie (APSPA -> APS, SP, PA).
// APSPS checks that a stored metapath that has become an inner node (APS)
// is still reused. ATA must fail (no A-T relation). It also checks that
// each piece names the CTT node returned when that metapath was stored,
// and that the request-to-done latency equals
//   advances + 2 * pieces + (len - 1) + extra + 1, where extra counts the
// new child blocks and the levels walked past the last stored node.
module tb_semantic_graph_builder;
  import sihgnn_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                 req_valid, req_ready, req_build;
  vtype_t [MAX_LEN-1:0] req_path;
  len_t                 req_len;
  logic                 gl_valid, gl_ready, gl_last;
  gen_elem_t            gl_elem;
  logic                 done, done_err;
  ctt_ptr_t             done_sg_node;

  semantic_graph_builder dut (.*);

  int checks = 0, failures = 0;
  gen_elem_t got [$];
  ctt_ptr_t  node_of [string];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  function automatic vtype_t t_of(input byte c);
    case (c)
      "A": return 2'd0;
      "P": return 2'd1;
      "S": return 2'd2;
      default: return 2'd3;
    endcase
  endfunction

  // send one request, collect the list; returns cycles from accept to done
  task automatic request(input string mp, input bit build, output bit err,
                         output ctt_ptr_t node, output int cycles);
    got.delete();
    @(negedge clk);
    req_valid = 1;
    req_build = build;
    req_len   = len_t'(mp.len());
    req_path  = '0;
    for (int k = 0; k < mp.len(); k++) req_path[k] = t_of(mp[k]);
    while (!req_ready) @(negedge clk);
    @(negedge clk);
    req_valid = 0;
    cycles = 1;
    while (!done) begin
      if (gl_valid) got.push_back(gl_elem);
      @(negedge clk);
      cycles++;
    end
    err  = done_err;
    node = done_sg_node;
  endtask

  task automatic store(input string mp);
    bit e; ctt_ptr_t n; int c;
    request(mp, 0, e, n, c);
    check(!e, {"store ", mp});
    node_of[mp] = n;
  endtask

  // build mp and compare with the expected pieces "AP,PS"
  task automatic build(input string mp, input string pieces[$], input int extra);
    bit e; ctt_ptr_t n; int c, adv, pos;
    request(mp, 1, e, n, c);
    check(!e, {"build ", mp, " no error"});
    check(got.size() == pieces.size(),
          $sformatf("%s: %0d pieces, expected %0d", mp, got.size(), pieces.size()));
    pos = 0; adv = 0;
    foreach (pieces[k]) begin
      if (k < got.size()) begin
        check(int'(got[k].first) == pos && int'(got[k].last) == pos + pieces[k].len() - 1,
              $sformatf("%s piece %0d span %0d..%0d", mp, k, got[k].first, got[k].last));
        check(node_of.exists(pieces[k]) && got[k].sg_node == node_of[pieces[k]],
              $sformatf("%s piece %0d names %s", mp, k, pieces[k]));
      end
      adv += pieces[k].len() - 1;
      pos += pieces[k].len() - 1;
    end
    check(c == adv + 2 * pieces.size() + (mp.len() - 1) + extra + 1,
          $sformatf("%s latency %0d", mp, c));
    node_of[mp] = n;
  endtask

  initial begin
    req_valid = 0; req_build = 0; req_path = '0; req_len = '0; gl_ready = 1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    store("AP"); store("PA"); store("PS"); store("SP");
    build("APS",   '{"AP", "PS"}, 1);    // AP gets a child block
    build("PAP",   '{"PA", "AP"}, 1);    // PA gets a child block
    build("APA",   '{"AP", "PA"}, 0);
    build("APSPA", '{"APS", "SP", "PA"}, 2);
    build("APSPS", '{"APS", "SP", "PS"}, 1);  // walk goes on to APSP, then falls back
    // the same request again is one piece: itself
    build("APSPA", '{"APSPA"}, 0);
    // back-pressure on the list: output must hold
    begin
      bit e; ctt_ptr_t n; int c;
      gl_ready = 0;
      fork
        request("PAPS", 1, e, n, c);
        begin
          repeat (12) @(negedge clk);
          gl_ready = 1;
        end
      join
      check(!e && got.size() > 2, "PAPS under back-pressure");
    end
    begin
      bit e; ctt_ptr_t n; int c;
      request("ATA", 1, e, n, c);
      check(e, "ATA must fail");
      request("A", 1, e, n, c);
      check(e, "length 1 must fail");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
