// tb_ctt_matcher: drives random node / child words and types into the
// Matcher and compares child address, match decision and next CP with the
// rule written out here: advance when CP is valid, its Next P. is non-zero,
// the candidate has a next type and the child word is valid and holds that
// type; next CP is then the child, otherwise Callback P.
module tb_ctt_matcher;
  import sihgnn_pkg::*;
  ctt_node_t cur, child;
  vtype_t    next_type;
  logic      has_next, advance;
  ctt_ptr_t  child_addr, next_cp;
  ctt_matcher dut (.*);
  int checks = 0, failures = 0;
  initial begin
    for (int t = 0; t < 2000; t++) begin
      ctt_ptr_t ea; logic eadv;
      cur       = ctt_node_t'({$urandom, $urandom});
      child     = ctt_node_t'({$urandom, $urandom});
      next_type = vtype_t'($urandom);
      has_next  = 1'($urandom);
      if (t % 4 == 0) child.data = next_type;
      if (t % 8 == 0) cur.next_p = '0;
      #1;
      ea   = cur.next_p + ctt_ptr_t'(next_type);
      eadv = cur.valid && (cur.next_p != 0) && has_next && child.valid && (child.data == next_type);
      checks++;
      if (child_addr != ea || advance != eadv || next_cp != (eadv ? ea : cur.callback_p)) begin
        failures++;
        $display("FAIL: t=%0d adv %0b exp %0b", t, advance, eadv);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
