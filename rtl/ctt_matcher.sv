// ctt_matcher: the Matcher of the Semantic Graph Builder (comparator, AND,
// pointer multiplexer).
//
// Combinational. Given the node at CP, the word in its child block selected
// by the next candidate type, and that type, it decides whether the walk can
// go one level deeper: the comparator checks that the child word is valid
// and holds the wanted type, the AND gates that with "Next P. is not empty"
// and with "the candidate has a next type". The multiplexer then yields the
// next CP: the child when matched, otherwise Callback P. of the node, which
// restarts the walk at level 1. The comparator/AND/mux split follows the
// paper's figure of the Matcher; the child-block addressing is this design's.
//
// Lint note: the matcher looks only at the fields it needs (valid, data,
// next_p, callback_p); the other node bits are unused by design.
module ctt_matcher
  import sihgnn_pkg::*;
(
  input  ctt_node_t cur,         // node at CP
  input  ctt_node_t child,       // word at cur.next_p + next_type
  input  vtype_t    next_type,   // candidate type after the one at CP
  input  logic      has_next,    // candidate has a type after CP
  output ctt_ptr_t  child_addr,  // address of the child word to read
  output logic      advance,     // match: walk to the child
  output ctt_ptr_t  next_cp      // next value of CP
);
  logic cmp_eq, next_nonempty;

  assign child_addr    = cur.next_p + ctt_ptr_t'(next_type);
  assign cmp_eq        = child.valid && (child.data == next_type);
  assign next_nonempty = (cur.next_p != '0);
  assign advance       = cmp_eq && next_nonempty && has_next && cur.valid;
  assign next_cp       = advance ? child_addr : cur.callback_p;
endmodule
