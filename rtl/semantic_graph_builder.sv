// semantic_graph_builder: CTT-guided semantic graph generation.
//
// The host sends a metapath (a list of vertex types, 2..MAX_LEN long). In
// build mode the builder walks the Callback Trie Tree from the level-1 node
// of the first type, one level per cycle, as long as the child of the
// current node has the next candidate type (Matcher: comparator + AND). It
// remembers the deepest node passed that marks a stored semantic graph.
// When the walk cannot go deeper it emits that stored metapath as one
// element of the generation list, follows its Callback P. to the level-1
// node of its last type, and continues from there, so that consecutive
// pieces share one vertex type (APSPA -> APS, SP, PA). After the last piece
// the new metapath is written into the CTT (allocating child blocks as
// needed) and marked as a stored semantic graph. In store mode only the
// write is done; this is how the one-hop relations are loaded first.
//
// Interfaces: request valid/ready; generation list valid/ready stream with
// gl_last on the final piece; a one-cycle done pulse with an error flag
// (metapath not decomposable, bad length or CTT full) and the CTT node that
// now names the new semantic graph. After reset the builder spends
// NUM_TYPES cycles writing the level-1 nodes before it accepts a request.
//
// Timing: decomposition costs one cycle per trie level walked plus one
// cycle per list element (without back-pressure); storing costs one cycle
// per type plus one per new child block.
//
// From the paper: the trie of metapaths, level-1 callback edges, Data / Next
// P. / Callback P. per node, the CP register and Candidate Register, the
// Matcher, storing each new metapath. This design's own: the child-block
// layout, keeping the deepest stored node (so a node that became an inner
// node is still reused), and the list/handshake format.
//
// Lint note: rst_n is the asynchronous reset of every flop here and is also
// read in the disable iff of the assertions; a linter reports that second
// use as a synchronous one. The circuit uses it only asynchronously.
module semantic_graph_builder
  import sihgnn_pkg::*;
#(
  parameter int DEPTH = CTT_DEPTH
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // request from the host
  input  logic                    req_valid,
  output logic                    req_ready,
  input  logic                    req_build,   // 1: decompose then store
  input  vtype_t [MAX_LEN-1:0]    req_path,    // type k at index k
  input  len_t                    req_len,
  // generation list to the host
  output logic                    gl_valid,
  input  logic                    gl_ready,
  output gen_elem_t               gl_elem,
  output logic                    gl_last,
  // completion
  output logic                    done,
  output logic                    done_err,
  output ctt_ptr_t                done_sg_node
);
  typedef enum logic [2:0] {S_INIT, S_IDLE, S_DEC, S_EMIT, S_INS, S_DONE} state_e;

  state_e               st;
  vtype_t [MAX_LEN-1:0] cand;       // Candidate Register
  len_t                 clen;
  ctt_ptr_t             cp;         // CTT pointer
  len_t                 i;          // candidate index of the type at CP
  len_t                 seg_start;
  ctt_ptr_t             last_node, last_cb;
  len_t                 last_pos;
  logic                 last_ok;
  ctt_ptr_t             alloc;
  logic                 err;
  ctt_ptr_t             new_sg;

  ctt_node_t cur, child;
  ctt_ptr_t  child_addr, next_cp;
  logic      advance, has_next, is_last;
  vtype_t    nt;

  logic      we;
  ctt_ptr_t  wr_addr;
  ctt_node_t wr_data;

  assign has_next = (LEN_W'(i + 1) < clen);
  assign nt       = (int'(i) + 1 < MAX_LEN) ? cand[i+1] : '0;
  assign is_last  = (LEN_W'(i + 1) == LEN_W'(clen - 1));

  ctt_buffer #(.DEPTH(DEPTH)) u_ctt (
    .clk, .rst_n,
    .rd_addr_a(cp),         .rd_data_a(cur),
    .rd_addr_b(child_addr), .rd_data_b(child),
    .we, .wr_addr, .wr_data
  );

  ctt_matcher u_matcher (
    .cur, .child, .next_type(nt), .has_next,
    .child_addr, .advance, .next_cp
  );

  // CTT write port
  always_comb begin
    we      = 1'b0;
    wr_addr = cp;
    wr_data = cur;
    unique case (st)
      S_INIT: begin
        we      = 1'b1;
        wr_addr = cp;
        wr_data = '{valid: 1'b1, is_sg: 1'b0, data: vtype_t'(cp),
                    next_p: '0, callback_p: cp};
      end
      S_INS: begin
        if (cur.next_p == '0) begin
          if (int'(alloc) + NUM_TYPES <= DEPTH) begin
            we             = 1'b1;
            wr_addr        = cp;
            wr_data        = cur;
            wr_data.next_p = alloc;
          end
        end else if (!child.valid || (is_last && !child.is_sg)) begin
          we      = 1'b1;
          wr_addr = child_addr;
          wr_data = '{valid: 1'b1, is_sg: is_last || (child.valid && child.is_sg),
                      data: nt, next_p: child.valid ? child.next_p : '0,
                      callback_p: ctt_ptr_t'(nt)};
        end
      end
      default: ;
    endcase
  end

  assign req_ready    = (st == S_IDLE);
  assign gl_valid     = (st == S_EMIT);
  assign gl_elem      = '{sg_node: last_node, first: seg_start, last: last_pos};
  assign gl_last      = (last_pos == LEN_W'(clen - 1));
  assign done         = (st == S_DONE);
  assign done_err     = err;
  assign done_sg_node = new_sg;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st        <= S_INIT;
      cand      <= '0;
      clen      <= '0;
      cp        <= '0;
      i         <= '0;
      seg_start <= '0;
      last_node <= '0;
      last_cb   <= '0;
      last_pos  <= '0;
      last_ok   <= 1'b0;
      alloc     <= ctt_ptr_t'(NUM_TYPES);
      err       <= 1'b0;
      new_sg    <= '0;
    end else begin
      unique case (st)
        S_INIT: begin
          if (int'(cp) == NUM_TYPES - 1) begin
            cp <= '0;
            st <= S_IDLE;
          end else begin
            cp <= cp + 1'b1;
          end
        end
        S_IDLE: begin
          if (req_valid) begin
            cand      <= req_path;
            clen      <= req_len;
            cp        <= ctt_ptr_t'(req_path[0]);
            i         <= '0;
            seg_start <= '0;
            last_ok   <= 1'b0;
            err       <= 1'b0;
            if (req_len < 2 || int'(req_len) > MAX_LEN) begin
              err <= 1'b1;
              st  <= S_DONE;
            end else begin
              st <= req_build ? S_DEC : S_INS;
            end
          end
        end
        S_DEC: begin
          if (advance) begin
            cp <= next_cp;
            i  <= i + 1'b1;
            if (child.is_sg) begin
              last_node <= child_addr;
              last_cb   <= child.callback_p;
              last_pos  <= i + 1'b1;
              last_ok   <= 1'b1;
            end
          end else if (!last_ok) begin
            err <= 1'b1;               // some hop has no stored relation
            st  <= S_DONE;
          end else begin
            st <= S_EMIT;
          end
        end
        S_EMIT: begin
          if (gl_ready) begin
            if (gl_last) begin
              cp <= ctt_ptr_t'(cand[0]);
              i  <= '0;
              st <= S_INS;
            end else begin
              cp        <= last_cb;    // callback edge to level 1
              i         <= last_pos;
              seg_start <= last_pos;
              last_ok   <= 1'b0;
              st        <= S_DEC;
            end
          end
        end
        S_INS: begin
          if (cur.next_p == '0) begin
            if (int'(alloc) + NUM_TYPES <= DEPTH) begin
              alloc <= alloc + ctt_ptr_t'(NUM_TYPES);
            end else begin
              err <= 1'b1;             // CTT buffer full
              st  <= S_DONE;
            end
          end else begin
            cp <= child_addr;
            i  <= i + 1'b1;
            if (is_last) begin
              new_sg <= child_addr;
              st     <= S_DONE;
            end
          end
        end
        S_DONE: st <= S_IDLE;
        default: st <= S_IDLE;
      endcase
    end
  end

  // the list stays stable while it waits for the host
  a_gl_stable: assert property (@(posedge clk) disable iff (!rst_n)
    gl_valid && !gl_ready |=> gl_valid && $stable(gl_elem));
endmodule
