// decoupler: finds a maximum matching of a bipartite semantic graph (graph
// decoupling, Algorithm 1 of the paper). The matched vertices are the
// backbone candidates.
//
// For every unmatched source vertex n it runs one breadth-first search for
// an augmenting path. The search list (a FIFO) holds source vertices to
// expand. Expanding u reads its out-neighbours from the source-side
// adjacency buffer, one per cycle. A neighbour v already in the visited
// bitmap is skipped; otherwise u is recorded as the vertex that reached v
// (the matching-FIFO entry of v). If v is free the path is flipped back to n
// one edge per cycle, re-pairing each source with the destination it
// reached; if v is matched, its partner is pushed on the search list. The
// visited bitmap is cleared in one cycle before each search. Matching
// bitmaps mark matched vertices on both sides.
//
// When all sources are tried, the matched pairs are written to the
// candidate buffer in source order, one per cycle, and done pulses. The
// matching bitmaps stay readable (q_src/q_dst) for the recoupler until the
// next start.
//
// From the paper: search list, visited bitmap, per-vertex matching FIFO of
// predecessors, match pairs, matching bitmap, candidate buffer. This
// design's own: BFS order, the one-entry-per-vertex predecessor store (the
// paper's hash-table allocated, set-associative FIFOs with a spill buffer
// are not built), and combinational reads of every store.
//
// Lint note: rst_n is the asynchronous reset of every flop here and is also
// read in the disable iff of the assertions; a linter reports that second
// use as a synchronous one. The circuit uses it only asynchronously.//
// Lint note: the matching / class bitmaps are 2**V_W flops wide and are
// cleared in one cycle with '0; at the default V_W = 14 a linter reports that
// as a suspiciously wide replication. The one-cycle clear is intended.
module decoupler #(
  parameter int V_W = 14,
  parameter int E_W = 16
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  input  logic [V_W:0]   num_src,
  // source-side adjacency buffer
  output logic [V_W-1:0] adj_key,
  input  logic [E_W:0]   adj_begin,
  input  logic [E_W:0]   adj_end,
  output logic [E_W-1:0] adj_idx,
  input  logic [V_W-1:0] adj_val,
  // candidate buffer write port
  output logic           cand_clear,
  output logic           cand_we,
  output logic [V_W-1:0] cand_src,
  output logic [V_W-1:0] cand_dst,
  // matching bitmap lookups
  input  logic [V_W-1:0] q_src,
  output logic           q_src_matched,
  input  logic [V_W-1:0] q_dst,
  output logic           q_dst_matched,
  // status
  output logic [V_W:0]   match_count,
  output logic [31:0]    rematch_count,   // existing pairs moved by augmenting
  output logic           busy,
  output logic           done
);
  localparam int NV = 1 << V_W;

  typedef enum logic [2:0] {D_IDLE, D_ROOT, D_POP, D_SCAN, D_AUG, D_EMIT, D_DONE} state_e;

  logic [V_W-1:0] match_src [NV];   // Match_Pair of a source
  logic [V_W-1:0] match_dst [NV];   // Match_Pair of a destination
  logic [V_W-1:0] pred      [NV];   // matching FIFO entry of a destination
  logic [NV-1:0]  src_m, dst_m;     // matching bitmaps
  logic [NV-1:0]  visited;          // visited bitmap

  state_e         st;
  logic [V_W:0]   n;
  logic [V_W-1:0] u, av;
  logic [E_W:0]   ptr, endp;
  logic [V_W:0]   nsrc;

  // search list
  logic           sl_clear, sl_push, sl_pop, sl_empty, sl_full;
  logic [V_W-1:0] sl_din, sl_dout;

  sync_fifo #(.WIDTH(V_W), .DEPTH(NV)) u_search_list (
    .clk, .rst_n, .clear(sl_clear), .push(sl_push), .din(sl_din),
    .pop(sl_pop), .dout(sl_dout), .empty(sl_empty), .full(sl_full),
    .count()
  );

  logic [V_W-1:0] v, uu;
  logic           scan_end;

  assign v        = adj_val;
  assign uu       = pred[av];
  assign scan_end = (ptr == endp);
  assign adj_key  = (st == D_POP) ? sl_dout : u;
  assign adj_idx  = ptr[E_W-1:0];

  assign q_src_matched = src_m[q_src];
  assign q_dst_matched = dst_m[q_dst];
  assign busy = (st != D_IDLE);
  assign done = (st == D_DONE);

  assign cand_clear = (st == D_IDLE) && start;
  assign cand_we    = (st == D_EMIT) && (n != nsrc) && src_m[n[V_W-1:0]];
  assign cand_src   = n[V_W-1:0];
  assign cand_dst   = match_src[n[V_W-1:0]];

  always_comb begin
    sl_clear = 1'b0;
    sl_push  = 1'b0;
    sl_din   = match_dst[v];
    sl_pop   = 1'b0;
    unique case (st)
      D_ROOT: if (n != nsrc && !src_m[n[V_W-1:0]]) begin
        sl_push = 1'b1;
        sl_din  = n[V_W-1:0];
      end
      D_POP:  sl_pop = !sl_empty;
      D_SCAN: sl_push = !scan_end && !visited[v] && dst_m[v];
      D_AUG:  sl_clear = !src_m[uu];
      default: ;
    endcase
  end

  always_ff @(posedge clk) begin
    if (st == D_SCAN && !scan_end && !visited[v]) pred[v] <= u;
    if (st == D_AUG) begin
      match_src[uu] <= av;
      match_dst[av] <= uu;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st            <= D_IDLE;
      src_m         <= '0;
      dst_m         <= '0;
      visited       <= '0;
      n             <= '0;
      u             <= '0;
      av            <= '0;
      ptr           <= '0;
      endp          <= '0;
      nsrc          <= '0;
      match_count   <= '0;
      rematch_count <= '0;
    end else begin
      unique case (st)
        D_IDLE: if (start) begin
          src_m         <= '0;
          dst_m         <= '0;
          n             <= '0;
          nsrc          <= num_src;
          match_count   <= '0;
          rematch_count <= '0;
          st            <= D_ROOT;
        end
        D_ROOT: begin
          if (n == nsrc) begin
            n  <= '0;
            st <= D_EMIT;
          end else if (src_m[n[V_W-1:0]]) begin
            n <= n + 1'b1;
          end else begin
            visited <= '0;
            st      <= D_POP;
          end
        end
        D_POP: begin
          if (sl_empty) begin          // no augmenting path from n
            n  <= n + 1'b1;
            st <= D_ROOT;
          end else begin
            u    <= sl_dout;
            ptr  <= adj_begin;
            endp <= adj_end;
            st   <= D_SCAN;
          end
        end
        D_SCAN: begin
          if (scan_end) begin
            st <= D_POP;
          end else begin
            ptr <= ptr + 1'b1;
            if (!visited[v]) begin
              visited[v] <= 1'b1;
              if (!dst_m[v]) begin
                av <= v;
                st <= D_AUG;
              end
            end
          end
        end
        D_AUG: begin
          src_m[uu] <= 1'b1;
          dst_m[av] <= 1'b1;
          if (src_m[uu]) begin
            av            <= match_src[uu];
            rematch_count <= rematch_count + 1'b1;
          end else begin
            match_count <= match_count + 1'b1;
            n           <= n + 1'b1;
            st          <= D_ROOT;
          end
        end
        D_EMIT: begin
          if (n == nsrc) st <= D_DONE;
          else           n  <= n + 1'b1;
        end
        D_DONE: st <= D_IDLE;
        default: st <= D_IDLE;
      endcase
    end
  end

  // a source enters the search list at most once per search, so it never fills
  a_sl_room: assert property (@(posedge clk) disable iff (!rst_n) sl_push |-> !sl_full);
endmodule
