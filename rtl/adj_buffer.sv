// adj_buffer: adjacency-list buffer of one side of a bipartite semantic
// graph, in compressed sparse row form (Src Adj. Buffer / Dst Adj. Buffer).
//
// It is filled in three passes driven by the topology loader:
//   1. clr_start clears the degree counter of keys 0..n_keys-1
//      (busy for n_keys cycles);
//   2. one cnt_en pulse per edge counts the degree of cnt_key;
//   3. pfx_start turns the degrees into row pointers by a running sum
//      (busy for n_keys+1 cycles) and reuses the counters as fill pointers;
//   4. one put_en pulse per edge appends put_val to the list of put_key.
// Afterwards rd_key gives [rd_begin, rd_end) of its list and rd_idx reads one
// entry, both combinationally. Capacity is 2**V_W keys and 2**E_W entries.
// The paper names these buffers; the CSR layout and the build procedure are
// this design's own.
//
// Lint note: rst_n is the asynchronous reset of every flop here and is also
// read in the disable iff of the assertions; a linter reports that second
// use as a synchronous one. The circuit uses it only asynchronously.
module adj_buffer #(
  parameter int V_W = 14,
  parameter int E_W = 16
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           clr_start,
  input  logic           pfx_start,
  input  logic [V_W:0]   n_keys,
  output logic           busy,
  input  logic           cnt_en,
  input  logic [V_W-1:0] cnt_key,
  input  logic           put_en,
  input  logic [V_W-1:0] put_key,
  input  logic [V_W-1:0] put_val,
  input  logic [V_W-1:0] rd_key,
  output logic [E_W:0]   rd_begin,
  output logic [E_W:0]   rd_end,
  input  logic [E_W-1:0] rd_idx,
  output logic [V_W-1:0] rd_val
);
  localparam int NV = 1 << V_W;
  localparam int NE = 1 << E_W;

  typedef enum logic [1:0] {A_IDLE, A_CLR, A_PFX} state_e;

  logic [E_W:0]   cnt [NV];       // degree, then fill pointer
  logic [E_W:0]   ptr [NV+1];     // row pointers
  logic [V_W-1:0] col [NE];

  state_e       st;
  logic [V_W:0] k, nk;
  logic [E_W:0] sum;

  assign busy     = (st != A_IDLE);
  assign rd_begin = ptr[{1'b0, rd_key}];
  assign rd_end   = ptr[{1'b0, rd_key} + 1'b1];
  assign rd_val   = col[rd_idx];

  always_ff @(posedge clk) begin
    unique case (st)
      A_CLR: cnt[k[V_W-1:0]] <= '0;
      A_PFX: begin
        ptr[k] <= sum;
        if (k != nk) cnt[k[V_W-1:0]] <= sum;
      end
      default: begin
        if (cnt_en) cnt[cnt_key] <= cnt[cnt_key] + 1'b1;
        if (put_en) begin
          col[cnt[put_key][E_W-1:0]] <= put_val;
          cnt[put_key]               <= cnt[put_key] + 1'b1;
        end
      end
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st  <= A_IDLE;
      k   <= '0;
      nk  <= '0;
      sum <= '0;
    end else begin
      unique case (st)
        A_IDLE: begin
          k   <= '0;
          sum <= '0;
          nk  <= n_keys;
          if (clr_start)      st <= (n_keys == '0) ? A_IDLE : A_CLR;
          else if (pfx_start) st <= A_PFX;
        end
        A_CLR: begin
          k <= k + 1'b1;
          if (k + 1'b1 == nk) st <= A_IDLE;
        end
        A_PFX: begin
          if (k != nk) sum <= sum + cnt[k[V_W-1:0]];
          k <= k + 1'b1;
          if (k == nk) st <= A_IDLE;
        end
        default: st <= A_IDLE;
      endcase
    end
  end

  a_no_cmd_when_busy: assert property (@(posedge clk) disable iff (!rst_n)
    busy |-> !(cnt_en || put_en || clr_start || pfx_start));
  a_no_count_and_put: assert property (@(posedge clk) disable iff (!rst_n)
    !(cnt_en && put_en));
endmodule
