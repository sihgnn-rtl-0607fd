// topology_loader: receives one semantic graph and builds its adjacency
// buffers.
//
// On start it clears both adjacency buffers, then accepts the edge stream
// (valid/ready, source id, destination id, last) that the memory controller
// delivers from DRAM. Each edge is kept in the edge list and counted in both
// buffers. After the last edge both buffers compute their row pointers and
// the edge list is replayed once to place every edge in the source-side
// (out-neighbours) and destination-side (in-neighbours) lists. The edge list
// stays readable through rd_e for the Graph Generator.
//
// Edges beyond the 2**E_W capacity are accepted and dropped, and set
// overflow. Cost: max(n_src, n_dst) + E + max(n_src, n_dst) + E cycles
// plus a few cycles of control. The edges may arrive in any order. The
// paper only says that the topology is transferred from DRAM; this block
// and its timing are this design's own.
module topology_loader #(
  parameter int V_W = 14,
  parameter int E_W = 16
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  // edge stream
  input  logic           e_valid,
  output logic           e_ready,
  input  logic [V_W-1:0] e_src,
  input  logic [V_W-1:0] e_dst,
  input  logic           e_last,
  // source-side adjacency buffer control
  output logic           s_clr, s_pfx, s_cnt, s_put,
  output logic [V_W-1:0] s_key, s_val,
  input  logic           s_busy,
  // destination-side adjacency buffer control
  output logic           d_clr, d_pfx, d_cnt, d_put,
  output logic [V_W-1:0] d_key, d_val,
  input  logic           d_busy,
  // edge list
  input  logic [E_W-1:0] rd_e,
  output logic [V_W-1:0] rd_src,
  output logic [V_W-1:0] rd_dst,
  output logic [E_W:0]   num_edges,
  output logic           overflow,
  output logic           busy,
  output logic           done
);
  localparam int NE = 1 << E_W;

  typedef enum logic [2:0] {L_IDLE, L_CLR, L_CLRW, L_RECV, L_PFX, L_PFXW, L_PUT, L_DONE} state_e;

  logic [V_W-1:0] edge_src [NE];
  logic [V_W-1:0] edge_dst [NE];

  state_e       st;
  logic [E_W:0] ne, e;
  logic         accept, keep;

  assign e_ready = (st == L_RECV);
  assign accept  = e_valid && e_ready;
  assign keep    = accept && (int'(ne) < NE);
  assign rd_src  = edge_src[rd_e];
  assign rd_dst  = edge_dst[rd_e];
  assign num_edges = ne;
  assign busy    = (st != L_IDLE);
  assign done    = (st == L_DONE);

  assign s_clr = (st == L_CLR);
  assign d_clr = (st == L_CLR);
  assign s_pfx = (st == L_PFX);
  assign d_pfx = (st == L_PFX);
  assign s_cnt = keep;
  assign d_cnt = keep;
  assign s_put = (st == L_PUT) && (e != ne);
  assign d_put = s_put;

  always_comb begin
    if (st == L_PUT) begin
      s_key = edge_src[e[E_W-1:0]];
      s_val = edge_dst[e[E_W-1:0]];
    end else begin
      s_key = e_src;
      s_val = e_dst;
    end
    d_key = (st == L_PUT) ? s_val : e_dst;
    d_val = (st == L_PUT) ? s_key : e_src;
  end

  always_ff @(posedge clk) begin
    if (keep) begin
      edge_src[ne[E_W-1:0]] <= e_src;
      edge_dst[ne[E_W-1:0]] <= e_dst;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st       <= L_IDLE;
      ne       <= '0;
      e        <= '0;
      overflow <= 1'b0;
    end else begin
      unique case (st)
        L_IDLE: if (start) begin
          ne       <= '0;
          e        <= '0;
          overflow <= 1'b0;
          st       <= L_CLR;
        end
        L_CLR:  st <= L_CLRW;
        L_CLRW: if (!s_busy && !d_busy) st <= L_RECV;
        L_RECV: if (accept) begin
          if (keep) ne <= ne + 1'b1;
          else      overflow <= 1'b1;
          if (e_last) st <= L_PFX;
        end
        L_PFX:  st <= L_PFXW;
        L_PFXW: if (!s_busy && !d_busy) st <= L_PUT;
        L_PUT: begin
          if (e == ne) st <= L_DONE;
          else         e  <= e + 1'b1;
        end
        L_DONE: st <= L_IDLE;
        default: st <= L_IDLE;
      endcase
    end
  end
endmodule
