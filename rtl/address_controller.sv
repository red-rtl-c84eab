// address_controller: walks the tiles of a tiled GEMM O[M][N] = I[M][K] *
// W[K][N] in the loop order chosen by the scheduler, and gives the buffer
// base addresses of the current tile (the "Macro Addr Ctrl." / "Buf Addr
// Ctrl." of the PIM macro controller; the two loop orders are those of
// Fig. 6 of the RED paper).
//
//   ORDER_LJI: for l < N/n { for j < K/k { for i < M/m } }
//   ORDER_LIJ: for l < N/n { for i < M/m { for j < K/k } }
//
// Tile counts are rounded up, so matrix edges give partial tiles; m, k and
// n are powers of two given as logarithms.
//
// Buffer layout (this design's choice): the input matrix is row major
// (I[r][c] at byte ibase*4 + r*K + c), the weight matrix is stored
// transposed (W[c][n] at byte wbase*4 + n*K + c) so that one output
// column's weights are contiguous, and the outputs are 32-bit words
// (O[r][n] at word obase + r*N + n). K and k must be multiples of 4.
//
// Handshake: `start` loads the configuration and presents tile (0,0,0)
// with valid=1; every `next` pulse steps to the following tile; after the
// last tile valid drops. w_new marks a tile whose weight tile (j,l) differs
// from the previous tile's, i.e. the weights must be (re)loaded; first_k
// marks j = 0 (partial sums start from zero).
module address_controller
  import red_pkg::*;
#(
  parameter int unsigned AW = 14
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic             next,
  input  loop_order_e      order,
  input  tile_t            tile,
  input  logic [DIM_W-1:0] dim_m,
  input  logic [DIM_W-1:0] dim_k,
  input  logic [DIM_W-1:0] dim_n,
  input  logic [AW-1:0]    ibase,
  input  logic [AW-1:0]    wbase,
  input  logic [AW-1:0]    obase,
  output logic             valid,
  output logic             last,
  output logic             w_new,
  output logic             first_k,
  output logic [DIM_W-1:0] row0,     // i * m
  output logic [DIM_W-1:0] k0,       // j * k
  output logic [DIM_W-1:0] n0,       // l * n
  output logic [DIM_W-1:0] m_eff,    // rows of this tile
  output logic [DIM_W-1:0] k_eff,
  output logic [DIM_W-1:0] n_eff,
  output logic [AW-1:0]    i_addr,   // word of I[row0][k0]
  output logic [AW-1:0]    w_addr,   // word of W[k0][n0]
  output logic [AW-1:0]    o_addr    // word of O[row0][n0]
);
  loop_order_e      ord_q;
  tile_t            t_q;
  logic [DIM_W-1:0] M_q, K_q, N_q, nti, ntj, ntl;
  logic [DIM_W-1:0] ti, tj, tl;
  logic [AW-1:0]    ib_q, wb_q, ob_q;
  logic             have_prev;
  logic [DIM_W-1:0] pj, pl;

  logic ti_end, tj_end, tl_end;
  assign ti_end = (ti == nti - 1'b1);
  assign tj_end = (tj == ntj - 1'b1);
  assign tl_end = (tl == ntl - 1'b1);
  assign last   = valid && ti_end && tj_end && tl_end;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid <= 1'b0; ord_q <= ORDER_LJI; t_q <= '0;
      M_q <= '0; K_q <= '0; N_q <= '0; nti <= '0; ntj <= '0; ntl <= '0;
      ti <= '0; tj <= '0; tl <= '0; ib_q <= '0; wb_q <= '0; ob_q <= '0;
      have_prev <= 1'b0; pj <= '0; pl <= '0;
    end else if (start) begin
      valid <= 1'b1; ord_q <= order; t_q <= tile;
      M_q <= dim_m; K_q <= dim_k; N_q <= dim_n;
      nti <= ceil_shr(dim_m, tile.lm);
      ntj <= ceil_shr(dim_k, tile.lk);
      ntl <= ceil_shr(dim_n, tile.ln);
      ti <= '0; tj <= '0; tl <= '0;
      ib_q <= ibase; wb_q <= wbase; ob_q <= obase;
      have_prev <= 1'b0;
    end else if (next && valid) begin
      have_prev <= 1'b1; pj <= tj; pl <= tl;
      if (last) valid <= 1'b0;
      if (ord_q == ORDER_LJI) begin
        if (!ti_end) ti <= ti + 1'b1;
        else begin
          ti <= '0;
          if (!tj_end) tj <= tj + 1'b1;
          else begin tj <= '0; tl <= tl + 1'b1; end
        end
      end else begin
        if (!tj_end) tj <= tj + 1'b1;
        else begin
          tj <= '0;
          if (!ti_end) ti <= ti + 1'b1;
          else begin ti <= '0; tl <= tl + 1'b1; end
        end
      end
    end
  end

  function automatic logic [DIM_W-1:0] min_d(input logic [DIM_W-1:0] a, input logic [DIM_W-1:0] b);
    return (a < b) ? a : b;
  endfunction

  logic [DIM_W-1:0] m_full, k_full, n_full;
  assign m_full = DIM_W'(1) << t_q.lm;
  assign k_full = DIM_W'(1) << t_q.lk;
  assign n_full = DIM_W'(1) << t_q.ln;
  assign row0   = ti << t_q.lm;
  assign k0     = tj << t_q.lk;
  assign n0     = tl << t_q.ln;
  assign m_eff  = min_d(m_full, M_q - row0);
  assign k_eff  = min_d(k_full, K_q - k0);
  assign n_eff  = min_d(n_full, N_q - n0);
  assign w_new  = !have_prev || (pj != tj) || (pl != tl);
  assign first_k = (tj == '0);

  logic [31:0] ia, wa, oa;
  assign ia = 32'(ib_q) + ((32'(row0) * 32'(K_q) + 32'(k0)) >> 2);
  assign wa = 32'(wb_q) + ((32'(n0) * 32'(K_q) + 32'(k0)) >> 2);
  assign oa = 32'(ob_q) + 32'(row0) * 32'(N_q) + 32'(n0);
  assign i_addr = AW'(ia);
  assign w_addr = AW'(wa);
  assign o_addr = AW'(oa);
endmodule
