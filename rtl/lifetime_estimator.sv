// lifetime_estimator: lifetime of the input, weight and output tiles, and
// the operation counts, of one tiling scheme (loop order and tile shape)
// of a GEMM O[M][N] = I[M][K] * W[K][N] (step 2 of the RED scheduling).
//
// With T the computation cycles per tile and nti = ceil(M/m),
// ntj = ceil(K/k), ntl = ceil(N/n), the lifetimes are those printed in
// Fig. 6 of the RED paper, counted in clock cycles (the paper's factor P,
// the clock period, is left out):
//
//   order  input            weight         output
//   L-J-I  nti*ntj*ntl*T    nti*T          nti*T
//   L-I-J  nti*ntj*ntl*T    nti*ntl*T      1*T
//
// T is this design's: every tile computes m*n dot products, each with
// IBITS macro reads (bit-parallel weights) or IBITS*WBITS reads
// (bit-serial weights), one per cycle, so T = m*n*IBITS*(WBITS or 1).
//
// Operation counts for the energy model (Eq. 2-3), following the execution
// of pim_macro_controller: p_n = macro read cycles = tiles*T; b_n = buffer
// word accesses = tiles*m*(k/4 + 2n) for inputs and partial sums plus
// n_wload*k*n/4 for weight loads, where a weight tile is loaded once per
// (j,l) in order L-J-I (or when ntj = 1) and once per tile otherwise.
// Purely combinational.
module lifetime_estimator
  import red_pkg::*;
(
  input  loop_order_e       order,
  input  tile_t             tile,
  input  wmap_e             wmap,
  input  logic [DIM_W-1:0]  dim_m,
  input  logic [DIM_W-1:0]  dim_k,
  input  logic [DIM_W-1:0]  dim_n,
  output logic [CYC_W-1:0]  t_tile,
  output logic [CYC_W-1:0]  lt_i,
  output logic [CYC_W-1:0]  lt_w,
  output logic [CYC_W-1:0]  lt_o,
  output logic [CYC_W-1:0]  p_n,
  output logic [CYC_W-1:0]  b_n
);
  logic [CYC_W-1:0] nti, ntj, ntl, tiles, n_wload, m, k, n;

  always_comb begin
    nti   = CYC_W'(ceil_shr(dim_m, tile.lm));
    ntj   = CYC_W'(ceil_shr(dim_k, tile.lk));
    ntl   = CYC_W'(ceil_shr(dim_n, tile.ln));
    m     = CYC_W'(1) << tile.lm;
    k     = CYC_W'(1) << tile.lk;
    n     = CYC_W'(1) << tile.ln;
    tiles = nti * ntj * ntl;
    t_tile = (m * n * IBITS) * ((wmap == MAP_BIT_SERIAL) ? CYC_W'(WBITS) : CYC_W'(1));
    lt_i  = tiles * t_tile;
    if (order == ORDER_LJI) begin
      lt_w = nti * t_tile;
      lt_o = nti * t_tile;
    end else begin
      lt_w = nti * ntl * t_tile;
      lt_o = t_tile;
    end
    n_wload = (order == ORDER_LJI || ntj == CYC_W'(1)) ? ntj * ntl : tiles;
    p_n   = tiles * t_tile;
    b_n   = tiles * m * ((k >> 2) + 2 * n) + n_wload * ((k * n) >> 2);
  end
endmodule
