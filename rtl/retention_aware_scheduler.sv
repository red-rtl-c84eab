// retention_aware_scheduler: finds, before a GEMM runs, the tiling scheme
// and the macro/buffer VPD levels with the lowest estimated energy (the
// scheduling phase of RED, Fig. 7 left: FSM, lifetime estimator, energy
// estimator, energy optimizer).
//
// Step 1 (this FSM): enumerate every tiling scheme: both loop orders of
// Fig. 6 and every power-of-two tile shape m x k x n with m <= 2^ceil(log2 M),
// 4 <= k <= min(2^ceil(log2 K), KCAP) and n <= min(2^ceil(log2 N), NCAP),
// where KCAP/NCAP are the largest weight tile the macro holds in the
// selected weight map (bit-serial: BANKS*SUBS*COLS x ROWS/8; bit-parallel:
// BANKS*SUBS*COLS/8 x ROWS). Step 2: lifetime_estimator gives tile
// lifetimes and operation counts. Step 3: energy_estimator evaluates Eq. 1-3
// for all NUM_VPD x NUM_VPD (macro, buffer) level pairs. Step 4:
// energy_optimizer keeps the minimum. Loop order: order, then lm, lk, ln
// (ln innermost). The enumeration bounds are this design's choice; the
// paper says only "all possible tiling schemes (loop order and tile shape)".
//
// Handshake: pulse start with dim_m/k/n and wmap held; busy stays high
// until done pulses, then `result` holds the choice. n_eval counts the
// tiling schemes evaluated. One scheme takes about NUM_VPD*(CYC_W+2) +
// NUM_VPD^2 + 3 cycles.
module retention_aware_scheduler
  import red_pkg::*;
#(
  parameter int unsigned ROWS  = 32,
  parameter int unsigned COLS  = 512,
  parameter int unsigned SUBS  = 2,
  parameter int unsigned BANKS = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [DIM_W-1:0] dim_m,
  input  logic [DIM_W-1:0] dim_k,
  input  logic [DIM_W-1:0] dim_n,
  input  wmap_e            wmap,
  input  spec_entry_t [NUM_VPD-1:0] spec,
  input  logic [TAB_W-1:0] e_pu,
  output logic             busy,
  output logic             done,
  output sched_result_t    result,
  output logic [31:0]      n_eval
);
  localparam int unsigned NIN     = BANKS*SUBS*COLS;
  localparam int unsigned KCAP_BS = $clog2(NIN);
  localparam int unsigned KCAP_BP = $clog2(NIN/WBITS);
  localparam int unsigned NCAP_BS = $clog2(ROWS/WBITS);
  localparam int unsigned NCAP_BP = $clog2(ROWS);

  typedef enum logic [1:0] {R_IDLE, R_EST, R_WAIT, R_DONE} rs_state_e;
  rs_state_e state;

  function automatic logic [LOG_W-1:0] clog2_d(input logic [DIM_W-1:0] v);
    logic [LOG_W-1:0] r;
    r = '0;
    for (int b = 0; b < DIM_W; b++)
      if ((DIM_W'(1) << b) < v) r = LOG_W'(b + 1);
    return r;
  endfunction

  function automatic logic [LOG_W-1:0] min_l(input logic [LOG_W-1:0] a, input int unsigned b);
    return (32'(a) < b) ? a : LOG_W'(b);
  endfunction

  logic [DIM_W-1:0] M_q, K_q, N_q;
  wmap_e            wmap_q;
  loop_order_e      ord;
  tile_t            t;
  logic [LOG_W-1:0] lm_max, lk_max, ln_max;

  // Step 2
  logic [CYC_W-1:0] t_tile, lt_i, lt_w, lt_o, p_n, b_n;
  lifetime_estimator u_life (
    .order(ord), .tile(t), .wmap(wmap_q), .dim_m(M_q), .dim_k(K_q), .dim_n(N_q),
    .t_tile, .lt_i, .lt_w, .lt_o, .p_n, .b_n
  );

  // Step 3
  logic             est_busy, cand_valid, est_done;
  vsel_t            cand_vp, cand_vb;
  logic [EN_W-1:0]  cand_e;
  energy_estimator u_est (
    .clk, .rst_n, .start(state == R_EST), .p_n, .b_n, .lt_i, .lt_w, .lt_o,
    .spec, .e_pu, .busy(est_busy), .cand_valid, .cand_vp, .cand_vb, .cand_e,
    .done(est_done)
  );

  // Step 4
  logic        best_valid;
  logic [31:0] n_update;
  energy_optimizer u_opt (
    .clk, .rst_n, .clr(start && state == R_IDLE),
    .cand_valid, .cand_order(ord), .cand_tile(t), .cand_vp, .cand_vb, .cand_e,
    .best(result), .best_valid, .n_update
  );

  assign busy = (state != R_IDLE);

  // Step 1
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= R_IDLE; done <= 1'b0; n_eval <= '0;
      M_q <= '0; K_q <= '0; N_q <= '0; wmap_q <= MAP_BIT_SERIAL;
      ord <= ORDER_LJI; t <= '0; lm_max <= '0; lk_max <= '0; ln_max <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        R_IDLE: if (start) begin
          M_q <= dim_m; K_q <= dim_k; N_q <= dim_n; wmap_q <= wmap;
          lm_max <= clog2_d(dim_m);
          lk_max <= min_l(clog2_d(dim_k), (wmap == MAP_BIT_SERIAL) ? KCAP_BS : KCAP_BP);
          ln_max <= min_l(clog2_d(dim_n), (wmap == MAP_BIT_SERIAL) ? NCAP_BS : NCAP_BP);
          ord <= ORDER_LJI; t.lm <= '0; t.lk <= LOG_W'(2); t.ln <= '0;
          n_eval <= '0;
          state <= R_EST;
        end
        R_EST: state <= R_WAIT;
        R_WAIT: if (est_done) begin
          n_eval <= n_eval + 1'b1;
          state  <= R_EST;
          if (t.ln < ln_max) t.ln <= t.ln + 1'b1;
          else begin
            t.ln <= '0;
            if (t.lk < lk_max) t.lk <= t.lk + 1'b1;
            else begin
              t.lk <= LOG_W'(2);
              if (t.lm < lm_max) t.lm <= t.lm + 1'b1;
              else begin
                t.lm <= '0;
                if (ord == ORDER_LJI) ord <= ORDER_LIJ;
                else state <= R_DONE;
              end
            end
          end
        end
        R_DONE: begin done <= 1'b1; state <= R_IDLE; end
        default: state <= R_IDLE;
      endcase
    end
  end

  // The optimizer must hold a result when the search ends.
  always_ff @(posedge clk) begin
    if (state == R_DONE) assert (best_valid) else $error("no tiling scheme evaluated");
  end
endmodule
