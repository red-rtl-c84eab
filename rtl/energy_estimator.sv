// energy_estimator: energy of one tiling scheme at every pair of macro and
// buffer VPD levels (step 3 of the RED scheduling, Eq. 1-3 of the paper):
//
//   E_total  = E_PIM + E_Buffer
//   E_PIM    = (E_P_Acc[vp] + E_PU) * P_N + E_P_Ref[vp] * floor(T_W_life / T_P_ret[vp])
//   E_Buffer =  E_B_Acc[vb] * B_N
//             + E_B_Ref[vb] * (floor(T_I_life / T_B_ret[vb]) + floor(T_O_life / T_B_ret[vb]))
//
// The macro holds the weights (weight-stationary), the buffer the inputs
// and partial sums, so the macro refresh term uses the weight lifetime and
// the buffer term the input and output lifetimes (the paper writes a
// single T_B_Life; splitting it into the two tile types is this design's
// reading). The bracket of the paper is taken as floor: data that dies
// before one retention time needs no refresh (refresh skipping).
//
// Operation: `start` latches the counts and lifetimes. For every level v
// the three quotients are computed with three sequential dividers in
// parallel (CYC_W+1 cycles per level), and E_PIM[v], E_Buffer[v] stored.
// Then the NUM_VPD*NUM_VPD candidates are streamed out, one per cycle
// (cand_valid, cand_vp, cand_vb, cand_e), vp outer; `done` pulses with the
// last one. Energies are in the units of the spec table.
module energy_estimator
  import red_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [CYC_W-1:0] p_n,
  input  logic [CYC_W-1:0] b_n,
  input  logic [CYC_W-1:0] lt_i,
  input  logic [CYC_W-1:0] lt_w,
  input  logic [CYC_W-1:0] lt_o,
  input  spec_entry_t [NUM_VPD-1:0] spec,
  input  logic [TAB_W-1:0] e_pu,
  output logic             busy,
  output logic             cand_valid,
  output vsel_t            cand_vp,
  output vsel_t            cand_vb,
  output logic [EN_W-1:0]  cand_e,
  output logic             done
);
  typedef enum logic [1:0] {E_IDLE, E_DIV, E_WAIT, E_OUT} est_state_e;
  est_state_e state;

  logic [CYC_W-1:0] pn_q, bn_q, lti_q, ltw_q, lto_q;
  vsel_t            lvl, ovp, ovb;
  logic [EN_W-1:0]  e_pim [NUM_VPD];
  logic [EN_W-1:0]  e_buf [NUM_VPD];

  logic             dv_start;
  logic [2:0]       dv_done;
  logic [CYC_W-1:0] q_w, q_i, q_o;

  seq_divider #(.W(CYC_W)) u_div_w (.clk, .rst_n, .start(dv_start), .dividend(ltw_q),
    .divisor(CYC_W'(spec[lvl].p_ret)), .done(dv_done[0]), .quot(q_w));
  seq_divider #(.W(CYC_W)) u_div_i (.clk, .rst_n, .start(dv_start), .dividend(lti_q),
    .divisor(CYC_W'(spec[lvl].b_ret)), .done(dv_done[1]), .quot(q_i));
  seq_divider #(.W(CYC_W)) u_div_o (.clk, .rst_n, .start(dv_start), .dividend(lto_q),
    .divisor(CYC_W'(spec[lvl].b_ret)), .done(dv_done[2]), .quot(q_o));

  assign dv_start = (state == E_DIV);
  assign busy     = (state != E_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= E_IDLE; lvl <= '0; ovp <= '0; ovb <= '0;
      pn_q <= '0; bn_q <= '0; lti_q <= '0; ltw_q <= '0; lto_q <= '0;
      for (int v = 0; v < NUM_VPD; v++) begin e_pim[v] <= '0; e_buf[v] <= '0; end
      cand_valid <= 1'b0; cand_vp <= '0; cand_vb <= '0; cand_e <= '0; done <= 1'b0;
    end else begin
      cand_valid <= 1'b0;
      done       <= 1'b0;
      unique case (state)
        E_IDLE: if (start) begin
          pn_q <= p_n; bn_q <= b_n; lti_q <= lt_i; ltw_q <= lt_w; lto_q <= lt_o;
          lvl <= '0; state <= E_DIV;
        end
        E_DIV: state <= E_WAIT;
        E_WAIT: if (&dv_done) begin
          e_pim[lvl] <= (EN_W'(spec[lvl].p_acc) + EN_W'(e_pu)) * EN_W'(pn_q)
                        + EN_W'(spec[lvl].p_ref) * EN_W'(q_w);
          e_buf[lvl] <= EN_W'(spec[lvl].b_acc) * EN_W'(bn_q)
                        + EN_W'(spec[lvl].b_ref) * (EN_W'(q_i) + EN_W'(q_o));
          if (32'(lvl) == NUM_VPD-1) begin
            ovp <= '0; ovb <= '0; state <= E_OUT;
          end else begin
            lvl <= lvl + 1'b1; state <= E_DIV;
          end
        end
        E_OUT: begin
          cand_valid <= 1'b1;
          cand_vp    <= ovp;
          cand_vb    <= ovb;
          cand_e     <= e_pim[ovp] + e_buf[ovb];
          if (32'(ovb) == NUM_VPD-1) begin
            ovb <= '0;
            if (32'(ovp) == NUM_VPD-1) begin
              done <= 1'b1; state <= E_IDLE;
            end else ovp <= ovp + 1'b1;
          end else ovb <= ovb + 1'b1;
        end
        default: state <= E_IDLE;
      endcase
    end
  end
endmodule
