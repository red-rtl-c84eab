// energy_optimizer: comparator and best-so-far register of the RED
// retention-aware scheduler (step 4; Fig. 7 of the paper shows a comparator
// with an "update?" decision and a register with the fields Loop Order,
// Tile Shape, Macro VPD, Macro VREF, Buf VPD, Buf VREF and Min E).
//
// `clr` empties the register. Every candidate (cand_valid) is compared
// with Min E; if the register is empty or the candidate is strictly lower
// it is taken (ties keep the earlier candidate). VREF is the level
// pre-computed for the chosen VPD, so Macro/Buf VREF take the same level
// index as Macro/Buf VPD. `best` is the registered result, `best_valid`
// says it holds a candidate; n_update counts the updates.
module energy_optimizer
  import red_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  logic            clr,
  input  logic            cand_valid,
  input  loop_order_e     cand_order,
  input  tile_t           cand_tile,
  input  vsel_t           cand_vp,
  input  vsel_t           cand_vb,
  input  logic [EN_W-1:0] cand_e,
  output sched_result_t   best,
  output logic            best_valid,
  output logic [31:0]     n_update
);
  logic update;
  assign update = cand_valid && (!best_valid || (cand_e < best.min_e));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      best <= '0; best_valid <= 1'b0; n_update <= '0;
    end else if (clr) begin
      best <= '0; best_valid <= 1'b0; n_update <= '0;
    end else if (update) begin
      best.order      <= cand_order;
      best.tile       <= cand_tile;
      best.macro_vpd  <= cand_vp;
      best.macro_vref <= cand_vp;
      best.buf_vpd    <= cand_vb;
      best.buf_vref   <= cand_vb;
      best.min_e      <= cand_e;
      best_valid      <= 1'b1;
      n_update        <= n_update + 1'b1;
    end
  end
endmodule
