// voltage_switch: digital control of the VPD and VREF switch ladders of the
// PIM macro ("Macro Ctrl.") and of the unified buffer ("Buffer Ctrl.").
//
// Every ladder connects one of NUM_VPD pre-generated voltages to its rail
// through a transmission-gate switch; this block holds the chosen level of
// each of the four ladders and drives exactly one switch enable per ladder
// (one-hot). The levels are taken from the scheduler result when `apply`
// is pulsed and held until the next apply. VREF is looked up with the VPD
// level it was pre-computed for, so the VREF level always equals the VPD
// level given with it by the scheduler. Out-of-range codes select level 0
// (largest swing, longest retention), the safe setting. Reset also selects
// level 0. The level codes are also output for the behavioural memory
// models. Timing: outputs change one cycle after apply.
module voltage_switch
  import red_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               apply,
  input  vsel_t              macro_vpd_in,
  input  vsel_t              macro_vref_in,
  input  vsel_t              buf_vpd_in,
  input  vsel_t              buf_vref_in,
  output vsel_t              macro_vpd,
  output vsel_t              macro_vref,
  output vsel_t              buf_vpd,
  output vsel_t              buf_vref,
  output logic [NUM_VPD-1:0] macro_vpd_sw,
  output logic [NUM_VPD-1:0] macro_vref_sw,
  output logic [NUM_VPD-1:0] buf_vpd_sw,
  output logic [NUM_VPD-1:0] buf_vref_sw,
  output logic [31:0]        n_switch       // applies that changed a level
);
  function automatic vsel_t legal(input vsel_t v);
    return (v < VSEL_W'(NUM_VPD)) ? v : '0;
  endfunction

  function automatic logic [NUM_VPD-1:0] onehot(input vsel_t v);
    return NUM_VPD'(1) << v;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      macro_vpd <= '0; macro_vref <= '0; buf_vpd <= '0; buf_vref <= '0;
      n_switch  <= '0;
    end else if (apply) begin
      macro_vpd  <= legal(macro_vpd_in);
      macro_vref <= legal(macro_vref_in);
      buf_vpd    <= legal(buf_vpd_in);
      buf_vref   <= legal(buf_vref_in);
      if (legal(macro_vpd_in) != macro_vpd || legal(buf_vpd_in) != buf_vpd)
        n_switch <= n_switch + 1'b1;
    end
  end

  assign macro_vpd_sw  = onehot(macro_vpd);
  assign macro_vref_sw = onehot(macro_vref);
  assign buf_vpd_sw    = onehot(buf_vpd);
  assign buf_vref_sw   = onehot(buf_vref);
endmodule
