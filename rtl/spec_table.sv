// spec_table: the memory specification table of the reconfigurable eDRAM
// that the RED scheduler's energy model reads: for each VPD level the
// macro access energy, macro refresh energy, macro retention time, and the
// same three for the unified buffer, plus the processing-unit energy per
// operation E_PU.
//
// The paper obtains these numbers from post-layout simulation of its
// eDRAM; they are inputs of the framework, so here they are registers the
// host can overwrite (cfg_we with cfg_lvl and cfg_field). Reset loads
// red_pkg::default_spec: retention 100 us at level 0 and 9 us at level 4
// (the paper's), access energy falling by 71% from level 0 to level 4 (the
// paper's 71.31% reduction of access power for the 32x512 subarray), the
// rest illustrative. Field codes: 0 p_acc, 1 p_ref, 2 p_ret, 3 b_acc,
// 4 b_ref, 5 b_ret, 6 E_PU (level ignored). cfg_rdata returns the addressed
// field combinationally.
module spec_table
  import red_pkg::*;
#(
  parameter logic [TAB_W-1:0] E_PU_DEFAULT = 32'd120
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      cfg_we,
  input  vsel_t                     cfg_lvl,
  input  logic [2:0]                cfg_field,
  input  logic [TAB_W-1:0]          cfg_wdata,
  output logic [TAB_W-1:0]          cfg_rdata,
  output spec_entry_t [NUM_VPD-1:0] spec,
  output logic [TAB_W-1:0]          e_pu
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int v = 0; v < NUM_VPD; v++) spec[v] <= default_spec(v);
      e_pu <= E_PU_DEFAULT;
    end else if (cfg_we) begin
      if (cfg_field == 3'd6) e_pu <= cfg_wdata;
      else if (cfg_lvl < VSEL_W'(NUM_VPD)) begin
        unique case (cfg_field)
          3'd0: spec[cfg_lvl].p_acc <= cfg_wdata;
          3'd1: spec[cfg_lvl].p_ref <= cfg_wdata;
          3'd2: spec[cfg_lvl].p_ret <= cfg_wdata;
          3'd3: spec[cfg_lvl].b_acc <= cfg_wdata;
          3'd4: spec[cfg_lvl].b_ref <= cfg_wdata;
          3'd5: spec[cfg_lvl].b_ret <= cfg_wdata;
          default: ;
        endcase
      end
    end
  end

  always_comb begin
    cfg_rdata = '0;
    if (cfg_field == 3'd6) cfg_rdata = e_pu;
    else if (cfg_lvl < VSEL_W'(NUM_VPD)) begin
      unique case (cfg_field)
        3'd0: cfg_rdata = spec[cfg_lvl].p_acc;
        3'd1: cfg_rdata = spec[cfg_lvl].p_ref;
        3'd2: cfg_rdata = spec[cfg_lvl].p_ret;
        3'd3: cfg_rdata = spec[cfg_lvl].b_acc;
        3'd4: cfg_rdata = spec[cfg_lvl].b_ref;
        3'd5: cfg_rdata = spec[cfg_lvl].b_ret;
        default: cfg_rdata = '0;
      endcase
    end
  end
endmodule
