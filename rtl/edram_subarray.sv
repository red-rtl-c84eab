// edram_subarray: behavioural model of one reconfigurable 2T eDRAM subarray
// (cell array, row decoder, WL driver, reconfigurable pull-down driver and a
// row of power-gated sense amplifiers). It is a model of an analog,
// process-specific circuit, not synthesisable logic of the real part.
//
// Function. ROWS x COLS cells. A write drives the selected row through the
// write wordline; the column mask selects which bitlines carry new data,
// and the model treats a masked write as a read-modify-write of the whole
// row, so it also refreshes the row. A read activates one read wordline,
// which the reconfigurable pull-down driver pulls to the selected VPD level
// instead of VSS. Each column's sense amplifier compares its read bitline
// with VREF. A sense amplifier whose input bit sa_in is 0 is power gated and
// outputs 0 whatever the cell holds, so rdata = sa_in & row: the amplifier
// doubles as the 1-bit multiplier of a digital PIM macro. A refresh reads a
// row and writes it back.
//
// What is modelled of the analog behaviour. Every row has an age counter
// (cycles since it was last written or refreshed). If a read finds the row
// older than the retention time of the current VPD level, or finds VREF not
// set to the level paired with the VPD level, sensing fails: the model
// returns 0 for that row and raises ret_err for one cycle (only if at least
// one amplifier is enabled: a fully gated read senses nothing, so stale
// rows behind zero inputs are harmless). Retention per
// level comes from RET_CYCLES (100 us at 0 mV and 9 us at 500 mV, 200 MHz;
// the levels between are this design's interpolation).
//
// Timing: write and refresh take effect at the clock edge; rdata is
// registered, valid the cycle after re. One operation per cycle; if several
// are asserted, refresh wins over write, write over read.
module edram_subarray
  import red_pkg::*;
#(
  parameter int unsigned ROWS = 32,
  parameter int unsigned COLS = 512,
  parameter logic [NUM_VPD-1:0][TAB_W-1:0] RET_CYCLES =
    {32'd1800, 32'd2400, 32'd4000, 32'd8000, 32'd20000}
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  vsel_t                    vpd_sel,   // pull-down voltage level
  input  vsel_t                    vref_sel,  // reference voltage level
  input  logic                     we,
  input  logic [$clog2(ROWS)-1:0]  wrow,
  input  logic [COLS-1:0]          wdata,
  input  logic [COLS-1:0]          wmask,
  input  logic                     re,
  input  logic [$clog2(ROWS)-1:0]  rrow,
  input  logic [COLS-1:0]          sa_in,     // input bits; 0 gates the SA
  input  logic                     ref_en,
  input  logic [$clog2(ROWS)-1:0]  ref_row,
  output logic [COLS-1:0]          rdata,
  output logic                     ret_err    // model only: sensing failed
);
  localparam int unsigned AGE_W = 24;

  logic [COLS-1:0]  cells [ROWS];
  logic [AGE_W-1:0] age   [ROWS];
  logic [TAB_W-1:0] ret_now;

  assign ret_now = (vpd_sel < VSEL_W'(NUM_VPD)) ? RET_CYCLES[vpd_sel] : RET_CYCLES[0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < ROWS; r++) begin
        cells[r] <= '0;
        age[r]   <= '0;
      end
      rdata   <= '0;
      ret_err <= 1'b0;
    end else begin
      ret_err <= 1'b0;
      for (int r = 0; r < ROWS; r++)
        if (age[r] != '1) age[r] <= age[r] + 1'b1;
      if (ref_en) begin
        age[ref_row] <= '0;
      end else if (we) begin
        cells[wrow] <= (cells[wrow] & ~wmask) | (wdata & wmask);
        age[wrow]   <= '0;
      end else if (re) begin
        if ((32'(age[rrow]) >= ret_now) || (vref_sel != vpd_sel)) begin
          rdata   <= '0;
          ret_err <= (sa_in != '0);   // fully gated read senses nothing
        end else begin
          rdata   <= cells[rrow] & sa_in;
        end
      end
    end
  end
endmodule
