// unified_buffer: behavioural model of the unified eDRAM buffer that holds
// input matrices, weight matrices and partial sums next to the PIM macro.
// Like the macro it is built from reconfigurable 2T eDRAM, so it has its
// own VPD/VREF selection and its own retention time. It models an analog
// memory and is not the real array's circuit.
//
// Organisation (this design's choice; the paper gives only the 60 KB
// capacity): WORDS 32-bit words, grouped into rows of ROW_WORDS words for
// retention and refresh (60 KB = 15360 words = 960 rows of 64 bytes).
// One access per cycle: a write stores a word and resets the age of its
// row (a word write is taken as a read-modify-write of the row); a read
// returns the word registered, the cycle after req. A refresh resets the
// age of one row and has priority over an access in the same cycle.
// A read of a row older than the retention time of the selected VPD level,
// or with VREF not paired with VPD, returns 0 and raises ret_err.
module unified_buffer
  import red_pkg::*;
#(
  parameter int unsigned WORDS     = 15360,
  parameter int unsigned ROW_WORDS = 16,
  parameter logic [NUM_VPD-1:0][TAB_W-1:0] RET_CYCLES =
    {32'd1800, 32'd2400, 32'd4000, 32'd8000, 32'd20000},
  localparam int unsigned NROWS = WORDS / ROW_WORDS,
  localparam int unsigned AW    = $clog2(WORDS),
  localparam int unsigned RW    = $clog2(NROWS)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  vsel_t         vpd_sel,
  input  vsel_t         vref_sel,
  input  logic          req,
  input  logic          wr,
  input  logic [AW-1:0] addr,    // word address
  input  logic [31:0]   wdata,
  output logic [31:0]   rdata,
  input  logic          ref_en,
  input  logic [RW-1:0] ref_row,
  output logic          ret_err
);
  localparam int unsigned AGE_W = 24;

  logic [31:0]      mem [WORDS];
  logic [AGE_W-1:0] age [NROWS];
  logic [TAB_W-1:0] ret_now;
  logic [RW-1:0]    arow;

  assign ret_now = (vpd_sel < VSEL_W'(NUM_VPD)) ? RET_CYCLES[vpd_sel] : RET_CYCLES[0];
  assign arow    = RW'(addr / AW'(ROW_WORDS));

  // Storage without reset, as a RAM.
  always_ff @(posedge clk) begin
    if (req && wr && !ref_en) mem[addr] <= wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < NROWS; r++) age[r] <= '0;
      rdata   <= '0;
      ret_err <= 1'b0;
    end else begin
      ret_err <= 1'b0;
      for (int r = 0; r < NROWS; r++)
        if (age[r] != '1) age[r] <= age[r] + 1'b1;
      if (ref_en) begin
        age[ref_row] <= '0;
      end else if (req && wr) begin
        age[arow] <= '0;
      end else if (req) begin
        if ((32'(age[arow]) >= ret_now) || (vref_sel != vpd_sel)) begin
          rdata   <= '0;
          ret_err <= 1'b1;
        end else begin
          rdata   <= mem[addr];
        end
      end
    end
  end
endmodule
