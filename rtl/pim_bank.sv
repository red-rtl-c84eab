// pim_bank: one bank of the PIM macro: SUBS reconfigurable eDRAM subarrays
// that share row address, VPD/VREF and refresh control, plus the bank's
// processing unit.
//
// A compute step activates the same row in every subarray; each subarray's
// sense amplifiers are gated by their own input bits (sa_in), and the
// processing unit adds all SUBS*COLS products (the paper lets subarrays of
// a bank be "controlled equally" and places one processing unit per bank).
// Writes go to one subarray at a time (wsub) with a column mask. Refresh
// refreshes the same row of every subarray.
//
// Timing: the subarray read is registered, so the processing-unit controls
// (pu_en, pu_clr, wbit, ibit) given with re are delayed here by one cycle
// to meet the data. psum is valid two cycles after the last re of a dot
// product. ret_err is the OR of the subarray models' sensing-failure flags.
module pim_bank
  import red_pkg::*;
#(
  parameter int unsigned ROWS = 32,
  parameter int unsigned COLS = 512,
  parameter int unsigned SUBS = 2
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  vsel_t                     vpd_sel,
  input  vsel_t                     vref_sel,
  input  wmap_e                     wmap,
  input  logic                      we,
  input  logic [$clog2(SUBS)-1:0]   wsub,
  input  logic [$clog2(ROWS)-1:0]   wrow,
  input  logic [COLS-1:0]           wdata,
  input  logic [COLS-1:0]           wmask,
  input  logic                      re,
  input  logic [$clog2(ROWS)-1:0]   rrow,
  input  logic [SUBS*COLS-1:0]      sa_in,
  input  logic                      ref_en,
  input  logic [$clog2(ROWS)-1:0]   ref_row,
  input  logic                      pu_en,
  input  logic                      pu_clr,
  input  logic [$clog2(WBITS)-1:0]  wbit,
  input  logic [$clog2(IBITS)-1:0]  ibit,
  output logic signed [OBITS-1:0]   psum,
  output logic                      ret_err
);
  logic [SUBS*COLS-1:0] sa_out;
  logic [SUBS-1:0]      err;

  for (genvar s = 0; s < SUBS; s++) begin : g_sub
    edram_subarray #(.ROWS(ROWS), .COLS(COLS)) u_sub (
      .clk, .rst_n, .vpd_sel, .vref_sel,
      .we     (we && (wsub == s[$clog2(SUBS)-1:0])),
      .wrow, .wdata, .wmask,
      .re, .rrow,
      .sa_in  (sa_in[s*COLS +: COLS]),
      .ref_en, .ref_row,
      .rdata  (sa_out[s*COLS +: COLS]),
      .ret_err(err[s])
    );
  end
  assign ret_err = |err;

  logic                     pu_en_q, pu_clr_q;
  logic [$clog2(WBITS)-1:0] wbit_q;
  logic [$clog2(IBITS)-1:0] ibit_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pu_en_q <= 1'b0; pu_clr_q <= 1'b0; wbit_q <= '0; ibit_q <= '0;
    end else begin
      pu_en_q <= pu_en; pu_clr_q <= pu_clr; wbit_q <= wbit; ibit_q <= ibit;
    end
  end

  processing_unit #(.NSA(SUBS*COLS)) u_pu (
    .clk, .rst_n, .wmap,
    .en(pu_en_q), .clr(pu_clr_q), .wbit(wbit_q), .ibit(ibit_q),
    .sa_out, .acc(psum)
  );
endmodule
