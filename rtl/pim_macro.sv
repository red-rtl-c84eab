// pim_macro: the PIM macro: BANKS banks of SUBS reconfigurable eDRAM
// subarrays, each bank with its processing unit, plus the input register
// that broadcasts input bits to the sense amplifiers.
//
// Inputs are loaded four bytes at a time (in_we, in_word) into an input
// register of NIN = BANKS*SUBS*COLS INT8 values (in_clr zeroes it first, so
// unused inputs gate their sense amplifiers off). During a read the bit
// plane ibit of the inputs is broadcast to the sense amplifiers (Fig. 8):
//  * bit-serial weight map: input e drives the SA of global column e, so a
//    row read gives one weight bit of NIN different weights;
//  * bit-parallel weight map: input e drives the WBITS SAs of columns
//    e*WBITS .. e*WBITS+WBITS-1, which hold one whole weight; only the first
//    NIN/WBITS inputs are used.
// Global column e lies in bank e / (SUBS*COLS), subarray (e / COLS) % SUBS,
// column e % COLS.
//
// The banks' partial sums are added (the PSum path between the processing
// units of Fig. 7) into psum, valid two cycles after the last read of a dot
// product. All banks read the same row together; writes go to one
// subarray (wbank, wsub). Refresh refreshes one row of every subarray.
module pim_macro
  import red_pkg::*;
#(
  parameter int unsigned ROWS  = 32,
  parameter int unsigned COLS  = 512,
  parameter int unsigned SUBS  = 2,
  parameter int unsigned BANKS = 4,
  localparam int unsigned NIN  = BANKS*SUBS*COLS,
  localparam int unsigned INW  = $clog2(NIN/4)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  vsel_t                     vpd_sel,
  input  vsel_t                     vref_sel,
  input  wmap_e                     wmap,
  // input register
  input  logic                      in_clr,
  input  logic                      in_we,
  input  logic [INW-1:0]            in_word,
  input  logic [31:0]               in_data,
  // weight write
  input  logic                      we,
  input  logic [$clog2(BANKS)-1:0]  wbank,
  input  logic [$clog2(SUBS)-1:0]   wsub,
  input  logic [$clog2(ROWS)-1:0]   wrow,
  input  logic [COLS-1:0]           wdata,
  input  logic [COLS-1:0]           wmask,
  // compute read
  input  logic                      re,
  input  logic [$clog2(ROWS)-1:0]   rrow,
  input  logic [$clog2(IBITS)-1:0]  ibit,
  input  logic [$clog2(WBITS)-1:0]  wbit,
  input  logic                      pu_en,
  input  logic                      pu_clr,
  // refresh
  input  logic                      ref_en,
  input  logic [$clog2(ROWS)-1:0]   ref_row,
  output logic signed [OBITS-1:0]   psum,
  output logic                      ret_err
);
  logic [IBITS-1:0] inreg [NIN];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int e = 0; e < NIN; e++) inreg[e] <= '0;
    end else if (in_clr) begin
      for (int e = 0; e < NIN; e++) inreg[e] <= '0;
    end else if (in_we) begin
      for (int b = 0; b < 4; b++) inreg[{in_word, 2'(b)}] <= in_data[8*b +: 8];
    end
  end

  logic [NIN-1:0] sa_in;
  always_comb begin
    for (int c = 0; c < NIN; c++) begin
      if (wmap == MAP_BIT_SERIAL) sa_in[c] = inreg[c][ibit];
      else                        sa_in[c] = inreg[c / WBITS][ibit];
    end
  end

  logic signed [OBITS-1:0] bank_psum [BANKS];
  logic [BANKS-1:0]        bank_err;

  for (genvar b = 0; b < BANKS; b++) begin : g_bank
    pim_bank #(.ROWS(ROWS), .COLS(COLS), .SUBS(SUBS)) u_bank (
      .clk, .rst_n, .vpd_sel, .vref_sel, .wmap,
      .we     (we && (wbank == b[$clog2(BANKS)-1:0])),
      .wsub, .wrow, .wdata, .wmask,
      .re, .rrow,
      .sa_in  (sa_in[b*SUBS*COLS +: SUBS*COLS]),
      .ref_en, .ref_row,
      .pu_en, .pu_clr, .wbit, .ibit,
      .psum   (bank_psum[b]),
      .ret_err(bank_err[b])
    );
  end

  always_comb begin
    psum = '0;
    for (int b = 0; b < BANKS; b++) psum = psum + bank_psum[b];
  end
  assign ret_err = |bank_err;
endmodule
