// processing_unit: adder tree plus shift-and-accumulate of one PIM bank.
//
// The sense amplifiers of the bank already output (input bit AND weight
// bit), so no multiplier is needed: this unit only adds the products up and
// weights them by their bit positions. Inputs are always processed bit
// serially (one input bit plane kb per cycle); weights are laid out in one
// of two ways (Fig. 8 of the RED paper):
//
//  * MAP_BIT_SERIAL: every column holds one weight, one bit per row, so a
//    read returns bit b of NSA weights. Adder tree = popcount of sa_out;
//    the term is shifted by b + kb.
//  * MAP_BIT_PARALLEL: every group of WBITS adjacent columns holds one whole
//    weight (LSB in the lowest column). Adder tree = sum of NSA/WBITS signed
//    WBITS-bit values; the term is shifted by kb.
//
// Activations and weights are two's complement, so the plane holding the
// sign bit of the input (kb = IBITS-1) and, in bit-serial mode, the weight
// sign plane (b = WBITS-1) are subtracted instead of added (this signed
// handling is this design's choice; the paper only names INT8 data).
//
// Timing: one term per cycle. On a cycle with en=1 the accumulator loads
// term (clr=1) or acc+term (clr=0); acc is the registered result. The adder
// tree is written as a loop sum and left to synthesis to balance.
module processing_unit
  import red_pkg::*;
#(
  parameter int unsigned NSA = 1024   // sense amplifiers feeding the unit
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  wmap_e                    wmap,
  input  logic                     en,
  input  logic                     clr,
  input  logic [$clog2(WBITS)-1:0] wbit,   // weight bit plane (bit-serial map)
  input  logic [$clog2(IBITS)-1:0] ibit,   // input bit plane
  input  logic [NSA-1:0]           sa_out,
  output logic signed [OBITS-1:0]  acc
);
  localparam int unsigned NGRP = NSA / WBITS;

  logic signed [OBITS-1:0] tree_sum, term;
  logic                    neg;

  always_comb begin
    tree_sum = '0;
    if (wmap == MAP_BIT_SERIAL) begin
      for (int i = 0; i < NSA; i++) tree_sum = tree_sum + OBITS'(sa_out[i]);
    end else begin
      for (int g = 0; g < NGRP; g++)
        tree_sum = tree_sum + OBITS'(signed'(sa_out[g*WBITS +: WBITS]));
    end
  end

  always_comb begin
    if (wmap == MAP_BIT_SERIAL) begin
      term = tree_sum <<< (32'(wbit) + 32'(ibit));
      neg  = (32'(wbit) == WBITS-1) ^ (32'(ibit) == IBITS-1);
    end else begin
      term = tree_sum <<< ibit;
      neg  = (32'(ibit) == IBITS-1);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  acc <= '0;
    else if (en) acc <= (clr ? '0 : acc) + (neg ? -term : term);
  end
endmodule
