// tb_pim_macro: places random INT8 weights into a small PIM macro in the
// bit-parallel and the bit-serial layout, loads random INT8 inputs into the
// input register, runs the bit-serial dot-product read sequence and
// compares the combined partial sum of all banks with the dot product
// computed here. Also checks that in_clr zeroes the inputs.
module tb_pim_macro;
  import red_pkg::*;
  localparam int unsigned R = 16, C = 32, S = 2, B = 2, NIN = B*S*C;
  logic clk = 0, rst_n = 0;
  wmap_e wmap = MAP_BIT_PARALLEL;
  logic in_clr = 0, in_we = 0, we = 0, re = 0, pu_en = 0, pu_clr = 0, ref_en = 0;
  logic [$clog2(NIN/4)-1:0] in_word = 0;
  logic [31:0] in_data = 0;
  logic [0:0] wbank = 0, wsub = 0;
  logic [3:0] wrow = 0, rrow = 0, ref_row = 0;
  logic [C-1:0] wdata = 0, wmask = '1;
  logic [2:0] ibit = 0, wbit = 0;
  logic signed [OBITS-1:0] psum;
  logic ret_err;
  int checks = 0, failures = 0;

  pim_macro #(.ROWS(R), .COLS(C), .SUBS(S), .BANKS(B)) dut (
    .clk, .rst_n, .vpd_sel(3'd1), .vref_sel(3'd1), .wmap, .in_clr, .in_we, .in_word, .in_data,
    .we, .wbank, .wsub, .wrow, .wdata, .wmask, .re, .rrow, .ibit, .wbit, .pu_en, .pu_clr,
    .ref_en, .ref_row, .psum, .ret_err);
  always #5 clk = ~clk;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [7:0] w [2][NIN];
  logic [7:0] x [NIN];
  logic [NIN-1:0] img [R];   // global row image: bank/sub/col concatenated

  task automatic write_image();
    for (int r = 0; r < R; r++)
      for (int bs = 0; bs < B*S; bs++) begin
        @(negedge clk); we = 1; wbank = 1'(bs / S); wsub = 1'(bs % S); wrow = 4'(r);
        wdata = img[r][bs*C +: C];
      end
    @(negedge clk); we = 0;
  endtask

  task automatic load_inputs(input int n);
    @(negedge clk); in_clr = 1;
    @(negedge clk); in_clr = 0;
    for (int q = 0; q < n/4; q++) begin
      @(negedge clk); in_we = 1; in_word = $clog2(NIN/4)'(q);
      in_data = {x[4*q+3], x[4*q+2], x[4*q+1], x[4*q]};
    end
    @(negedge clk); in_we = 0;
  endtask

  function automatic int sx(input logic [7:0] v); return int'(signed'(v)); endfunction

  initial begin
    #400000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    // ---------------- bit-parallel: column nn in row nn, weight e at columns e*8..
    wmap = MAP_BIT_PARALLEL;
    for (int r = 0; r < R; r++) img[r] = '0;
    for (int nn = 0; nn < 2; nn++)
      for (int e = 0; e < NIN/8; e++) begin
        w[nn][e] = 8'($urandom);
        img[nn][e*8 +: 8] = w[nn][e];
      end
    write_image();
    for (int run = 0; run < 4; run++) begin
      for (int e = 0; e < NIN; e++) x[e] = 8'($urandom);
      load_inputs(NIN/8);
      for (int nn = 0; nn < 2; nn++) begin
        int exp_v; exp_v = 0;
        for (int e = 0; e < NIN/8; e++) exp_v += sx(x[e]) * sx(w[nn][e]);
        for (int kb = 0; kb < 8; kb++) begin
          @(negedge clk); re = 1; rrow = 4'(nn); ibit = 3'(kb); wbit = 0; pu_en = 1; pu_clr = (kb == 0);
        end
        @(negedge clk); re = 0; pu_en = 0;
        @(negedge clk);
        check(psum == exp_v, $sformatf("BP run %0d col %0d psum %0d exp %0d", run, nn, psum, exp_v));
      end
    end
    // in_clr zeroes the inputs: result 0
    @(negedge clk); in_clr = 1; @(negedge clk); in_clr = 0;
    for (int kb = 0; kb < 8; kb++) begin
      @(negedge clk); re = 1; rrow = 0; ibit = 3'(kb); pu_en = 1; pu_clr = (kb == 0);
    end
    @(negedge clk); re = 0; pu_en = 0; @(negedge clk);
    check(psum == 0, "cleared inputs give zero (all sense amplifiers gated)");
    // ---------------- bit-serial: column nn in rows nn*8+b, weight e at column e
    wmap = MAP_BIT_SERIAL;
    for (int r = 0; r < R; r++) img[r] = '0;
    for (int nn = 0; nn < 2; nn++)
      for (int e = 0; e < NIN; e++) begin
        w[nn][e] = 8'($urandom);
        for (int b = 0; b < 8; b++) img[nn*8 + b][e] = w[nn][e][b];
      end
    write_image();
    for (int run = 0; run < 4; run++) begin
      for (int e = 0; e < NIN; e++) x[e] = 8'($urandom);
      load_inputs(NIN);
      for (int nn = 0; nn < 2; nn++) begin
        int exp_v; exp_v = 0;
        for (int e = 0; e < NIN; e++) exp_v += sx(x[e]) * sx(w[nn][e]);
        for (int b = 0; b < 8; b++)
          for (int kb = 0; kb < 8; kb++) begin
            @(negedge clk); re = 1; rrow = 4'(nn*8 + b); ibit = 3'(kb); wbit = 3'(b);
            pu_en = 1; pu_clr = (b == 0 && kb == 0);
          end
        @(negedge clk); re = 0; pu_en = 0;
        @(negedge clk);
        check(psum == exp_v, $sformatf("BS run %0d col %0d psum %0d exp %0d", run, nn, psum, exp_v));
      end
    end
    check(!ret_err, "no sensing failure");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
