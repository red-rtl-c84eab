// tb_voltage_switch: applies random level settings and checks that each
// ladder gets exactly the one-hot switch enable of its level one cycle
// after apply, that levels hold without apply, that out-of-range codes
// fall back to level 0, and that n_switch counts the level changes.
module tb_voltage_switch;
  import red_pkg::*;
  logic clk = 0, rst_n = 0, apply = 0;
  vsel_t mvi = 0, mri = 0, bvi = 0, bri = 0, mv, mr, bv, br;
  logic [NUM_VPD-1:0] mvs, mrs, bvs, brs;
  logic [31:0] n_switch;
  int checks = 0, failures = 0, exp_sw = 0;

  voltage_switch dut (.clk, .rst_n, .apply, .macro_vpd_in(mvi), .macro_vref_in(mri),
    .buf_vpd_in(bvi), .buf_vref_in(bri), .macro_vpd(mv), .macro_vref(mr), .buf_vpd(bv),
    .buf_vref(br), .macro_vpd_sw(mvs), .macro_vref_sw(mrs), .buf_vpd_sw(bvs),
    .buf_vref_sw(brs), .n_switch);
  always #5 clk = ~clk;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #100000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int pm, pb;
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk);
    check(mvs == 5'b00001 && bvs == 5'b00001, "reset selects level 0");
    pm = 0; pb = 0;
    for (int t = 0; t < 40; t++) begin
      int a, b, em, eb;
      a = $urandom % 7; b = $urandom % 7;
      @(negedge clk); apply = 1; mvi = 3'(a); mri = 3'(a); bvi = 3'(b); bri = 3'(b);
      em = (a < 5) ? a : 0; eb = (b < 5) ? b : 0;
      if (em != pm || eb != pb) exp_sw++;
      pm = em; pb = eb;
      @(negedge clk); apply = 0; mvi = 3'(($urandom % 5)); bvi = 3'(($urandom % 5));
      check(mvs == (5'd1 << em) && mrs == (5'd1 << em), $sformatf("macro ladders level %0d", em));
      check(bvs == (5'd1 << eb) && brs == (5'd1 << eb), $sformatf("buffer ladders level %0d", eb));
      check(mv == 3'(em) && bv == 3'(eb), "level codes");
      @(negedge clk);
      check(mvs == (5'd1 << em) && bvs == (5'd1 << eb), "held without apply");
    end
    check(n_switch == 32'(exp_sw), $sformatf("n_switch %0d exp %0d", n_switch, exp_sw));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
