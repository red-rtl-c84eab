// tb_energy_optimizer: streams random candidates and checks that the
// register always holds the first candidate with the lowest energy, with
// VREF levels equal to the VPD levels, that clr empties it, and the update
// count.
module tb_energy_optimizer;
  import red_pkg::*;
  logic clk = 0, rst_n = 0, clr = 0, cv = 0;
  loop_order_e co = ORDER_LJI;
  tile_t ct = '0;
  vsel_t cvp = 0, cvb = 0;
  logic [EN_W-1:0] ce = 0;
  sched_result_t best;
  logic best_valid;
  logic [31:0] n_update;
  int checks = 0, failures = 0;

  energy_optimizer dut (.clk, .rst_n, .clr, .cand_valid(cv), .cand_order(co), .cand_tile(ct),
    .cand_vp(cvp), .cand_vb(cvb), .cand_e(ce), .best, .best_valid, .n_update);
  always #5 clk = ~clk;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #1000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int run = 0; run < 5; run++) begin
      longint be; int ups; sched_result_t exp_b;
      @(negedge clk); clr = 1; @(negedge clk); clr = 0;
      check(!best_valid && n_update == 0, "cleared");
      be = -1; ups = 0; exp_b = '0;
      for (int t = 0; t < 200; t++) begin
        @(negedge clk);
        cv = ($urandom % 4) != 0;
        co = loop_order_e'($urandom % 2); ct = tile_t'($urandom);
        cvp = 3'($urandom % 5); cvb = 3'($urandom % 5);
        ce = EN_W'($urandom % 5000);
        if (cv && (be < 0 || longint'(ce) < be)) begin
          be = longint'(ce); ups++;
          exp_b.order = co; exp_b.tile = ct; exp_b.macro_vpd = cvp; exp_b.macro_vref = cvp;
          exp_b.buf_vpd = cvb; exp_b.buf_vref = cvb; exp_b.min_e = ce;
        end
        @(posedge clk); #1;
        if (be >= 0) check(best_valid && best == exp_b, "best register");
      end
      check(n_update == 32'(ups), "update count");
      cv = 0;
    end
    // a tie keeps the scheme found first
    @(negedge clk); clr = 1; @(negedge clk); clr = 0;
    cv = 1; co = ORDER_LJI; ct = '0; cvp = 3'd1; cvb = 3'd2; ce = EN_W'(777);
    @(negedge clk); co = ORDER_LIJ; cvp = 3'd3; cvb = 3'd4;
    @(negedge clk); cv = 0;
    check(best.order == ORDER_LJI && best.macro_vpd == 3'd1 && best.buf_vpd == 3'd2 && n_update == 1,
          "equal energy keeps the first scheme");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
