// tb_refresh_controller: marks a few rows live, checks that a burst
// starts after `interval` cycles, refreshes exactly the live rows (one
// ref_en cycle each, in row order), skips the dead ones, stays quiet while
// no row is live, stops refreshing rows that were freed, and starts a
// burst at once on kick. Interval and row count are this test's choice.
module tb_refresh_controller;
  import red_pkg::*;
  localparam int unsigned R = 16;
  logic clk = 0, rst_n = 0;
  logic [TAB_W-1:0] interval = 50;
  logic mark_en = 0, free_en = 0, kick = 0;
  logic [3:0] mark_row = 0, free_lo = 0, free_hi = 0, ref_row;
  logic ref_en, busy;
  logic [31:0] n_refresh, n_skip;
  logic [R-1:0] live;
  int checks = 0, failures = 0;
  int cyc = 0;
  int seen [$];
  int first_ref = -1;

  refresh_controller #(.ROWS(R)) dut (.clk, .rst_n, .interval, .kick, .mark_en, .mark_row,
    .free_en, .free_lo, .free_hi, .ref_en, .ref_row, .busy, .n_refresh, .n_skip, .live);
  always #5 clk = ~clk;
  always @(posedge clk) begin
    cyc++;
    if (ref_en) begin seen.push_back(int'(ref_row)); if (first_ref < 0) first_ref = cyc; end
  end

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #100000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int t0;
    repeat (2) @(negedge clk); rst_n = 1;
    // nothing live: no refresh for a long time
    repeat (200) @(negedge clk);
    check(seen.size() == 0 && n_refresh == 0, "no refresh while nothing is live");
    // mark rows 1, 4, 9
    @(negedge clk); mark_en = 1; mark_row = 4'd1; t0 = cyc;
    @(negedge clk); mark_row = 4'd4;
    @(negedge clk); mark_row = 4'd9;
    @(negedge clk); mark_en = 0;
    check(live == 16'b0000_0010_0001_0010, "live mask");
    repeat (90) @(negedge clk);
    check(seen.size() == 3, $sformatf("three refreshes in first burst (%0d)", seen.size()));
    if (seen.size() == 3) check(seen[0] == 1 && seen[1] == 4 && seen[2] == 9, "rows in order");
    check(first_ref - t0 >= 50 && first_ref - t0 <= 50 + 8, $sformatf("burst after interval (%0d)", first_ref - t0));
    check(n_skip == R - 3, $sformatf("dead rows skipped (%0d)", n_skip));
    // free rows 0..5: only row 9 remains
    @(negedge clk); free_en = 1; free_lo = 0; free_hi = 5;
    @(negedge clk); free_en = 0;
    seen.delete();
    repeat (140) @(negedge clk);
    check(seen.size() >= 1, "still refreshing live row 9");
    foreach (seen[i]) check(seen[i] == 9, "only row 9 refreshed after free");
    // kick: right after a burst (timer far from interval) a kick must start
    // a new burst at once
    @(posedge busy); @(negedge busy); @(negedge clk);
    seen.delete(); t0 = cyc; first_ref = -1;
    kick = 1; @(negedge clk); kick = 0;
    repeat (R + 4) @(negedge clk);
    check(seen.size() == 1 && seen[0] == 9, "kick refreshes the live row");
    check(first_ref >= 0 && first_ref - t0 <= R + 3, $sformatf("kick burst starts at once (%0d)", first_ref - t0));
    // free all: quiet again
    @(negedge clk); free_en = 1; free_lo = 0; free_hi = 15;
    @(negedge clk); free_en = 0;
    repeat (20) @(negedge clk);
    seen.delete();
    repeat (200) @(negedge clk);
    check(seen.size() == 0, "refresh skipped after all data freed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
