// tb_red_top_full: one complete operation of the RED template at its
// default size (four banks of two 32 x 512 subarrays = 16 KB macro, 60 KB
// buffer, the sizes of the paper's evaluation), with the default spec table.
// Two GEMMs are loaded through the host port, scheduled by the on-chip
// retention-aware scheduler and executed: 4 x 768 x 6 with bit-parallel
// weights (K is split into a full 512 tile and a partial one) and
// 2 x 1024 x 3 with bit-serial weights. Every output is compared with a
// reference product computed here, and no memory model may report a failed
// read. The GEMM shapes and the checks are this testbench's own choice.
// Timing: about 110k cycles of 10 ns; the watchdog ends the run after 1M.
module tb_red_top_full;
  import red_pkg::*;
  localparam int unsigned AW = $clog2(15360), BRW = $clog2(960);
  logic clk = 0, rst_n = 0;
  logic cfg_we = 0;
  vsel_t cfg_lvl = 0;
  logic [2:0] cfg_field = 0;
  logic [TAB_W-1:0] cfg_wdata = 0, cfg_rdata;
  logic start = 0;
  logic [DIM_W-1:0] dim_m = 0, dim_k = 0, dim_n = 0;
  wmap_e wmap = MAP_BIT_SERIAL;
  logic [AW-1:0] ibase = 0, wbase = 0, obase = 0;
  logic sched_busy, run_busy, done;
  sched_result_t sched_result;
  logic [31:0] n_eval;
  logic host_req = 0, host_wr = 0, host_ready, host_rvalid, host_free_en = 0;
  logic [AW-1:0] host_addr = 0;
  logic [31:0] host_wdata = 0, host_rdata;
  logic [BRW-1:0] host_free_lo = 0, host_free_hi = 0;
  logic [NUM_VPD-1:0] macro_vpd_sw, macro_vref_sw, buf_vpd_sw, buf_vref_sw;
  logic [31:0] n_stall, n_wload, n_switch, n_macro_ref, n_macro_skip, n_buf_ref, n_buf_skip;
  logic err;
  int checks = 0, failures = 0;

  red_top dut (.*);
  always #5 clk = ~clk;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  `include "red_top_harness.svh"

  initial begin
    #10000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int cyc;
    repeat (2) @(negedge clk); rst_n = 1;
    gemm(4, 768, 6, MAP_BIT_PARALLEL, cyc);
    gemm(2, 1024, 3, MAP_BIT_SERIAL, cyc);
    check(n_eval > 0 && n_wload > 0, "scheduled and executed");
    $display("simulated time %0t", $time);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
