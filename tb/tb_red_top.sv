// tb_red_top: end-to-end test of the RED template at a reduced size (two
// banks of two 16 x 32 subarrays, 8 KB buffer). Several GEMMs, in both
// weight maps and with partial tiles, go through scheduling and execution;
// every output is compared with a reference product. It counts how often
// each mechanism happened and fails if one never did: scheduler search,
// VPD/VREF switching, weight-tile reloads, refresh of macro and buffer,
// stalls for refresh, refresh skipping of dead rows, and sense-amplifier
// power gating (reads where input bits of zero gate sense amplifiers).
// One run programs short retention times into the spec table, which moves
// the scheduler's choice and forces refresh.
module tb_red_top;
  import red_pkg::*;
  localparam int unsigned R = 16, C = 32, S = 2, B = 2, BW = 2048, RWD = 16;
  localparam int unsigned AW = $clog2(BW), BRW = $clog2(BW/RWD);
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
  longint gated_reads = 0;

  red_top #(.ROWS(R), .COLS(C), .SUBS(S), .BANKS(B), .BUF_WORDS(BW), .ROW_WORDS(RWD)) dut (.*);
  always #5 clk = ~clk;

  // SA power gating: a compute read during which some input bits are 0
  always @(posedge clk)
    if (dut.m_re && (dut.u_macro.sa_in != '1)) gated_reads++;

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
    gemm(8, 64, 6, MAP_BIT_PARALLEL, cyc);
    check(n_eval > 0, "scheduler searched tiling schemes");
    gemm(6, 100, 3, MAP_BIT_SERIAL, cyc);
    // short retention at every level except level 0: refresh everywhere
    for (int v = 0; v < NUM_VPD; v++) begin
      cfg(v, 2, (v == 0) ? 32'd400 : 32'd150);   // macro retention
      cfg(v, 5, (v == 0) ? 32'd600 : 32'd400);   // buffer retention
      cfg(v, 1, (v == 0) ? 32'd100 : 32'd50000000); // macro refresh energy
      cfg(v, 4, (v == 0) ? 32'd100 : 32'd50000000); // buffer refresh energy
    end
    cfg(0, 6, 32'd120);
    gemm(12, 48, 10, MAP_BIT_PARALLEL, cyc);
    gemm(4, 132, 2, MAP_BIT_SERIAL, cyc);
    $display("mechanisms: eval=%0d switch=%0d wload=%0d macro_ref=%0d buf_ref=%0d stall=%0d macro_skip=%0d buf_skip=%0d gated=%0d",
             n_eval, n_switch, n_wload, n_macro_ref, n_buf_ref, n_stall, n_macro_skip, n_buf_skip, gated_reads);
    check(n_switch > 1, "VPD/VREF level switched between runs");
    check(n_wload > 4, "weight tiles reloaded");
    check(n_macro_ref > 0, "macro refresh");
    check(n_buf_ref > 0, "buffer refresh");
    check(n_stall > 0, "stall for refresh");
    check(n_macro_skip > 0 && n_buf_skip > 0, "refresh skipping of dead rows");
    check(gated_reads > 0, "sense-amplifier power gating");
    $display("simulated time %0t", $time);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
