// tb_retention_aware_scheduler: runs the scheduler on several GEMM shapes,
// weight maps and spec tables for a small macro, and compares its choice
// (loop order, tile shape, macro and buffer levels, minimum energy) and
// the number of tiling schemes evaluated with an exhaustive search written
// here from Fig. 6 and Eq. 1-3. One case makes retention so long that no
// refresh is ever needed, one so short that refresh dominates, so that
// different VPD levels win.
module tb_retention_aware_scheduler;
  import red_pkg::*;
  localparam int unsigned R = 16, C = 32, S = 2, B = 2, NIN = B*S*C;
  logic clk = 0, rst_n = 0, start = 0;
  logic [DIM_W-1:0] dm, dk, dn;
  wmap_e wmap;
  spec_entry_t [NUM_VPD-1:0] spec;
  logic [TAB_W-1:0] e_pu;
  logic busy, done;
  sched_result_t result;
  logic [31:0] n_eval;
  int checks = 0, failures = 0;
  int vp_seen [NUM_VPD];

  retention_aware_scheduler #(.ROWS(R), .COLS(C), .SUBS(S), .BANKS(B)) dut (
    .clk, .rst_n, .start, .dim_m(dm), .dim_k(dk), .dim_n(dn), .wmap, .spec, .e_pu,
    .busy, .done, .result, .n_eval);
  always #5 clk = ~clk;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic int cl2(input longint v);
    int r; r = 0; while ((longint'(1) << r) < v) r++; return r;
  endfunction

  task automatic run(input int M, input int K, input int N, input wmap_e wm);
    longint best_e; int best_o, best_lm, best_lk, best_ln, best_vp, best_vb, cnt;
    int kcap, ncap, cyc;
    kcap = (wm == MAP_BIT_SERIAL) ? cl2(NIN) : cl2(NIN/8);
    ncap = (wm == MAP_BIT_SERIAL) ? cl2(R/8) : cl2(R);
    best_e = -1; cnt = 0;
    for (int o = 0; o < 2; o++)
      for (int lm = 0; lm <= cl2(M); lm++)
        for (int lk = 2; lk <= ((cl2(K) < kcap) ? cl2(K) : kcap); lk++)
          for (int ln = 0; ln <= ((cl2(N) < ncap) ? cl2(N) : ncap); ln++) begin
            longint m, k, n, ti, tj, tl, T, tiles, lti, ltw, lto, pn, bn, wl;
            m = 1 << lm; k = 1 << lk; n = 1 << ln;
            ti = (M + m - 1) / m; tj = (K + k - 1) / k; tl = (N + n - 1) / n;
            T = m * n * 8 * ((wm == MAP_BIT_SERIAL) ? 8 : 1);
            tiles = ti * tj * tl;
            lti = tiles * T;
            ltw = (o == 0) ? ti * T : ti * tl * T;
            lto = (o == 0) ? ti * T : T;
            wl = (o == 0 || tj == 1) ? tj * tl : tiles;
            pn = tiles * T; bn = tiles * m * (k / 4 + 2 * n) + wl * (k * n / 4);
            cnt++;
            for (int vp = 0; vp < NUM_VPD; vp++)
              for (int vb = 0; vb < NUM_VPD; vb++) begin
                longint e;
                e = (longint'(spec[vp].p_acc) + e_pu) * pn + longint'(spec[vp].p_ref) * (ltw / spec[vp].p_ret)
                  + longint'(spec[vb].b_acc) * bn
                  + longint'(spec[vb].b_ref) * (lti / spec[vb].b_ret + lto / spec[vb].b_ret);
                if (best_e < 0 || e < best_e) begin
                  best_e = e; best_o = o; best_lm = lm; best_lk = lk; best_ln = ln; best_vp = vp; best_vb = vb;
                end
              end
          end
    dm = 16'(M); dk = 16'(K); dn = 16'(N); wmap = wm;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    cyc = 0;
    while (!done && cyc < 2000000) begin @(posedge clk); cyc++; end
    #1;
    check(n_eval == 32'(cnt), $sformatf("schemes evaluated %0d exp %0d", n_eval, cnt));
    check(result.min_e == EN_W'(best_e), $sformatf("min E %0d exp %0d", result.min_e, best_e));
    check(result.order == loop_order_e'(best_o) && int'(result.tile.lm) == best_lm &&
          int'(result.tile.lk) == best_lk && int'(result.tile.ln) == best_ln, "tiling scheme");
    check(int'(result.macro_vpd) == best_vp && int'(result.buf_vpd) == best_vb &&
          result.macro_vref == result.macro_vpd && result.buf_vref == result.buf_vpd, "levels");
    check(cyc <= cnt * (NUM_VPD*(CYC_W+3) + NUM_VPD*NUM_VPD + 6) + 10, $sformatf("search time %0d", cyc));
    vp_seen[result.macro_vpd]++;
    $display("M=%0d K=%0d N=%0d map=%0d -> order %0d m=%0d k=%0d n=%0d vpd %0d/%0d E=%0d",
             M, K, N, wm, result.order, 1 << result.tile.lm, 1 << result.tile.lk,
             1 << result.tile.ln, result.macro_vpd, result.buf_vpd, result.min_e);
  endtask

  initial begin
    #20000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int levels;
    repeat (2) @(negedge clk); rst_n = 1;
    e_pu = 32'd120;
    for (int v = 0; v < NUM_VPD; v++) spec[v] = default_spec(v);
    run(16, 64, 8, MAP_BIT_SERIAL);
    run(16, 64, 8, MAP_BIT_PARALLEL);
    run(20, 48, 12, MAP_BIT_PARALLEL);
    // very short retention at high VPD with costly refresh: low VPD should win
    for (int v = 0; v < NUM_VPD; v++) begin
      spec[v].p_ret = (v == 0) ? 32'd1000000 : 32'd50;
      spec[v].p_ref = 32'd1000000;
    end
    run(32, 64, 16, MAP_BIT_PARALLEL);
    // random tables
    for (int t = 0; t < 3; t++) begin
      for (int v = 0; v < NUM_VPD; v++) begin
        spec[v].p_acc = 32'($urandom % 1000); spec[v].p_ref = 32'($urandom % 200000);
        spec[v].p_ret = 32'(100 + $urandom % 20000);
        spec[v].b_acc = 32'($urandom % 100); spec[v].b_ref = 32'($urandom % 200000);
        spec[v].b_ret = 32'(100 + $urandom % 20000);
      end
      run(8 + $urandom % 30, 4 * (1 + $urandom % 30), 1 + $urandom % 20, wmap_e'(t % 2));
    end
    levels = 0;
    foreach (vp_seen[v]) if (vp_seen[v] > 0) levels++;
    check(levels >= 2, "more than one macro VPD level chosen across the cases");
    $display("simulated time %0t", $time);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
