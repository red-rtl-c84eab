// tb_pim_macro_controller: the controller with a small PIM macro and
// unified buffer. For both loop orders and both weight maps, with partial
// edge tiles, it loads random INT8 matrices through the host port, runs
// the GEMM with a given tiling and voltage levels and compares every
// 32-bit output with a reference product computed here. It also checks the
// number of weight-tile loads per loop order, that short retention times
// cause refreshes and refresh stalls while at the real retention times the
// short-lived weight tiles are never refreshed (refresh skipping), that no memory model saw a failed read, and that the macro
// and buffer ladders are switched to the scheduled levels.
module tb_pim_macro_controller;
  import red_pkg::*;
  localparam int unsigned R = 16, C = 32, S = 2, B = 2, NIN = B*S*C;
  localparam int unsigned BW = 2048, RWD = 16, AW = $clog2(BW), BRW = $clog2(BW/RWD);
  logic clk = 0, rst_n = 0, start = 0;
  logic busy, done;
  logic [DIM_W-1:0] dm = 0, dk = 0, dn = 0;
  logic [AW-1:0] ibase = 0, wbase = 0, obase = 0;
  wmap_e wmap = MAP_BIT_SERIAL;
  sched_result_t sched = '0;
  logic [NUM_VPD-1:0][TAB_W-1:0] mret, bret;
  logic host_req = 0, host_wr = 0, host_ready, host_rvalid, host_free_en = 0;
  logic [AW-1:0] host_addr = 0;
  logic [31:0] host_wdata = 0, host_rdata;
  logic [BRW-1:0] host_free_lo = 0, host_free_hi = 0;
  // macro and buffer wiring
  vsel_t m_vpd, m_vref, b_vpd, b_vref;
  logic m_in_clr, m_in_we, m_we, m_re, m_pu_en, m_pu_clr, m_ref_en, m_ret_err;
  logic [$clog2(NIN/4)-1:0] m_in_word;
  logic [31:0] m_in_data;
  logic [0:0] m_wbank, m_wsub;
  logic [3:0] m_wrow, m_rrow, m_ref_row;
  logic [C-1:0] m_wdata, m_wmask;
  logic [2:0] m_ibit, m_wbit;
  logic signed [OBITS-1:0] m_psum;
  logic b_req, b_wr, b_ref_en, b_ret_err;
  logic [AW-1:0] b_addr;
  logic [31:0] b_wdata, b_rdata;
  logic [BRW-1:0] b_ref_row;
  logic [NUM_VPD-1:0] mvs, mrs, bvs, brs;
  logic [31:0] n_stall, n_wload, n_switch, n_mref, n_mskip, n_bref, n_bskip;
  logic err;
  int checks = 0, failures = 0;

  pim_macro_controller #(.ROWS(R), .COLS(C), .SUBS(S), .BANKS(B), .BUF_WORDS(BW), .ROW_WORDS(RWD)) dut (
    .clk, .rst_n, .start, .busy, .done, .dim_m(dm), .dim_k(dk), .dim_n(dn),
    .ibase, .wbase, .obase, .wmap, .sched, .macro_ret_tab(mret), .buf_ret_tab(bret),
    .host_req, .host_wr, .host_addr, .host_wdata, .host_ready, .host_rvalid, .host_rdata,
    .host_free_en, .host_free_lo, .host_free_hi,
    .m_vpd, .m_vref, .m_in_clr, .m_in_we, .m_in_word, .m_in_data, .m_we, .m_wbank, .m_wsub,
    .m_wrow, .m_wdata, .m_wmask, .m_re, .m_rrow, .m_ibit, .m_wbit, .m_pu_en, .m_pu_clr,
    .m_ref_en, .m_ref_row, .m_psum, .m_ret_err,
    .b_vpd, .b_vref, .b_req, .b_wr, .b_addr, .b_wdata, .b_rdata, .b_ref_en, .b_ref_row, .b_ret_err,
    .macro_vpd_sw(mvs), .macro_vref_sw(mrs), .buf_vpd_sw(bvs), .buf_vref_sw(brs),
    .n_stall, .n_wload, .n_switch, .n_macro_ref(n_mref), .n_macro_skip(n_mskip),
    .n_buf_ref(n_bref), .n_buf_skip(n_bskip), .err);

  pim_macro #(.ROWS(R), .COLS(C), .SUBS(S), .BANKS(B)) u_macro (
    .clk, .rst_n, .vpd_sel(m_vpd), .vref_sel(m_vref), .wmap, .in_clr(m_in_clr), .in_we(m_in_we),
    .in_word(m_in_word), .in_data(m_in_data), .we(m_we), .wbank(m_wbank), .wsub(m_wsub),
    .wrow(m_wrow), .wdata(m_wdata), .wmask(m_wmask), .re(m_re), .rrow(m_rrow), .ibit(m_ibit),
    .wbit(m_wbit), .pu_en(m_pu_en), .pu_clr(m_pu_clr), .ref_en(m_ref_en), .ref_row(m_ref_row),
    .psum(m_psum), .ret_err(m_ret_err));

  unified_buffer #(.WORDS(BW), .ROW_WORDS(RWD)) u_buf (
    .clk, .rst_n, .vpd_sel(b_vpd), .vref_sel(b_vref), .req(b_req), .wr(b_wr), .addr(b_addr),
    .wdata(b_wdata), .rdata(b_rdata), .ref_en(b_ref_en), .ref_row(b_ref_row), .ret_err(b_ret_err));

  always #5 clk = ~clk;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic hwrite(input int a, input logic [31:0] d);
    @(negedge clk); host_req = 1; host_wr = 1; host_addr = AW'(a); host_wdata = d;
    while (!host_ready) @(negedge clk);
    @(negedge clk); host_req = 0; host_wr = 0;
  endtask
  task automatic hread(input int a, output logic [31:0] d);
    @(negedge clk); host_req = 1; host_wr = 0; host_addr = AW'(a);
    while (!host_ready) @(negedge clk);
    @(negedge clk); host_req = 0;
    d = host_rdata;
  endtask

  byte xin [];
  byte win [];  // transposed: win[n*K + k]

  task automatic run(input int M, input int K, input int N, input wmap_e wm, input loop_order_e o,
                     input int lm, input int lk, input int ln, input int vp, input int vb,
                     input bit short_ret);
    int ib, wb, ob, ti, tj, tl, exp_wl, cyc;
    logic [31:0] d;
    ib = 0; wb = ((M*K/4 + RWD - 1) / RWD) * RWD; ob = wb + ((N*K/4 + RWD - 1) / RWD) * RWD;
    xin = new[M*K]; win = new[N*K];
    foreach (xin[i]) xin[i] = byte'($urandom);
    foreach (win[i]) win[i] = byte'($urandom);
    for (int a = 0; a < M*K/4; a++) hwrite(ib + a, {xin[4*a+3], xin[4*a+2], xin[4*a+1], xin[4*a]});
    for (int a = 0; a < N*K/4; a++) hwrite(wb + a, {win[4*a+3], win[4*a+2], win[4*a+1], win[4*a]});
    for (int v = 0; v < NUM_VPD; v++) begin
      mret[v] = short_ret ? 32'd120 : default_ret(v);
      bret[v] = short_ret ? 32'd300 : default_ret(v);
    end
    dm = 16'(M); dk = 16'(K); dn = 16'(N); wmap = wm;
    ibase = AW'(ib); wbase = AW'(wb); obase = AW'(ob);
    sched.order = o; sched.tile.lm = 5'(lm); sched.tile.lk = 5'(lk); sched.tile.ln = 5'(ln);
    sched.macro_vpd = 3'(vp); sched.macro_vref = 3'(vp); sched.buf_vpd = 3'(vb); sched.buf_vref = 3'(vb);
    begin
      int s0, wl0, r0, b0;
      s0 = n_stall; wl0 = n_wload; r0 = n_mref; b0 = n_bref;
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      check(mvs == (5'd1 << vp) && bvs == (5'd1 << vb) && mrs == mvs && brs == bvs, "ladders switched");
      cyc = 0;
      while (!done && cyc < 3000000) begin @(posedge clk); cyc++; end
      ti = (M + (1 << lm) - 1) >> lm; tj = (K + (1 << lk) - 1) >> lk; tl = (N + (1 << ln) - 1) >> ln;
      exp_wl = (o == ORDER_LJI || tj == 1) ? tj * tl : ti * tj * tl;
      check(int'(n_wload) - wl0 == exp_wl, $sformatf("weight loads %0d exp %0d", int'(n_wload) - wl0, exp_wl));
      if (short_ret) begin
        check(int'(n_mref) > r0 && int'(n_bref) > b0, "refresh at short retention");
        check(int'(n_stall) > s0, "refresh stalls");
      end else begin
        check(int'(n_mref) == r0, "no macro refresh when weight tiles die before retention");
      end
    end
    @(negedge clk);
    check(!err, "no failed read in macro or buffer");
    for (int r = 0; r < M; r++)
      for (int n = 0; n < N; n++) begin
        int e; e = 0;
        for (int k = 0; k < K; k++) e += int'(xin[r*K + k]) * int'(win[n*K + k]);
        hread(ob + r*N + n, d);
        check(int'(d) == e, $sformatf("O[%0d][%0d]=%0d exp %0d (map %0d order %0d)", r, n, int'(d), e, wm, o));
      end
    // free everything so the next case starts clean
    @(negedge clk); host_free_en = 1; host_free_lo = 0; host_free_hi = '1;
    @(negedge clk); host_free_en = 0;
  endtask

  // Refresh skipping: when a new weight tile is loaded, the rows of the
  // previous one must already be dead (no live macro row left).
  // (controller state codes 3..5 are S_WL_RD, S_WL_WAIT, S_WL_WR)
  logic wl_prev = 1'b0;
  int   st;
  always @(posedge clk) begin
    st = int'(dut.state);
    if (rst_n && st == 3 && !wl_prev)
      check(dut.m_live == '0, "macro rows freed before a weight-tile load");
    wl_prev <= rst_n && st >= 3 && st <= 5;
  end

  initial begin
    #1000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int v = 0; v < NUM_VPD; v++) begin mret[v] = 32'd1000000; bret[v] = 32'd1000000; end
    // bit-parallel: k <= 16, n <= 16
    run(6, 40, 5, MAP_BIT_PARALLEL, ORDER_LJI, 2, 4, 2, 2, 1, 1'b1);
    run(6, 40, 5, MAP_BIT_PARALLEL, ORDER_LIJ, 2, 4, 2, 3, 0, 1'b0);
    // bit-serial: k <= 128, n <= 2
    run(5, 44, 3, MAP_BIT_SERIAL, ORDER_LJI, 1, 5, 1, 4, 4, 1'b1);
    run(5, 44, 3, MAP_BIT_SERIAL, ORDER_LIJ, 2, 4, 0, 1, 2, 1'b0);
    check(n_switch >= 3, "voltage levels switched between runs");
    $display("simulated time %0t", $time);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
