// tb_address_controller: walks several GEMM shapes (with partial edge
// tiles) in both loop orders and compares every tile's indices, extents,
// w_new/first_k flags and buffer base addresses with a loop nest written
// here; also checks the tile count and that valid drops after the last.
module tb_address_controller;
  import red_pkg::*;
  localparam int unsigned AW = 14;
  logic clk = 0, rst_n = 0, start = 0, next = 0;
  loop_order_e order = ORDER_LJI;
  tile_t tile = '0;
  logic [DIM_W-1:0] dm = 0, dk = 0, dn = 0;
  logic [AW-1:0] ib = 0, wb = 0, ob = 0;
  logic valid, last, w_new, first_k;
  logic [DIM_W-1:0] row0, k0, n0, m_eff, k_eff, n_eff;
  logic [AW-1:0] i_addr, w_addr, o_addr;
  int checks = 0, failures = 0;

  address_controller #(.AW(AW)) dut (.clk, .rst_n, .start, .next, .order, .tile,
    .dim_m(dm), .dim_k(dk), .dim_n(dn), .ibase(ib), .wbase(wb), .obase(ob),
    .valid, .last, .w_new, .first_k, .row0, .k0, .n0, .m_eff, .k_eff, .n_eff,
    .i_addr, .w_addr, .o_addr);
  always #5 clk = ~clk;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic int mn(input int a, input int b); return a < b ? a : b; endfunction

  task automatic run(input int M, input int K, input int N, input int lm, input int lk, input int ln,
                     input loop_order_e o);
    int nti, ntj, ntl, cnt, pj, pl;
    int m, k, n;
    m = 1 << lm; k = 1 << lk; n = 1 << ln;
    nti = (M + m - 1) / m; ntj = (K + k - 1) / k; ntl = (N + n - 1) / n;
    @(negedge clk);
    start = 1; order = o; tile.lm = 5'(lm); tile.lk = 5'(lk); tile.ln = 5'(ln);
    dm = 16'(M); dk = 16'(K); dn = 16'(N); ib = 14'd0; wb = 14'd4096; ob = 14'd8192;
    @(negedge clk); start = 0;
    cnt = 0; pj = -1; pl = -1;
    for (int a = 0; a < ntl; a++)
      for (int b = 0; b < (o == ORDER_LJI ? ntj : nti); b++)
        for (int c = 0; c < (o == ORDER_LJI ? nti : ntj); c++) begin
          int i, j, l;
          l = a; i = (o == ORDER_LJI) ? c : b; j = (o == ORDER_LJI) ? b : c;
          check(valid, "valid");
          check(row0 == 16'(i*m) && k0 == 16'(j*k) && n0 == 16'(l*n), $sformatf("tile (%0d,%0d,%0d)", i, j, l));
          check(m_eff == 16'(mn(m, M - i*m)) && k_eff == 16'(mn(k, K - j*k)) && n_eff == 16'(mn(n, N - l*n)), "extents");
          check(w_new == (j != pj || l != pl), "w_new");
          check(first_k == (j == 0), "first_k");
          check(i_addr == 14'((i*m*K + j*k) / 4) && w_addr == 14'(4096 + (l*n*K + j*k) / 4)
                && o_addr == 14'(8192 + i*m*N + l*n), "buffer addresses");
          check(last == (cnt == nti*ntj*ntl - 1), "last");
          pj = j; pl = l; cnt++;
          next = 1; @(negedge clk); next = 0;
        end
    check(!valid, "valid drops after the last tile");
  endtask

  initial begin
    #1000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    run(16, 32, 8, 2, 3, 1, ORDER_LJI);
    run(16, 32, 8, 2, 3, 1, ORDER_LIJ);
    run(12, 40, 6, 2, 4, 2, ORDER_LJI);   // partial tiles
    run(12, 40, 6, 2, 4, 2, ORDER_LIJ);
    run(8, 16, 4, 3, 4, 2, ORDER_LIJ);    // one tile
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
