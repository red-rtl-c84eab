// tb_lifetime_estimator: random GEMM shapes, tile shapes, loop orders and
// weight maps; compares the tile lifetimes with the formulas of Fig. 6 of
// the RED paper (in cycles) and the operation counts with the execution
// of the controller, both worked out here with 64-bit integers.
module tb_lifetime_estimator;
  import red_pkg::*;
  loop_order_e order;
  tile_t tile;
  wmap_e wmap;
  logic [DIM_W-1:0] dm, dk, dn;
  logic [CYC_W-1:0] t_tile, lt_i, lt_w, lt_o, p_n, b_n;
  int checks = 0, failures = 0;

  lifetime_estimator dut (.order, .tile, .wmap, .dim_m(dm), .dim_k(dk), .dim_n(dn),
    .t_tile, .lt_i, .lt_w, .lt_o, .p_n, .b_n);

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #1000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int t = 0; t < 300; t++) begin
      longint M, K, N, m, k, n, ti, tj, tl, T, tiles, wl, e_li, e_lw, e_lo, e_bn;
      M = 1 + $urandom % 1024; K = 4 * (1 + $urandom % 256); N = 1 + $urandom % 1024;
      order = loop_order_e'($urandom % 2); wmap = wmap_e'($urandom % 2);
      tile.lm = 5'($urandom % 8); tile.lk = 5'(2 + $urandom % 8); tile.ln = 5'($urandom % 6);
      dm = 16'(M); dk = 16'(K); dn = 16'(N);
      #1;
      m = 1 << tile.lm; k = 1 << tile.lk; n = 1 << tile.ln;
      ti = (M + m - 1) / m; tj = (K + k - 1) / k; tl = (N + n - 1) / n;
      T = m * n * 8 * (wmap == MAP_BIT_SERIAL ? 8 : 1);
      tiles = ti * tj * tl;
      e_li = ti * tj * tl * T;
      e_lw = (order == ORDER_LJI) ? ti * T : ti * tl * T;
      e_lo = (order == ORDER_LJI) ? ti * T : T;
      wl = (order == ORDER_LJI || tj == 1) ? tj * tl : tiles;
      e_bn = tiles * m * (k / 4 + 2 * n) + wl * (k * n / 4);
      check(t_tile == CYC_W'(T), "T");
      check(lt_i == CYC_W'(e_li), "input lifetime");
      check(lt_w == CYC_W'(e_lw), "weight lifetime");
      check(lt_o == CYC_W'(e_lo), "output lifetime");
      check(p_n == CYC_W'(tiles * T), "macro operations");
      check(b_n == CYC_W'(e_bn), "buffer operations");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
