// Shared stimulus for the red_top testbenches: host tasks that write
// matrices into the unified buffer, program the spec table, run one GEMM
// (scheduling + execution) and compare every output with a reference
// product. Expects in scope: clk, the red_top port signals, AW, check().

  byte xin [];
  byte win [];   // transposed weights: win[n*K + k]

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

  task automatic cfg(input int lvl, input int fld, input logic [31:0] d);
    @(negedge clk); cfg_we = 1; cfg_lvl = 3'(lvl); cfg_field = 3'(fld); cfg_wdata = d;
    @(negedge clk); cfg_we = 0;
  endtask

  // Runs O = I * W for random INT8 data; returns the cycles from start to done.
  task automatic gemm(input int M, input int K, input int N, input wmap_e wm, output int cycles);
    int ib, wb, ob;
    logic [31:0] d;
    ib = 0; wb = ((M*K/4 + 15) / 16) * 16; ob = wb + ((N*K/4 + 15) / 16) * 16;
    xin = new[M*K]; win = new[N*K];
    foreach (xin[i]) xin[i] = byte'($urandom);
    foreach (win[i]) win[i] = byte'($urandom);
    for (int a = 0; a < M*K/4; a++) hwrite(ib + a, {xin[4*a+3], xin[4*a+2], xin[4*a+1], xin[4*a]});
    for (int a = 0; a < N*K/4; a++) hwrite(wb + a, {win[4*a+3], win[4*a+2], win[4*a+1], win[4*a]});
    @(negedge clk);
    start = 1; dim_m = 16'(M); dim_k = 16'(K); dim_n = 16'(N); wmap = wm;
    ibase = AW'(ib); wbase = AW'(wb); obase = AW'(ob);
    @(negedge clk); start = 0;
    cycles = 0;
    while (!done && cycles < 50000000) begin @(posedge clk); cycles++; end
    check(done, "GEMM finished");
    @(negedge clk);
    check(!err, "no failed eDRAM read");
    for (int r = 0; r < M; r++)
      for (int n = 0; n < N; n++) begin
        int e; e = 0;
        for (int k = 0; k < K; k++) e += int'(xin[r*K + k]) * int'(win[n*K + k]);
        hread(ob + r*N + n, d);
        check(int'(d) == e, $sformatf("O[%0d][%0d]=%0d exp %0d", r, n, int'(d), e));
      end
    $display("GEMM %0dx%0dx%0d map %0d: order %0d tile m=%0d k=%0d n=%0d VPD macro %0d buffer %0d, %0d cycles",
             M, K, N, wm, sched_result.order, 1 << sched_result.tile.lm, 1 << sched_result.tile.lk,
             1 << sched_result.tile.ln, sched_result.macro_vpd, sched_result.buf_vpd, cycles);
    @(negedge clk); host_free_en = 1; host_free_lo = '0; host_free_hi = '1;
    @(negedge clk); host_free_en = 0;
  endtask
