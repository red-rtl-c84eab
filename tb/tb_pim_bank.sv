// tb_pim_bank: fills the subarrays of a small bank with random rows, then
// runs accumulate sequences of row reads with random input bits in both
// weight maps and compares the bank's partial sum, two cycles after the
// last read, with a sum computed here from the stored rows.
module tb_pim_bank;
  import red_pkg::*;
  localparam int unsigned R = 8, C = 32, S = 2;
  logic clk = 0, rst_n = 0;
  wmap_e wmap = MAP_BIT_SERIAL;
  logic we = 0, re = 0, ref_en = 0, pu_en = 0, pu_clr = 0;
  logic [0:0] wsub = 0;
  logic [2:0] wrow = 0, rrow = 0, ref_row = 0, wbit = 0, ibit = 0;
  logic [C-1:0] wdata = 0, wmask = '1;
  logic [S*C-1:0] sa_in = 0;
  logic signed [OBITS-1:0] psum;
  logic ret_err;
  int checks = 0, failures = 0;
  logic [S*C-1:0] rows [R];

  pim_bank #(.ROWS(R), .COLS(C), .SUBS(S)) dut (
    .clk, .rst_n, .vpd_sel(3'd0), .vref_sel(3'd0), .wmap, .we, .wsub, .wrow, .wdata, .wmask,
    .re, .rrow, .sa_in, .ref_en, .ref_row, .pu_en, .pu_clr, .wbit, .ibit, .psum, .ret_err);
  always #5 clk = ~clk;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic longint term(input wmap_e m, input logic [S*C-1:0] p, input int wb, input int ib);
    longint sum, t; sum = 0;
    if (m == MAP_BIT_SERIAL) begin
      for (int i = 0; i < S*C; i++) sum += p[i];
      t = sum << (wb + ib); if ((wb == 7) != (ib == 7)) t = -t;
    end else begin
      for (int g = 0; g < S*C/8; g++) begin int v; v = int'(p[g*8 +: 8]); if (v > 127) v -= 256; sum += v; end
      t = sum << ib; if (ib == 7) t = -t;
    end
    return t;
  endfunction

  initial begin
    #200000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    longint exp_sum;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int r = 0; r < R; r++) begin
      rows[r] = {$urandom, $urandom};
      for (int s = 0; s < S; s++) begin
        @(negedge clk); we = 1; wsub = 1'(s); wrow = 3'(r); wdata = rows[r][s*C +: C];
      end
    end
    @(negedge clk); we = 0;
    for (int mode = 0; mode < 2; mode++) begin
      wmap = wmap_e'(mode);
      for (int run = 0; run < 10; run++) begin
        exp_sum = 0;
        for (int step = 0; step < 8; step++) begin
          int r;
          @(negedge clk);
          r = $urandom % R;
          re = 1; rrow = 3'(r); pu_en = 1; pu_clr = (step == 0);
          wbit = 3'($urandom); ibit = 3'($urandom); sa_in = {$urandom, $urandom};
          exp_sum += term(wmap, rows[r] & sa_in, int'(wbit), int'(ibit));
        end
        @(negedge clk); re = 0; pu_en = 0; pu_clr = 0;
        @(negedge clk);
        check(psum == OBITS'(exp_sum), $sformatf("mode %0d run %0d psum %0d exp %0d", mode, run, psum, exp_sum));
        check(!ret_err, "no sensing failure");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
