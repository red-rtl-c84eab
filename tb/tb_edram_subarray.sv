// tb_edram_subarray: checks the behavioural eDRAM subarray: masked writes,
// reads gated by the sense-amplifier input bits (1-bit multiply), one-cycle
// read latency, refresh, loss of data past the retention time of the
// selected VPD level and sensing failure when VREF is not paired with VPD.
module tb_edram_subarray;
  import red_pkg::*;
  localparam int unsigned R = 8, C = 16;
  logic clk = 0, rst_n = 0;
  vsel_t vpd = 0, vref = 0;
  logic we = 0, re = 0, ref_en = 0;
  logic [2:0] wrow = 0, rrow = 0, ref_row = 0;
  logic [C-1:0] wdata = 0, wmask = 0, sa_in = 0, rdata;
  logic ret_err;
  int checks = 0, failures = 0;

  edram_subarray #(.ROWS(R), .COLS(C),
    .RET_CYCLES({32'd40, 32'd60, 32'd80, 32'd100, 32'd200})) dut (
    .clk, .rst_n, .vpd_sel(vpd), .vref_sel(vref), .we, .wrow, .wdata, .wmask,
    .re, .rrow, .sa_in, .ref_en, .ref_row, .rdata, .ret_err);

  always #5 clk = ~clk;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic wr(input int r, input logic [C-1:0] d, input logic [C-1:0] m);
    @(negedge clk); we = 1; wrow = 3'(r); wdata = d; wmask = m;
    @(negedge clk); we = 0;
  endtask

  task automatic rd(input int r, input logic [C-1:0] in, output logic [C-1:0] q, output logic e);
    @(negedge clk); re = 1; rrow = 3'(r); sa_in = in;
    @(negedge clk); re = 0; q = rdata; e = ret_err;
  endtask

  initial begin
    #20000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [C-1:0] q; logic e;
    logic [C-1:0] model [R];
    repeat (2) @(negedge clk); rst_n = 1;
    for (int r = 0; r < R; r++) model[r] = '0;
    // full and masked writes, random gated reads
    for (int r = 0; r < R; r++) begin
      model[r] = C'($urandom); wr(r, model[r], '1);
    end
    begin
      logic [C-1:0] d, m;
      d = C'($urandom); m = 16'h0FF0;
      wr(3, d, m); model[3] = (model[3] & ~m) | (d & m);
    end
    for (int t = 0; t < 16; t++) begin
      int r; logic [C-1:0] in;
      r = t % R; in = C'($urandom);
      rd(r, in, q, e);
      check(q == (model[r] & in) && !e, $sformatf("gated read row %0d", r));
    end
    // read latency: data present exactly one cycle after re
    @(negedge clk); re = 1; rrow = 3'd5; sa_in = '1;
    @(posedge clk); #1; re = 0;
    check(rdata == model[5], "one-cycle read latency");
    // VREF not paired with VPD: sensing fails
    vref = 3'd2;
    rd(1, '1, q, e); check(e && q == '0, "VREF mismatch fails");
    vref = 3'd0;
    // level 4 retention = 40 cycles: refresh row 2 keeps it, row 6 expires
    vpd = 3'd4; vref = 3'd4;
    wr(2, model[2], '1); wr(6, model[6], '1);
    repeat (25) begin
      @(negedge clk); ref_en = 1; ref_row = 3'd2;
      @(negedge clk); ref_en = 0;
    end
    rd(2, '1, q, e); check(q == model[2] && !e, "refreshed row survives");
    rd(6, '1, q, e); check(q == '0 && e, "unrefreshed row expires at short retention");
    // at level 0 (200 cycles) the same age is still fine
    vpd = 3'd0; vref = 3'd0;
    wr(6, model[6], '1);
    repeat (60) @(negedge clk);
    rd(6, '1, q, e); check(q == model[6] && !e, "long retention at level 0");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
