// tb_unified_buffer: random writes and reads against a model array,
// one-cycle read latency, refresh priority over an access, data loss past
// the retention time of the selected level and VREF/VPD pairing.
module tb_unified_buffer;
  import red_pkg::*;
  localparam int unsigned WORDS = 256, RWD = 16;
  logic clk = 0, rst_n = 0;
  vsel_t vpd = 0, vref = 0;
  logic req = 0, wr = 0, ref_en = 0, ret_err;
  logic [7:0] addr = 0;
  logic [3:0] ref_row = 0;
  logic [31:0] wdata = 0, rdata;
  logic [31:0] model [WORDS];
  int checks = 0, failures = 0;

  unified_buffer #(.WORDS(WORDS), .ROW_WORDS(RWD),
    .RET_CYCLES({32'd60, 32'd80, 32'd100, 32'd150, 32'd100000})) dut (
    .clk, .rst_n, .vpd_sel(vpd), .vref_sel(vref), .req, .wr, .addr, .wdata, .rdata,
    .ref_en, .ref_row, .ret_err);
  always #5 clk = ~clk;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask
  task automatic write(input int a, input logic [31:0] d);
    @(negedge clk); req = 1; wr = 1; addr = 8'(a); wdata = d;
    @(negedge clk); req = 0; wr = 0;
  endtask
  task automatic read(input int a, output logic [31:0] q, output logic e);
    @(negedge clk); req = 1; wr = 0; addr = 8'(a);
    @(negedge clk); req = 0; q = rdata; e = ret_err;
  endtask

  initial begin
    #1000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [31:0] q; logic e;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int a = 0; a < WORDS; a++) begin model[a] = $urandom; write(a, model[a]); end
    for (int t = 0; t < 100; t++) begin
      int a; a = $urandom % WORDS;
      if ($urandom % 2) begin model[a] = $urandom; write(a, model[a]); end
      else begin read(a, q, e); check(q == model[a] && !e, $sformatf("read %0d", a)); end
    end
    // refresh wins over a write in the same cycle
    @(negedge clk); req = 1; wr = 1; addr = 8'd5; wdata = ~model[5]; ref_en = 1; ref_row = 0;
    @(negedge clk); req = 0; wr = 0; ref_en = 0;
    read(5, q, e); check(q == model[5], "refresh has priority");
    // short retention (level 4, 60 cycles): row 1 refreshed, row 2 not
    vpd = 4; vref = 4;
    write(16, model[16]); write(32, model[32]);
    repeat (40) begin @(negedge clk); ref_en = 1; ref_row = 4'd1; @(negedge clk); ref_en = 0; end
    read(16, q, e); check(q == model[16] && !e, "refreshed row kept");
    read(32, q, e); check(q == 0 && e, "stale row lost");
    vref = 3;
    read(16, q, e); check(e, "VREF mismatch");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
