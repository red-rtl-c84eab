// tb_processing_unit: drives random sense-amplifier outputs and bit-plane
// indices into the processing unit in both weight maps and compares the
// accumulator with a reference sum computed here, including the negative
// weight of the sign planes and the one-cycle accumulate latency.
module tb_processing_unit;
  import red_pkg::*;
  localparam int unsigned NSA = 64;
  logic clk = 0, rst_n = 0;
  wmap_e wmap = MAP_BIT_SERIAL;
  logic en = 0, clr = 0;
  logic [2:0] wbit = 0, ibit = 0;
  logic [NSA-1:0] sa = 0;
  logic signed [OBITS-1:0] acc;
  int checks = 0, failures = 0;

  processing_unit #(.NSA(NSA)) dut (.clk, .rst_n, .wmap, .en, .clr, .wbit, .ibit, .sa_out(sa), .acc);
  always #5 clk = ~clk;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic longint ref_term(input wmap_e m, input logic [NSA-1:0] s,
                                      input int wb, input int ib);
    longint t, sum;
    sum = 0;
    if (m == MAP_BIT_SERIAL) begin
      for (int i = 0; i < NSA; i++) sum += s[i];
      t = sum * (longint'(1) << (wb + ib));
      if ((wb == 7) != (ib == 7)) t = -t;
    end else begin
      for (int g = 0; g < NSA/8; g++) begin
        int v; v = int'(s[g*8 +: 8]); if (v > 127) v -= 256; sum += v;
      end
      t = sum * (longint'(1) << ib);
      if (ib == 7) t = -t;
    end
    return t;
  endfunction

  initial begin
    #100000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    longint expect_acc;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int mode = 0; mode < 2; mode++) begin
      wmap = wmap_e'(mode);
      for (int run = 0; run < 20; run++) begin
        expect_acc = 0;
        for (int step = 0; step < 12; step++) begin
          @(negedge clk);
          en = 1; clr = (step == 0);
          wbit = 3'($urandom); ibit = 3'($urandom);
          for (int w = 0; w < NSA/32; w++) sa[w*32 +: 32] = $urandom;
          expect_acc = (step == 0 ? 0 : expect_acc) + ref_term(wmap, sa, wbit, ibit);
          @(posedge clk); #1;
          check(acc == OBITS'(expect_acc), $sformatf("mode %0d step %0d acc %0d exp %0d", mode, step, acc, expect_acc));
        end
        // en low holds the value
        @(negedge clk); en = 0; sa = '1;
        @(negedge clk); check(acc == OBITS'(expect_acc), "hold when en=0");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
