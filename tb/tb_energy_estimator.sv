// tb_energy_estimator: random operation counts, lifetimes and spec tables;
// checks the NUM_VPD x NUM_VPD candidate energies (Eq. 1-3 with floor
// brackets) against values computed here, their order, the done pulse,
// and the latency of one evaluation.
module tb_energy_estimator;
  import red_pkg::*;
  logic clk = 0, rst_n = 0, start = 0;
  logic [CYC_W-1:0] p_n, b_n, lt_i, lt_w, lt_o;
  spec_entry_t [NUM_VPD-1:0] spec;
  logic [TAB_W-1:0] e_pu;
  logic busy, cand_valid, done;
  vsel_t cand_vp, cand_vb;
  logic [EN_W-1:0] cand_e;
  int checks = 0, failures = 0;

  energy_estimator dut (.clk, .rst_n, .start, .p_n, .b_n, .lt_i, .lt_w, .lt_o, .spec, .e_pu,
    .busy, .cand_valid, .cand_vp, .cand_vb, .cand_e, .done);
  always #5 clk = ~clk;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #10000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int run = 0; run < 12; run++) begin
      longint ep [NUM_VPD], eb [NUM_VPD];
      int got, cyc;
      p_n = CYC_W'($urandom % 1000000); b_n = CYC_W'($urandom % 100000);
      lt_i = CYC_W'($urandom % 5000000); lt_w = CYC_W'($urandom % 200000); lt_o = CYC_W'($urandom % 200000);
      if (run == 0) begin lt_i = 100; lt_w = 50; lt_o = 10; end   // all lifetimes below retention
      e_pu = 32'($urandom % 200);
      for (int v = 0; v < NUM_VPD; v++) begin
        spec[v].p_acc = 32'($urandom % 1000); spec[v].p_ref = 32'($urandom % 100000);
        spec[v].p_ret = 32'(1000 + $urandom % 30000);
        spec[v].b_acc = 32'($urandom % 100); spec[v].b_ref = 32'($urandom % 100000);
        spec[v].b_ret = 32'(1000 + $urandom % 30000);
        ep[v] = (longint'(spec[v].p_acc) + e_pu) * longint'(p_n)
                + longint'(spec[v].p_ref) * (longint'(lt_w) / longint'(spec[v].p_ret));
        eb[v] = longint'(spec[v].b_acc) * longint'(b_n)
                + longint'(spec[v].b_ref) * (longint'(lt_i) / longint'(spec[v].b_ret)
                                           + longint'(lt_o) / longint'(spec[v].b_ret));
        if (run == 0) check(ep[v] == (longint'(spec[v].p_acc) + e_pu) * longint'(p_n), "no refresh term when lifetime < retention");
      end
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      got = 0; cyc = 0;
      while (got < NUM_VPD*NUM_VPD && cyc < 2000) begin
        @(posedge clk); #1; cyc++;
        if (cand_valid) begin
          check(int'(cand_vp) == got / NUM_VPD && int'(cand_vb) == got % NUM_VPD, "candidate order");
          check(cand_e == EN_W'(ep[got / NUM_VPD] + eb[got % NUM_VPD]),
                $sformatf("E(%0d,%0d) = %0d exp %0d", cand_vp, cand_vb, cand_e, ep[got / NUM_VPD] + eb[got % NUM_VPD]));
          if (got == NUM_VPD*NUM_VPD - 1) check(done, "done with last candidate");
          got++;
        end
      end
      check(got == NUM_VPD*NUM_VPD, "all candidates");
      // NUM_VPD divider passes of CYC_W+2 cycles plus the candidate stream
      check(cyc <= NUM_VPD*(CYC_W + 3) + NUM_VPD*NUM_VPD + 4, $sformatf("latency %0d", cyc));
      @(negedge clk); check(!busy, "idle after done");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
