// tb_spec_table: checks the reset contents (retention 100 us and 9 us at
// 200 MHz at levels 0 and 4, access energy falling with the level), then
// random writes of every field and level read back through both the table
// output and cfg_rdata.
module tb_spec_table;
  import red_pkg::*;
  logic clk = 0, rst_n = 0, cfg_we = 0;
  vsel_t lvl = 0;
  logic [2:0] fld = 0;
  logic [TAB_W-1:0] wd = 0, rd, e_pu;
  spec_entry_t [NUM_VPD-1:0] spec;
  spec_entry_t model [NUM_VPD];
  logic [TAB_W-1:0] m_pu;
  int checks = 0, failures = 0;

  spec_table dut (.clk, .rst_n, .cfg_we, .cfg_lvl(lvl), .cfg_field(fld), .cfg_wdata(wd),
    .cfg_rdata(rd), .spec, .e_pu);
  always #5 clk = ~clk;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [TAB_W-1:0] field(input spec_entry_t e, input int f);
    case (f)
      0: return e.p_acc; 1: return e.p_ref; 2: return e.p_ret;
      3: return e.b_acc; 4: return e.b_ref; default: return e.b_ret;
    endcase
  endfunction

  initial begin
    #1000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk);
    check(spec[0].p_ret == 32'd20000 && spec[4].p_ret == 32'd1800, "retention 100 us / 9 us at 200 MHz");
    for (int v = 1; v < NUM_VPD; v++) check(spec[v].p_acc < spec[v-1].p_acc, "access energy falls with VPD");
    for (int v = 0; v < NUM_VPD; v++) model[v] = spec[v];
    m_pu = e_pu;
    for (int t = 0; t < 200; t++) begin
      int v, f; logic [TAB_W-1:0] d;
      v = $urandom % NUM_VPD; f = $urandom % 7; d = $urandom;
      @(negedge clk); cfg_we = 1; lvl = 3'(v); fld = 3'(f); wd = d;
      case (f)
        0: model[v].p_acc = d; 1: model[v].p_ref = d; 2: model[v].p_ret = d;
        3: model[v].b_acc = d; 4: model[v].b_ref = d; 5: model[v].b_ret = d;
        default: m_pu = d;
      endcase
      @(negedge clk); cfg_we = 0;
      for (int vv = 0; vv < NUM_VPD; vv++) check(spec[vv] == model[vv], "table contents");
      check(e_pu == m_pu, "E_PU");
      lvl = 3'($urandom % NUM_VPD); fld = 3'($urandom % 7); #1;
      check(rd == ((fld == 6) ? m_pu : field(model[lvl], int'(fld))), "cfg_rdata");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
