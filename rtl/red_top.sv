// red_top: the RED hardware template: a retention-aware scheduler, a PIM
// macro controller, a PIM macro of reconfigurable 2T eDRAM and a unified
// eDRAM buffer (Fig. 7 of the RED paper), with the memory specification
// table the scheduler's energy model reads.
//
// Flow: the host writes the input matrix (row major) and the transposed
// weight matrix into the buffer through the host port, optionally
// rewrites the spec table, and pulses `start` with M, K, N, the weight map
// and the buffer regions. The scheduler searches all tiling schemes and
// VPD levels (sched_busy), then hands its result to the controller, which
// sets the VPD/VREF switches of macro and buffer and runs the GEMM
// (run_busy). `done` pulses when the 32-bit results O[M][N] are in the
// buffer at obase; the host reads them back through the host port.
//
// Default sizes are the paper's evaluated configuration: four banks of
// 4 KB (two 32 x 512 subarrays each, 16 KB macro) and a 60 KB buffer.
// The VPD/VREF ladder switch enables leave the top as ports: the voltage
// generators and switches themselves are analog. `err` flags a read that
// the memory models saw fail (data kept past its retention time).
module red_top
  import red_pkg::*;
#(
  parameter int unsigned ROWS      = 32,
  parameter int unsigned COLS      = 512,
  parameter int unsigned SUBS      = 2,
  parameter int unsigned BANKS     = 4,
  parameter int unsigned BUF_WORDS = 15360,
  parameter int unsigned ROW_WORDS = 16,
  localparam int unsigned AW  = $clog2(BUF_WORDS),
  localparam int unsigned BRW = $clog2(BUF_WORDS / ROW_WORDS)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // spec table
  input  logic                 cfg_we,
  input  vsel_t                cfg_lvl,
  input  logic [2:0]           cfg_field,
  input  logic [TAB_W-1:0]     cfg_wdata,
  output logic [TAB_W-1:0]     cfg_rdata,
  // command
  input  logic                 start,
  input  logic [DIM_W-1:0]     dim_m,
  input  logic [DIM_W-1:0]     dim_k,
  input  logic [DIM_W-1:0]     dim_n,
  input  wmap_e                wmap,
  input  logic [AW-1:0]        ibase,
  input  logic [AW-1:0]        wbase,
  input  logic [AW-1:0]        obase,
  output logic                 sched_busy,
  output logic                 run_busy,
  output logic                 done,
  output sched_result_t        sched_result,
  output logic [31:0]          n_eval,
  // host buffer port
  input  logic                 host_req,
  input  logic                 host_wr,
  input  logic [AW-1:0]        host_addr,
  input  logic [31:0]          host_wdata,
  output logic                 host_ready,
  output logic                 host_rvalid,
  output logic [31:0]          host_rdata,
  input  logic                 host_free_en,
  input  logic [BRW-1:0]       host_free_lo,
  input  logic [BRW-1:0]       host_free_hi,
  // voltage ladder switch enables (analog switches outside the digital core)
  output logic [NUM_VPD-1:0]   macro_vpd_sw,
  output logic [NUM_VPD-1:0]   macro_vref_sw,
  output logic [NUM_VPD-1:0]   buf_vpd_sw,
  output logic [NUM_VPD-1:0]   buf_vref_sw,
  // statistics
  output logic [31:0]          n_stall,
  output logic [31:0]          n_wload,
  output logic [31:0]          n_switch,
  output logic [31:0]          n_macro_ref,
  output logic [31:0]          n_macro_skip,
  output logic [31:0]          n_buf_ref,
  output logic [31:0]          n_buf_skip,
  output logic                 err
);
  localparam int unsigned NIN = BANKS*SUBS*COLS;
  localparam int unsigned INW = $clog2(NIN/4);
  localparam int unsigned RW  = $clog2(ROWS);

  // ------------------------------------------------------------ spec table
  spec_entry_t [NUM_VPD-1:0] spec;
  logic [TAB_W-1:0]          e_pu;
  logic [NUM_VPD-1:0][TAB_W-1:0] p_ret_tab, b_ret_tab;

  spec_table u_spec (
    .clk, .rst_n, .cfg_we, .cfg_lvl, .cfg_field, .cfg_wdata, .cfg_rdata, .spec, .e_pu
  );
  always_comb
    for (int v = 0; v < NUM_VPD; v++) begin
      p_ret_tab[v] = spec[v].p_ret;
      b_ret_tab[v] = spec[v].b_ret;
    end

  // -------------------------------------------------------------- scheduler
  logic sched_done;
  retention_aware_scheduler #(.ROWS(ROWS), .COLS(COLS), .SUBS(SUBS), .BANKS(BANKS)) u_sched (
    .clk, .rst_n, .start(start && !sched_busy && !run_busy),
    .dim_m, .dim_k, .dim_n, .wmap, .spec, .e_pu,
    .busy(sched_busy), .done(sched_done), .result(sched_result), .n_eval
  );

  // ----------------------------------------------------- macro controller
  logic [DIM_W-1:0] M_q, K_q, N_q;
  logic [AW-1:0]    ib_q, wb_q, ob_q;
  wmap_e            wmap_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      M_q <= '0; K_q <= '0; N_q <= '0; ib_q <= '0; wb_q <= '0; ob_q <= '0;
      wmap_q <= MAP_BIT_SERIAL;
    end else if (start && !sched_busy && !run_busy) begin
      M_q <= dim_m; K_q <= dim_k; N_q <= dim_n;
      ib_q <= ibase; wb_q <= wbase; ob_q <= obase; wmap_q <= wmap;
    end
  end

  vsel_t                     m_vpd, m_vref, b_vpd, b_vref;
  logic                      m_in_clr, m_in_we, m_we, m_re, m_pu_en, m_pu_clr, m_ref_en;
  logic [INW-1:0]            m_in_word;
  logic [31:0]               m_in_data;
  logic [$clog2(BANKS)-1:0]  m_wbank;
  logic [$clog2(SUBS)-1:0]   m_wsub;
  logic [RW-1:0]             m_wrow, m_rrow, m_ref_row;
  logic [COLS-1:0]           m_wdata, m_wmask;
  logic [$clog2(IBITS)-1:0]  m_ibit;
  logic [$clog2(WBITS)-1:0]  m_wbit;
  logic signed [OBITS-1:0]   m_psum;
  logic                      m_ret_err;
  logic                      b_req, b_wr, b_ref_en, b_ret_err;
  logic [AW-1:0]             b_addr;
  logic [31:0]               b_wdata, b_rdata;
  logic [BRW-1:0]            b_ref_row;

  pim_macro_controller #(
    .ROWS(ROWS), .COLS(COLS), .SUBS(SUBS), .BANKS(BANKS),
    .BUF_WORDS(BUF_WORDS), .ROW_WORDS(ROW_WORDS)
  ) u_ctrl (
    .clk, .rst_n,
    .start(sched_done), .busy(run_busy), .done,
    .dim_m(M_q), .dim_k(K_q), .dim_n(N_q), .ibase(ib_q), .wbase(wb_q), .obase(ob_q),
    .wmap(wmap_q), .sched(sched_result),
    .macro_ret_tab(p_ret_tab), .buf_ret_tab(b_ret_tab),
    .host_req(host_req && !sched_busy), .host_wr, .host_addr, .host_wdata,
    .host_ready, .host_rvalid, .host_rdata,
    .host_free_en, .host_free_lo, .host_free_hi,
    .m_vpd, .m_vref, .m_in_clr, .m_in_we, .m_in_word, .m_in_data,
    .m_we, .m_wbank, .m_wsub, .m_wrow, .m_wdata, .m_wmask,
    .m_re, .m_rrow, .m_ibit, .m_wbit, .m_pu_en, .m_pu_clr,
    .m_ref_en, .m_ref_row, .m_psum, .m_ret_err,
    .b_vpd, .b_vref, .b_req, .b_wr, .b_addr, .b_wdata, .b_rdata,
    .b_ref_en, .b_ref_row, .b_ret_err,
    .macro_vpd_sw, .macro_vref_sw, .buf_vpd_sw, .buf_vref_sw,
    .n_stall, .n_wload, .n_switch, .n_macro_ref, .n_macro_skip, .n_buf_ref, .n_buf_skip,
    .err
  );

  // -------------------------------------------------------------- PIM macro
  pim_macro #(.ROWS(ROWS), .COLS(COLS), .SUBS(SUBS), .BANKS(BANKS)) u_macro (
    .clk, .rst_n, .vpd_sel(m_vpd), .vref_sel(m_vref), .wmap(wmap_q),
    .in_clr(m_in_clr), .in_we(m_in_we), .in_word(m_in_word), .in_data(m_in_data),
    .we(m_we), .wbank(m_wbank), .wsub(m_wsub), .wrow(m_wrow), .wdata(m_wdata), .wmask(m_wmask),
    .re(m_re), .rrow(m_rrow), .ibit(m_ibit), .wbit(m_wbit), .pu_en(m_pu_en), .pu_clr(m_pu_clr),
    .ref_en(m_ref_en), .ref_row(m_ref_row), .psum(m_psum), .ret_err(m_ret_err)
  );

  // --------------------------------------------------------- unified buffer
  unified_buffer #(.WORDS(BUF_WORDS), .ROW_WORDS(ROW_WORDS)) u_buf (
    .clk, .rst_n, .vpd_sel(b_vpd), .vref_sel(b_vref),
    .req(b_req), .wr(b_wr), .addr(b_addr), .wdata(b_wdata), .rdata(b_rdata),
    .ref_en(b_ref_en), .ref_row(b_ref_row), .ret_err(b_ret_err)
  );
endmodule
