// pim_macro_controller: runs one tiled GEMM O = I * W on the PIM macro with
// the tiling scheme and voltage levels chosen by the retention-aware
// scheduler, and keeps the eDRAM data alive with refresh skipping.
//
// Sub-blocks: voltage_switch (VPD/VREF ladders of macro and buffer),
// address_controller (tile loop nest and buffer addresses) and two
// refresh_controllers (macro rows, buffer rows).
//
// Execution, per tile (i, j, l) in the scheduled loop order:
//  1. If the weight tile (j, l) is not resident: free the macro rows (the
//     old weights are dead and are no longer refreshed) and copy the k x n
//     weight tile from the buffer into the macro, one 32-bit word (4
//     weights) at a time. Bit-parallel map: output column nn of the tile is
//     row nn, weight e of it fills columns e*8 .. e*8+7 (one write per
//     word). Bit-serial map: output column nn uses rows nn*8 .. nn*8+7,
//     weight e is column e with bit b in row nn*8+b (eight writes per word).
//     Global column c is bank c/(SUBS*COLS), subarray (c/COLS)%SUBS.
//  2. For every input row of the tile: zero the input register, load the
//     row's k inputs, then for every output column nn compute the dot
//     product with bit-serial inputs: IBITS reads of row nn (bit-parallel)
//     or WBITS*IBITS reads of rows nn*8+b (bit-serial), each with input
//     bit plane ibit broadcast to the sense amplifiers.
//  3. Add the result to the partial sum in the buffer (read-modify-write,
//     skipped for the first K tile) and write it back.
// At the end the macro rows and the buffer rows that lie wholly inside the
// input and weight matrices are freed, so they are not refreshed any more.
//
// At start the voltage levels are switched and one refresh burst of all
// live macro and buffer rows is run before any access, because data
// written at one level would otherwise meet the possibly shorter retention
// of the new level with its old age.
//
// Refresh has priority over every macro or buffer access; an access that
// meets a refresh cycle waits (counted in n_stall). The refresh interval is
// the retention time of the selected level minus the rows to scan and a
// guard of 8 cycles. While idle, the host port reaches the buffer.
// host_rdata and m_in_data are the buffer's read data wired straight
// through: one read port feeds the host, the input register and the
// partial-sum adder.
//
// Limits checked by assertion at start: K and k multiples of 4; k at most
// BANKS*SUBS*COLS (bit-serial) or that over 8 (bit-parallel); n at most
// ROWS/8 (bit-serial) or ROWS (bit-parallel); matrix regions in the buffer
// start on row boundaries. All of this mapping is this design's choice; the
// paper shows the two cell-array layouts (Fig. 8) and the loop orders.
module pim_macro_controller
  import red_pkg::*;
#(
  parameter int unsigned ROWS      = 32,
  parameter int unsigned COLS      = 512,
  parameter int unsigned SUBS      = 2,
  parameter int unsigned BANKS     = 4,
  parameter int unsigned BUF_WORDS = 15360,
  parameter int unsigned ROW_WORDS = 16,
  localparam int unsigned NIN  = BANKS*SUBS*COLS,
  localparam int unsigned INW  = $clog2(NIN/4),
  localparam int unsigned AW   = $clog2(BUF_WORDS),
  localparam int unsigned NBR  = BUF_WORDS / ROW_WORDS,
  localparam int unsigned BRW  = $clog2(NBR),
  localparam int unsigned RW   = $clog2(ROWS)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // command
  input  logic                      start,
  output logic                      busy,
  output logic                      done,
  input  logic [DIM_W-1:0]          dim_m,
  input  logic [DIM_W-1:0]          dim_k,
  input  logic [DIM_W-1:0]          dim_n,
  input  logic [AW-1:0]             ibase,
  input  logic [AW-1:0]             wbase,
  input  logic [AW-1:0]             obase,
  input  wmap_e                     wmap,
  input  sched_result_t             sched,
  input  logic [NUM_VPD-1:0][TAB_W-1:0] macro_ret_tab,
  input  logic [NUM_VPD-1:0][TAB_W-1:0] buf_ret_tab,
  // host access to the buffer while idle
  input  logic                      host_req,
  input  logic                      host_wr,
  input  logic [AW-1:0]             host_addr,
  input  logic [31:0]               host_wdata,
  output logic                      host_ready,
  output logic                      host_rvalid,
  output logic [31:0]               host_rdata,
  input  logic                      host_free_en,
  input  logic [BRW-1:0]            host_free_lo,
  input  logic [BRW-1:0]            host_free_hi,
  // PIM macro
  output vsel_t                     m_vpd,
  output vsel_t                     m_vref,
  output logic                      m_in_clr,
  output logic                      m_in_we,
  output logic [INW-1:0]            m_in_word,
  output logic [31:0]               m_in_data,
  output logic                      m_we,
  output logic [$clog2(BANKS)-1:0]  m_wbank,
  output logic [$clog2(SUBS)-1:0]   m_wsub,
  output logic [RW-1:0]             m_wrow,
  output logic [COLS-1:0]           m_wdata,
  output logic [COLS-1:0]           m_wmask,
  output logic                      m_re,
  output logic [RW-1:0]             m_rrow,
  output logic [$clog2(IBITS)-1:0]  m_ibit,
  output logic [$clog2(WBITS)-1:0]  m_wbit,
  output logic                      m_pu_en,
  output logic                      m_pu_clr,
  output logic                      m_ref_en,
  output logic [RW-1:0]             m_ref_row,
  input  logic signed [OBITS-1:0]   m_psum,
  input  logic                      m_ret_err,
  // unified buffer
  output vsel_t                     b_vpd,
  output vsel_t                     b_vref,
  output logic                      b_req,
  output logic                      b_wr,
  output logic [AW-1:0]             b_addr,
  output logic [31:0]               b_wdata,
  input  logic [31:0]               b_rdata,
  output logic                      b_ref_en,
  output logic [BRW-1:0]            b_ref_row,
  input  logic                      b_ret_err,
  // voltage ladder switch enables
  output logic [NUM_VPD-1:0]        macro_vpd_sw,
  output logic [NUM_VPD-1:0]        macro_vref_sw,
  output logic [NUM_VPD-1:0]        buf_vpd_sw,
  output logic [NUM_VPD-1:0]        buf_vref_sw,
  // statistics
  output logic [31:0]               n_stall,
  output logic [31:0]               n_wload,
  output logic [31:0]               n_switch,
  output logic [31:0]               n_macro_ref,
  output logic [31:0]               n_macro_skip,
  output logic [31:0]               n_buf_ref,
  output logic [31:0]               n_buf_skip,
  output logic                      err
);
  typedef enum logic [4:0] {
    S_IDLE, S_SETTLE, S_TILE, S_WL_RD, S_WL_WAIT, S_WL_WR, S_IL_CLR, S_IL_RD, S_IL_WAIT,
    S_IL_WR, S_CMP, S_CMP_D1, S_CMP_D2, S_PS_RD, S_PS_WAIT, S_PS_WR, S_NEXT,
    S_FIN1, S_FIN2
  } state_e;

  state_e state;

  // ---------------------------------------------------------------- config
  logic [DIM_W-1:0] M_q, K_q, N_q;
  logic [AW-1:0]    ib_q, wb_q;
  wmap_e            wmap_q;

  // ---------------------------------------------------------- sub-blocks
  logic at_valid, at_last, at_wnew, at_firstk, at_next;
  logic [DIM_W-1:0] row0, k0, n0, m_eff, k_eff, n_eff;
  logic [AW-1:0]    i_addr, w_addr, o_addr;

  voltage_switch u_vsw (
    .clk, .rst_n, .apply(start && state == S_IDLE),
    .macro_vpd_in(sched.macro_vpd), .macro_vref_in(sched.macro_vref),
    .buf_vpd_in(sched.buf_vpd), .buf_vref_in(sched.buf_vref),
    .macro_vpd(m_vpd), .macro_vref(m_vref), .buf_vpd(b_vpd), .buf_vref(b_vref),
    .macro_vpd_sw, .macro_vref_sw, .buf_vpd_sw, .buf_vref_sw, .n_switch
  );

  address_controller #(.AW(AW)) u_addr (
    .clk, .rst_n, .start(start && state == S_IDLE), .next(at_next),
    .order(sched.order), .tile(sched.tile),
    .dim_m, .dim_k, .dim_n, .ibase, .wbase, .obase,
    .valid(at_valid), .last(at_last), .w_new(at_wnew), .first_k(at_firstk),
    .row0, .k0, .n0, .m_eff, .k_eff, .n_eff, .i_addr, .w_addr, .o_addr
  );

  // macro refresh
  logic [TAB_W-1:0] m_int, b_int;
  logic             m_mark, m_free;
  logic [ROWS-1:0]  m_live;
  logic             m_rbusy;

  function automatic logic [TAB_W-1:0] interval_of(input logic [TAB_W-1:0] ret,
                                                   input int unsigned rows);
    return (ret > TAB_W'(rows + 16)) ? ret - TAB_W'(rows + 8) : TAB_W'(8);
  endfunction

  assign m_int = interval_of(macro_ret_tab[m_vpd], ROWS);
  assign b_int = interval_of(buf_ret_tab[b_vpd], NBR);

  refresh_controller #(.ROWS(ROWS)) u_mref (
    .clk, .rst_n, .interval(m_int), .kick(start && state == S_IDLE),
    .mark_en(m_mark), .mark_row(m_wrow),
    .free_en(m_free), .free_lo('0), .free_hi(RW'(ROWS-1)),
    .ref_en(m_ref_en), .ref_row(m_ref_row), .busy(m_rbusy),
    .n_refresh(n_macro_ref), .n_skip(n_macro_skip), .live(m_live)
  );

  logic             b_mark, b_free;
  logic [BRW-1:0]   b_free_lo, b_free_hi;
  logic [NBR-1:0]   b_live;
  logic             b_rbusy;

  refresh_controller #(.ROWS(NBR)) u_bref (
    .clk, .rst_n, .interval(b_int), .kick(start && state == S_IDLE),
    .mark_en(b_mark), .mark_row(BRW'(b_addr / AW'(ROW_WORDS))),
    .free_en(b_free), .free_lo(b_free_lo), .free_hi(b_free_hi),
    .ref_en(b_ref_en), .ref_row(b_ref_row), .busy(b_rbusy),
    .n_refresh(n_buf_ref), .n_skip(n_buf_skip), .live(b_live)
  );

  // ---------------------------------------------------------------- loops
  logic [DIM_W-1:0]         ii, nn, kk;
  logic [$clog2(WBITS)-1:0] wb;
  logic [$clog2(IBITS)-1:0] kb;
  logic [31:0]              wword;
  logic signed [OBITS-1:0]  acc_q;
  logic                     firstk_q;
  logic [AW-1:0]            o_word;

  // global column of element kk and its place in the macro
  logic [31:0] gcol;
  assign gcol    = (wmap_q == MAP_BIT_PARALLEL) ? 32'(kk) * WBITS : 32'(kk);
  assign m_wbank = $clog2(BANKS)'(gcol / (SUBS*COLS));
  assign m_wsub  = $clog2(SUBS)'((gcol / COLS) % SUBS);

  logic [$clog2(COLS)-1:0] lcol;
  assign lcol = $clog2(COLS)'(gcol % COLS);

  always_comb begin
    m_wdata = '0;
    m_wmask = '0;
    if (wmap_q == MAP_BIT_PARALLEL) begin
      m_wdata = COLS'(wword) << lcol;
      m_wmask = COLS'(32'hFFFF_FFFF) << lcol;
    end else begin
      for (int q = 0; q < 4; q++) begin
        m_wdata[lcol + $clog2(COLS)'(q)] = wword[8*q + 32'(wb)];
        m_wmask[lcol + $clog2(COLS)'(q)] = 1'b1;
      end
    end
  end

  logic [RW-1:0] wt_row;
  assign wt_row = (wmap_q == MAP_BIT_PARALLEL) ? RW'(nn) : RW'(32'(nn) * WBITS + 32'(wb));
  assign m_wrow = wt_row;
  assign m_rrow = wt_row;
  assign m_ibit = kb;
  assign m_wbit = wb;

  assign o_word = o_addr + AW'(32'(ii) * 32'(N_q) + 32'(nn));

  // --------------------------------------------------------- issue logic
  logic m_free_port, b_free_port;
  logic [31:0] fr_base, fr_len, fr_lo, fr_hi;  // buffer rows freed at the end
  assign m_free_port = !m_ref_en;
  assign b_free_port = !b_ref_en;

  logic last_bit;
  assign last_bit = (32'(kb) == IBITS-1) &&
                    ((wmap_q == MAP_BIT_PARALLEL) || (32'(wb) == WBITS-1));

  always_comb begin
    m_in_clr = (state == S_IL_CLR);
    m_in_we  = (state == S_IL_WR);
    m_in_word = INW'(kk >> 2);
    m_in_data = b_rdata;
    m_we     = (state == S_WL_WR) && m_free_port;
    m_mark   = m_we;
    m_re     = (state == S_CMP) && m_free_port;
    m_pu_en  = m_re;
    m_pu_clr = m_re && (wb == '0) && (kb == '0);
    m_free   = (state == S_TILE && at_valid && at_wnew) || (state == S_FIN1);
    at_next  = (state == S_NEXT);

    b_req = 1'b0; b_wr = 1'b0; b_addr = '0; b_wdata = '0;
    unique case (state)
      S_IDLE: begin
        b_req = host_req && b_free_port; b_wr = host_wr;
        b_addr = host_addr; b_wdata = host_wdata;
      end
      S_WL_RD: begin
        b_req = b_free_port;
        b_addr = w_addr + AW'((32'(nn) * 32'(K_q) + 32'(kk)) >> 2);
      end
      S_IL_RD: begin
        b_req = b_free_port;
        b_addr = i_addr + AW'((32'(ii) * 32'(K_q) + 32'(kk)) >> 2);
      end
      S_PS_RD: begin
        b_req = b_free_port; b_addr = o_word;
      end
      S_PS_WR: begin
        b_req = b_free_port; b_wr = 1'b1; b_addr = o_word;
        b_wdata = firstk_q ? acc_q : acc_q + signed'(b_rdata);
      end
      default: ;
    endcase
    b_mark = b_req && b_wr;

    b_free = 1'b0; b_free_lo = '0; b_free_hi = '0;
    fr_base = (state == S_FIN1) ? 32'(ib_q) : 32'(wb_q);
    fr_len  = (state == S_FIN1) ? ((32'(M_q) * 32'(K_q)) >> 2) : ((32'(N_q) * 32'(K_q)) >> 2);
    fr_lo   = (fr_base + ROW_WORDS - 1) / ROW_WORDS;
    fr_hi   = (fr_base + fr_len) / ROW_WORDS;
    if (state == S_FIN1 || state == S_FIN2) begin
      if (fr_hi > fr_lo) begin
        b_free = 1'b1; b_free_lo = BRW'(fr_lo); b_free_hi = BRW'(fr_hi - 1);
      end
    end else if (state == S_IDLE && host_free_en) begin
      b_free = 1'b1; b_free_lo = host_free_lo; b_free_hi = host_free_hi;
    end
  end

  assign host_ready = (state == S_IDLE) && b_free_port;
  assign host_rdata = b_rdata;
  assign busy = (state != S_IDLE);

  // ---------------------------------------------------------------- FSM
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; done <= 1'b0; host_rvalid <= 1'b0;
      M_q <= '0; K_q <= '0; N_q <= '0; ib_q <= '0; wb_q <= '0; wmap_q <= MAP_BIT_SERIAL;
      ii <= '0; nn <= '0; kk <= '0; wb <= '0; kb <= '0; wword <= '0;
      acc_q <= '0; firstk_q <= 1'b0;
      n_stall <= '0; n_wload <= '0; err <= 1'b0;
    end else begin
      done        <= 1'b0;
      host_rvalid <= (state == S_IDLE) && host_req && !host_wr && b_free_port;
      if (m_ret_err || b_ret_err) err <= 1'b1;
      if (((state == S_WL_WR || state == S_CMP) && !m_free_port) ||
          ((state == S_WL_RD || state == S_IL_RD || state == S_PS_RD || state == S_PS_WR)
           && !b_free_port))
        n_stall <= n_stall + 1'b1;

      unique case (state)
        S_IDLE: if (start) begin
          M_q <= dim_m; K_q <= dim_k; N_q <= dim_n;
          ib_q <= ibase; wb_q <= wbase; wmap_q <= wmap;
          err <= 1'b0;
          state <= S_SETTLE;
        end
        // refresh all live rows once before the new level's retention applies
        S_SETTLE: if (!m_rbusy && !b_rbusy && !m_ref_en && !b_ref_en) state <= S_TILE;
        S_TILE: begin
          if (!at_valid) state <= S_FIN1;
          else begin
            ii <= '0; nn <= '0; kk <= '0; wb <= '0; kb <= '0;
            firstk_q <= at_firstk;
            if (at_wnew) begin
              n_wload <= n_wload + 1'b1;
              state   <= S_WL_RD;
            end else begin
              state <= S_IL_CLR;
            end
          end
        end
        // ---- weight tile load
        S_WL_RD:   if (b_free_port) state <= S_WL_WAIT;
        S_WL_WAIT: begin wword <= b_rdata; wb <= '0; state <= S_WL_WR; end
        S_WL_WR: if (m_free_port) begin
          if (wmap_q == MAP_BIT_SERIAL && 32'(wb) != WBITS-1) begin
            wb <= wb + 1'b1;
          end else begin
            wb <= '0;
            if (kk + 4 < k_eff) begin
              kk <= kk + 4; state <= S_WL_RD;
            end else begin
              kk <= '0;
              if (nn + 1'b1 < n_eff) begin
                nn <= nn + 1'b1; state <= S_WL_RD;
              end else begin
                nn <= '0; state <= S_IL_CLR;
              end
            end
          end
        end
        // ---- input row load
        S_IL_CLR:  begin kk <= '0; state <= S_IL_RD; end
        S_IL_RD:   if (b_free_port) state <= S_IL_WAIT;
        S_IL_WAIT: state <= S_IL_WR;
        S_IL_WR: begin
          if (kk + 4 < k_eff) begin kk <= kk + 4; state <= S_IL_RD; end
          else begin kk <= '0; nn <= '0; wb <= '0; kb <= '0; state <= S_CMP; end
        end
        // ---- dot products
        S_CMP: if (m_free_port) begin
          if (last_bit) begin
            kb <= '0; state <= S_CMP_D1;
          end else if (32'(kb) == IBITS-1) begin
            kb <= '0; wb <= wb + 1'b1;
          end else begin
            kb <= kb + 1'b1;
          end
        end
        S_CMP_D1: state <= S_CMP_D2;
        S_CMP_D2: begin
          acc_q <= m_psum;
          wb    <= '0;
          state <= firstk_q ? S_PS_WR : S_PS_RD;
        end
        S_PS_RD:   if (b_free_port) state <= S_PS_WAIT;
        S_PS_WAIT: state <= S_PS_WR;
        S_PS_WR: if (b_free_port) begin
          if (nn + 1'b1 < n_eff) begin
            nn <= nn + 1'b1; state <= S_CMP;
          end else if (ii + 1'b1 < m_eff) begin
            nn <= '0; ii <= ii + 1'b1; state <= S_IL_CLR;
          end else begin
            state <= S_NEXT;
          end
        end
        S_NEXT: state <= S_TILE;
        S_FIN1: state <= S_FIN2;
        S_FIN2: begin done <= 1'b1; state <= S_IDLE; end
        default: state <= S_IDLE;
      endcase
    end
  end

  // Configuration rules of the mapping.
  always_ff @(posedge clk) begin
    if (start && state == S_IDLE) begin
      assert (dim_k[1:0] == 2'b00 && sched.tile.lk >= 2)
        else $error("K and k must be multiples of 4");
      assert ((wmap == MAP_BIT_SERIAL)
              ? ((32'd1 << sched.tile.lk) <= NIN && (32'd1 << sched.tile.ln) <= ROWS/WBITS)
              : ((32'd1 << sched.tile.lk) <= NIN/WBITS && (32'd1 << sched.tile.ln) <= ROWS))
        else $error("tile does not fit the macro");
      assert (ibase % AW'(ROW_WORDS) == 0 && wbase % AW'(ROW_WORDS) == 0)
        else $error("matrix regions must start on buffer row boundaries");
    end
  end
endmodule
