// refresh_controller: periodic eDRAM refresh with refresh skipping.
//
// A row is live from the moment data is written into it (mark) until the
// data is no longer needed (free of a row range). Only live rows are
// refreshed: data whose lifetime ends before the retention time, or that
// is no longer used by the computation, is never refreshed, which is the
// refresh-skipping scheme of the RED paper.
//
// While any row is live a timer runs; when it reaches `interval` a burst
// starts and scans the rows one per cycle. For a live row ref_en is raised
// for that cycle (the memory port is taken, the user must stall); a dead row
// is skipped without using the port. The timer restarts with the burst, so
// a row is refreshed at most interval + ROWS cycles after its previous
// write or refresh; `interval` must therefore be set to the retention time
// minus ROWS and a guard (pim_macro_controller does this).
//
// `kick` starts a burst at once. The controller uses it when the VPD level
// changes: stored data must be refreshed before the shorter retention time
// of the new level applies to it.
//
// Counters: n_refresh counts issued row refreshes, n_skip rows passed over
// in a burst because they were dead.
module refresh_controller
  import red_pkg::*;
#(
  parameter int unsigned ROWS = 32,
  localparam int unsigned RW  = (ROWS > 1) ? $clog2(ROWS) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [TAB_W-1:0] interval,
  input  logic             kick,      // start a burst now (e.g. after a level change)
  input  logic             mark_en,
  input  logic [RW-1:0]    mark_row,
  input  logic             free_en,   // free rows free_lo .. free_hi (inclusive)
  input  logic [RW-1:0]    free_lo,
  input  logic [RW-1:0]    free_hi,
  output logic             ref_en,
  output logic [RW-1:0]    ref_row,
  output logic             busy,      // a burst is running
  output logic [31:0]      n_refresh,
  output logic [31:0]      n_skip,
  output logic [ROWS-1:0]  live
);
  logic [TAB_W-1:0] timer;
  logic [RW-1:0]    scan;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      live      <= '0;
      timer     <= '0;
      scan      <= '0;
      busy      <= 1'b0;
      ref_en    <= 1'b0;
      ref_row   <= '0;
      n_refresh <= '0;
      n_skip    <= '0;
    end else begin
      ref_en <= 1'b0;
      // liveness
      for (int r = 0; r < ROWS; r++) begin
        if (free_en && (RW'(r) >= free_lo) && (RW'(r) <= free_hi)) live[r] <= 1'b0;
      end
      if (mark_en) live[mark_row] <= 1'b1;

      if (busy) begin
        if (live[scan]) begin
          ref_en    <= 1'b1;
          ref_row   <= scan;
          n_refresh <= n_refresh + 1'b1;
        end else begin
          n_skip    <= n_skip + 1'b1;
        end
        if (32'(scan) == ROWS-1) busy <= 1'b0;
        scan  <= (32'(scan) == ROWS-1) ? '0 : scan + 1'b1;
        timer <= timer + 1'b1;
      end else if (kick || (live != '0 && timer >= interval)) begin
        busy  <= 1'b1;
        scan  <= '0;
        timer <= '0;
      end else if (live == '0) begin
        timer <= '0;
      end else begin
        timer <= timer + 1'b1;
      end
    end
  end
endmodule
