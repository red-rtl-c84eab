// seq_divider: unsigned restoring divider, one quotient bit per cycle.
// start loads dividend and divisor; done pulses W+1 cycles later with
// quot = floor(dividend / divisor). A zero divisor gives an all-ones
// quotient. Used by the energy estimator for floor(T_life / T_retention).
module seq_divider #(
  parameter int unsigned W = 48
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [W-1:0] dividend,
  input  logic [W-1:0] divisor,
  output logic         done,
  output logic [W-1:0] quot
);
  logic [W-1:0]         rem_q, dvd_q, dvs_q;
  logic [$clog2(W+1)-1:0] cnt;
  logic                 run;
  logic [W:0]           trial;

  assign trial = {rem_q, dvd_q[W-1]} - {1'b0, dvs_q};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rem_q <= '0; dvd_q <= '0; dvs_q <= '0; cnt <= '0; run <= 1'b0;
      done <= 1'b0; quot <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        rem_q <= '0; dvd_q <= dividend; dvs_q <= divisor; cnt <= '0; run <= 1'b1;
      end else if (run) begin
        if (!trial[W]) begin
          rem_q <= trial[W-1:0];
          dvd_q <= {dvd_q[W-2:0], 1'b1};
        end else begin
          rem_q <= {rem_q[W-2:0], dvd_q[W-1]};
          dvd_q <= {dvd_q[W-2:0], 1'b0};
        end
        cnt <= cnt + 1'b1;
        if (32'(cnt) == W-1) begin
          run  <= 1'b0;
          done <= 1'b1;
          quot <= {dvd_q[W-2:0], !trial[W]};
        end
      end
    end
  end
endmodule
