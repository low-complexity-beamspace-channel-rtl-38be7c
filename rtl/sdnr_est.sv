// sdnr_est: signal-to-distortion-plus-noise ratio SDNR = P / D0.
//
// P and D0 are Q8.8; the numerator is shifted left by 8 so that the sequential divider
// returns the ratio in the published 24-bit, 8-fractional-bit format. A zero D0 or a ratio
// beyond the format saturates to all ones. (The zero clipping of the estimate is already done
// on P.) Latency: done pulses SDNR_W+1 clocks after start (one quotient bit per clock).
module sdnr_est
  import bcd_pkg::*;
#(
  parameter int W      = SQ_W,
  parameter int SDNR_WD = SDNR_W
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [W-1:0]       ph,
  input  logic [W-1:0]       d0,
  output logic               done,
  output logic [SDNR_WD-1:0] sdnr
);
  logic busy;
  seq_divider #(.NW(W + FRAC), .DW(W), .QW(SDNR_WD)) u_div (
    .clk, .rst_n, .start,
    .num({ph, FRAC'(0)}), .den(d0),
    .busy, .done, .quo(sdnr)
  );
  logic unused;
  assign unused = busy;
endmodule
