// channel_power_est: average channel power P = max(||h'||^2/M - D0, 0).
//
// The mean received power comes from the truncated-mean unit (a shift of the total sum); the
// composite noise power D0 is subtracted and a negative difference, which arises when D0 is
// overestimated, is clipped to zero (subtractor plus zero-select multiplexer, as published).
// Both operands and the result are Q8.8. One register stage: ph/valid follow start by one
// clock; the register is this design's choice.
module channel_power_est
  import bcd_pkg::*;
#(
  parameter int W = SQ_W
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         start,
  input  logic [W-1:0] avg_pwr,
  input  logic [W-1:0] d0,
  output logic         valid,
  output logic [W-1:0] ph
);
  logic [W:0] diff;
  assign diff = {1'b0, avg_pwr} - {1'b0, d0};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid <= 1'b0;
      ph    <= '0;
    end else begin
      valid <= start;
      if (start) ph <= diff[W] ? '0 : diff[W-1:0];
    end
  end
endmodule
