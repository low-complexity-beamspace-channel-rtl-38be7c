// elem_square: element-wise squared magnitude |h'_m|^2 = Re^2 + Im^2 of the beamspace stream.
//
// Each beamspace sample (Q2.8, BS_W bits) is squared component-wise and summed; the Q4.16
// result drops its lower 8 fractional bits (truncation) and saturates to the published
// 16-bit, 8-fractional-bit format. The sample itself travels along one register stage so that
// the denoising buffer receives (Re, Im, |.|^2) aligned. Latency: one clock, one sample per
// clock, no back-pressure. The truncation and the single register stage are this design's
// choice.
// The 8 low bits of the full-precision square are dropped on purpose (truncation to Q8.8).
module elem_square
  import bcd_pkg::*;
#(
  parameter int IN_W  = BS_W,
  parameter int OUT_W = SQ_W
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  input  logic signed [IN_W-1:0] in_re,
  input  logic signed [IN_W-1:0] in_im,
  input  logic                   in_last,
  output logic                   out_valid,
  output logic signed [IN_W-1:0] out_re,
  output logic signed [IN_W-1:0] out_im,
  output logic [OUT_W-1:0]       out_sq,
  output logic                   out_last
);
  localparam int PW = 2 * IN_W + 1;
  logic [PW-1:0] p;
  logic [PW-FRAC-1:0] q;
  logic [OUT_W-1:0] sq_c;

  always_comb begin
    p = PW'($unsigned(PW'(in_re) * PW'(in_re))) + PW'($unsigned(PW'(in_im) * PW'(in_im)));
    q = p[PW-1:FRAC];
    if (PW - FRAC > OUT_W && (q >> OUT_W) != 0) sq_c = '1;
    else sq_c = OUT_W'(q);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      out_re    <= '0;
      out_im    <= '0;
      out_sq    <= '0;
    end else begin
      out_valid <= in_valid;
      out_last  <= in_valid && in_last;
      if (in_valid) begin
        out_re <= in_re;
        out_im <= in_im;
        out_sq <= sq_c;
      end
    end
  end
endmodule
