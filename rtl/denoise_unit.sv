// denoise_unit: hard-thresholding denoiser with quantization-gain compensation.
//
// The beamspace samples h'_m (Re, Im) and their squared magnitudes stream in from the squaring
// stage (in_valid, one per clock, M per vector) and are held in three buffers until the
// threshold eta is ready. On start (eta valid) the buffers are read out in beam order: an
// element with |h'_m|^2 >= eta is kept and multiplied by 1/alpha, the inverse Bussgang gain of
// the ADC resolution selected by adc_bits (1/alpha LUT); any other element becomes zero.
// Output: out_valid for M clocks, starting two clocks after start, out_keep tells whether the
// element passed the test. Data Q2.8 in, Q4.8 (DN_W bits) out, products truncated.
// The buffers, comparator, zero-select and 1/alpha multipliers follow the published unit; the
// LUT contents (the additive-quantization-noise table for b = 1..5 bits), the output word and
// the read-out timing are this design's choices.
// rst_n is the asynchronous reset of the flip-flops and also disables the read-out assertion
// during reset; lint reports that double use of rst_n, which is intended.
module denoise_unit
  import bcd_pkg::*;
#(
  parameter int M = 64
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   in_valid,
  input  logic signed [BS_W-1:0] in_re,
  input  logic signed [BS_W-1:0] in_im,
  input  logic [SQ_W-1:0]        in_sq,
  input  logic                   start,
  input  logic [ETA_W-1:0]       eta,
  input  logic [2:0]             adc_bits,
  output logic                   busy,
  output logic                   out_valid,
  output logic signed [DN_W-1:0] out_re,
  output logic signed [DN_W-1:0] out_im,
  output logic                   out_keep,
  output logic                   out_last
);
  localparam int LM = $clog2(M);
  localparam int AW = LUT_F + 2;     // 1/alpha, unsigned, LUT_F fractional bits

  typedef logic [AW-1:0] alpha_arr_t [8];
  function automatic alpha_arr_t mk_alpha();
    alpha_arr_t a;
    for (int b = 0; b < 8; b++) a[b] = AW'(inv_alpha_q(b));
    return a;
  endfunction
  localparam alpha_arr_t INV_ALPHA = mk_alpha();

  logic signed [BS_W-1:0] buf_re [M];
  logic signed [BS_W-1:0] buf_im [M];
  logic [SQ_W-1:0]        buf_sq [M];
  logic [LM-1:0] wptr, rptr;
  logic [ETA_W-1:0] eta_b;
  logic [AW-1:0]    ia_b;
  logic             rd;       // reading phase

  always_ff @(posedge clk) begin
    if (in_valid) begin
      buf_re[wptr] <= in_re;
      buf_im[wptr] <= in_im;
      buf_sq[wptr] <= in_sq;
    end
  end

  // comparator and zero-select, then the 1/alpha multipliers
  logic keep;
  logic signed [BS_W+AW:0] pr, pim;
  always_comb begin
    keep = ETA_W'(buf_sq[rptr]) >= eta_b;
    pr   = keep ? (BS_W+AW+1)'(buf_re[rptr]) * $signed({1'b0, ia_b}) : '0;
    pim  = keep ? (BS_W+AW+1)'(buf_im[rptr]) * $signed({1'b0, ia_b}) : '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr      <= '0;
      rptr      <= '0;
      rd        <= 1'b0;
      eta_b     <= '0;
      ia_b      <= '0;
      out_valid <= 1'b0;
      out_re    <= '0;
      out_im    <= '0;
      out_keep  <= 1'b0;
      out_last  <= 1'b0;
    end else begin
      if (in_valid) wptr <= wptr + 1'b1;   // wraps after M samples
      out_valid <= rd;
      out_last  <= rd && (rptr == LM'(M - 1));
      if (rd) begin
        out_re   <= DN_W'(pr >>> LUT_F);
        out_im   <= DN_W'(pim >>> LUT_F);
        out_keep <= keep;
        rptr     <= rptr + 1'b1;
        if (rptr == LM'(M - 1)) rd <= 1'b0;
      end else if (start) begin
        eta_b <= eta;
        ia_b  <= INV_ALPHA[adc_bits];
        rptr  <= '0;
        rd    <= 1'b1;
      end
    end
  end

  assign busy = rd;
  // the buffer must not be overwritten while it is read out
  assert property (@(posedge clk) disable iff (!rst_n) rd |-> !in_valid);
endmodule
