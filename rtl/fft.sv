// fft: M-point radix-2 FFT / IFFT used at both ends of the denoiser.
//
// With INVERSE = 0 it turns the M antenna-domain samples of one channel vector into the M
// beamspace samples; with INVERSE = 1 (conjugated twiddles) it turns the denoised beamspace
// vector back into the antenna domain. The published architecture only names these blocks;
// the engine below is this design's own, chosen as the simplest that does the job: an
// iterative in-place decimation-in-time transform with a single butterfly.
//
// Operation, one vector at a time:
//   LOAD  M cycles   in_ready = 1; each in_valid sample is written at its bit-reversed address.
//   CALC  (M/2)*log2(M) cycles, one butterfly per clock over a register file of M complex words.
//   OUT   M cycles   out_valid = 1, samples in natural order, out_last on the last one.
// Latency from the last input sample to the first output sample is (M/2)*log2(M) + 1 cycles.
//
// Scaling: the paper's transform is the unitary (normalized) DFT. Each of the first
// SCALE_STAGES stages halves its outputs; with SCALE_STAGES = log2(M)/2 this is exactly
// 1/sqrt(M) for even log2(M) (M = 64 gives 1/8), so FFT then IFFT returns the input. For odd
// log2(M) (M = 128) the outputs are also multiplied by 1/sqrt(2) (TW_F-bit constant) on their
// way out, so the transform stays unitary; this output multiplier is this design's choice.
// Inside, words carry G guard bits below the FRAC fractional bits of the ports (IW bits in
// all), so the truncation of products and of the halving does not pile up across stages; the
// outputs are rounded back to FRAC fractional bits and saturate to OUT_W bits. Twiddles carry
// TW_F fractional bits. Guard bits and word widths are this design's choice.
module fft
  import bcd_pkg::*;
#(
  parameter int M            = 64,
  parameter int IN_W         = ANT_W,
  parameter int OUT_W        = BS_W,
  parameter bit INVERSE      = 1'b0,
  parameter int SCALE_STAGES = $clog2(M) / 2,
  parameter int G            = 6,
  parameter int IW           = 30
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic signed [IN_W-1:0]  in_re,
  input  logic signed [IN_W-1:0]  in_im,
  output logic                    in_ready,
  output logic                    out_valid,
  output logic signed [OUT_W-1:0] out_re,
  output logic signed [OUT_W-1:0] out_im,
  output logic                    out_last
);
  localparam int LM = $clog2(M);
  // for odd log2(M) the shifts give 1/2^floor(log2(M)/2); the output multiplier supplies the
  // missing 1/sqrt(2)
  localparam bit ODD_NORM = (LM % 2 == 1) && (SCALE_STAGES == LM / 2);
  localparam logic signed [15:0] RSQRT2 = 16'(to_sfix(0.7071067811865476, TW_F));

  typedef logic signed [15:0] tw_arr_t [M/2];
  function automatic tw_arr_t mk_cos();
    tw_arr_t a;
    for (int k = 0; k < M / 2; k++) a[k] = tw_cos(k, M);
    return a;
  endfunction
  function automatic tw_arr_t mk_sin();
    tw_arr_t a;
    for (int k = 0; k < M / 2; k++) a[k] = tw_sin(k, M);
    return a;
  endfunction
  localparam tw_arr_t TW_C = mk_cos();
  localparam tw_arr_t TW_S = mk_sin();

  typedef enum logic [1:0] {S_LOAD, S_CALC, S_OUT} state_t;
  state_t state;

  logic signed [IW-1:0] mem_re [M];
  logic signed [IW-1:0] mem_im [M];

  logic [LM-1:0]           cnt;     // load / output index
  logic [$clog2(LM+1)-1:0] stage;
  logic [LM-2:0]           bfly;    // butterfly index within a stage

  function automatic logic [LM-1:0] bitrev(logic [LM-1:0] v);
    for (int i = 0; i < LM; i++) bitrev[i] = v[LM-1-i];
  endfunction

  // ---------------------------------------------------------------- butterfly datapath
  logic [LM-1:0]        a_idx, b_idx, half, pos;
  logic [LM-2:0]        tw_idx;
  logic signed [15:0]   wr, wi;
  logic signed [IW+16:0] pr, pi;
  logic signed [IW-1:0] tr, ti, ya_re, ya_im, yb_re, yb_im;

  always_comb begin
    half   = LM'(1) << stage;
    pos    = LM'(bfly) & (half - LM'(1));
    a_idx  = ((LM'(bfly) >> stage) << (stage + 1)) | pos;
    b_idx  = a_idx | half;
    tw_idx = (LM-1)'(pos << (LM - 1 - int'(stage)));
    wr     = TW_C[tw_idx];
    // forward: W = cos - j sin; inverse: W = cos + j sin
    wi     = INVERSE ? TW_S[tw_idx] : -TW_S[tw_idx];
    pr     = (IW+17)'(mem_re[b_idx]) * wr - (IW+17)'(mem_im[b_idx]) * wi;
    pi     = (IW+17)'(mem_re[b_idx]) * wi + (IW+17)'(mem_im[b_idx]) * wr;
    tr     = IW'(pr >>> TW_F);
    ti     = IW'(pi >>> TW_F);
    ya_re  = mem_re[a_idx] + tr;
    ya_im  = mem_im[a_idx] + ti;
    yb_re  = mem_re[a_idx] - tr;
    yb_im  = mem_im[a_idx] - ti;
    if (int'(stage) < SCALE_STAGES) begin
      ya_re = ya_re >>> 1;
      ya_im = ya_im >>> 1;
      yb_re = yb_re >>> 1;
      yb_im = yb_im >>> 1;
    end
  end

  // (times 1/sqrt(2) if ODD_NORM) drop the G guard bits (round half up), saturate to OUT_W bits
  function automatic logic signed [OUT_W-1:0] sat(logic signed [IW-1:0] w);
    logic signed [IW-1:0] MAXV, MINV, v;
    logic signed [IW+16:0] p;
    if (ODD_NORM) begin
      p = (IW+17)'(w) * (IW+17)'(RSQRT2);
      v = IW'((p + (IW+17)'(1 << (G + TW_F - 1))) >>> (G + TW_F));
    end else begin
      v = (w + IW'(1 << (G - 1))) >>> G;
    end
    MAXV = IW'((2 ** (OUT_W - 1)) - 1);
    MINV = -IW'(2 ** (OUT_W - 1));
    if (v > MAXV) return MAXV[OUT_W-1:0];
    if (v < MINV) return MINV[OUT_W-1:0];
    return v[OUT_W-1:0];
  endfunction

  // ---------------------------------------------------------------- control
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_LOAD;
      cnt   <= '0;
      stage <= '0;
      bfly  <= '0;
    end else begin
      unique case (state)
        S_LOAD: if (in_valid) begin
          cnt <= cnt + 1'b1;
          if (cnt == LM'(M - 1)) begin
            state <= S_CALC;
            stage <= '0;
            bfly  <= '0;
          end
        end
        S_CALC: begin
          bfly <= bfly + 1'b1;
          if (bfly == (LM-1)'(M / 2 - 1)) begin
            stage <= stage + 1'b1;
            if (int'(stage) == LM - 1) begin
              state <= S_OUT;
              cnt   <= '0;
            end
          end
        end
        S_OUT: begin
          cnt <= cnt + 1'b1;
          if (cnt == LM'(M - 1)) state <= S_LOAD;
        end
        default: state <= S_LOAD;
      endcase
    end
  end

  // register file writes: bit-reversed load, butterfly write-back
  always_ff @(posedge clk) begin
    if (state == S_LOAD && in_valid) begin
      mem_re[bitrev(cnt)] <= IW'(in_re) <<< G;
      mem_im[bitrev(cnt)] <= IW'(in_im) <<< G;
    end else if (state == S_CALC) begin
      mem_re[a_idx] <= ya_re;
      mem_im[a_idx] <= ya_im;
      mem_re[b_idx] <= yb_re;
      mem_im[b_idx] <= yb_im;
    end
  end

  assign in_ready  = (state == S_LOAD);
  assign out_valid = (state == S_OUT);
  assign out_last  = (state == S_OUT) && (cnt == LM'(M - 1));
  assign out_re    = sat(mem_re[cnt]);
  assign out_im    = sat(mem_im[cnt]);

endmodule
