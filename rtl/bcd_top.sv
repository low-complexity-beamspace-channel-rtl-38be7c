// bcd_top: low-complexity beamspace channel denoiser for an M-antenna uniform linear array
// with low-resolution ADCs.
//
// One noisy channel vector h' (M antenna-domain samples, Q8.8) enters; the denoised vector
// leaves after the chain
//   FFT -> |.|^2 -> [sorting unit -> truncated mean -> channel power -> SDNR]
//       -> activity rate (qM) -> threshold eta -> hard-threshold denoising (x 1/alpha) -> IFFT.
// The bracketed units (composite-noise-power, channel-power and SDNR estimators) are bypassed
// when prior_en is high during the input of a vector: D0, P and SDNR are then taken from the
// prior_* inputs, as when the noise level is known beforehand, and the activity estimator
// starts as soon as the last squared magnitude has streamed past.
// Handshake: in_valid/in_ready per sample, M samples per vector, natural order; a new vector
// is accepted only when the previous one has left (in_ready low in between). Output: M samples
// with out_valid, out_last on the last one. adc_bits selects 1/alpha for the ADC resolution.
// The estimates of the current vector stay on the status outputs until the next one.
// Latency at M = 64, first input to first output: 790 to 825 clocks with the estimators (the
// truncated-mean index walk varies with the data; the published figure is 770), about 600 in
// prior mode. RHO_MIN is the minimum noise-set size of the noise estimator (M/8 by default,
// the paper gives no value). The unit chain follows the published block diagram; the
// per-sample handshake, the run-time prior mode and the status outputs are this design's own.
// rst_n is the asynchronous reset of the flip-flops and also disables the stream assertions
// during reset; lint reports that double use of rst_n, which is intended.
module bcd_top
  import bcd_pkg::*;
#(
  parameter int M       = 64,
  parameter int RHO_MIN = M / 8
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic signed [ANT_W-1:0] in_re,
  input  logic signed [ANT_W-1:0] in_im,
  output logic                    in_ready,
  input  logic [2:0]              adc_bits,
  input  logic                    prior_en,
  input  logic [SQ_W-1:0]         prior_d0,
  input  logic [SQ_W-1:0]         prior_ph,
  input  logic [SDNR_W-1:0]       prior_sdnr,
  output logic                    out_valid,
  output logic signed [ANT_W-1:0] out_re,
  output logic signed [ANT_W-1:0] out_im,
  output logic                    out_last,
  // status of the vector in flight
  output logic [SQ_W-1:0]         st_d0,
  output logic [SQ_W-1:0]         st_ph,
  output logic [SDNR_W-1:0]       st_sdnr,
  output logic [$clog2(M):0]      st_qm,
  output logic [ETA_W-1:0]        st_eta,
  output logic                    st_used_cp,    // noise set fell back to c'
  output logic                    st_den_clip,   // activity denominator was not positive
  output logic [$clog2(M):0]      st_kept        // beams kept by the denoiser
);
  localparam int LM = $clog2(M);

  logic prior_q, pipe_busy;

  // ---------------------------------------------------------------- pre-processing
  logic fft_in_ready, bs_valid, bs_last;
  logic signed [BS_W-1:0] bs_re, bs_im;
  fft #(.M(M), .IN_W(ANT_W), .OUT_W(BS_W), .INVERSE(1'b0)) u_fft (
    .clk, .rst_n,
    .in_valid(in_valid && in_ready), .in_re, .in_im, .in_ready(fft_in_ready),
    .out_valid(bs_valid), .out_re(bs_re), .out_im(bs_im), .out_last(bs_last)
  );

  logic sq_valid, sq_last;
  logic signed [BS_W-1:0] sq_re, sq_im;
  logic [SQ_W-1:0] sq;
  elem_square #(.IN_W(BS_W), .OUT_W(SQ_W)) u_sq (
    .clk, .rst_n,
    .in_valid(bs_valid), .in_re(bs_re), .in_im(bs_im), .in_last(bs_last),
    .out_valid(sq_valid), .out_re(sq_re), .out_im(sq_im), .out_sq(sq), .out_last(sq_last)
  );

  // ---------------------------------------------------------------- estimators
  logic npe_ready, npe_done, npe_used_cp;
  logic [SQ_W-1:0] npe_d0, npe_d0_init, npe_avg;
  noise_power_est #(.M(M), .RHO_MIN(RHO_MIN)) u_npe (
    .clk, .rst_n,
    .in_valid(sq_valid && !prior_q), .in_data(sq), .in_ready(npe_ready),
    .done(npe_done), .d0(npe_d0), .d0_init(npe_d0_init), .avg_pwr(npe_avg),
    .used_cp(npe_used_cp)
  );

  logic cp_valid;
  logic [SQ_W-1:0] cp_ph;
  channel_power_est #(.W(SQ_W)) u_cp (
    .clk, .rst_n, .start(npe_done), .avg_pwr(npe_avg), .d0(npe_d0),
    .valid(cp_valid), .ph(cp_ph)
  );

  logic sd_done;
  logic [SDNR_W-1:0] sd_sdnr;
  sdnr_est #(.W(SQ_W), .SDNR_WD(SDNR_W)) u_sdnr (
    .clk, .rst_n, .start(cp_valid), .ph(cp_ph), .d0(npe_d0),
    .done(sd_done), .sdnr(sd_sdnr)
  );

  // parameter selection: estimated or prior values
  logic sq_last_q, act_start;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sq_last_q <= 1'b0;
    else        sq_last_q <= sq_valid && sq_last;
  end
  assign act_start = prior_q ? sq_last_q : sd_done;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_d0      <= '0;
      st_ph      <= '0;
      st_sdnr    <= '0;
      st_used_cp <= 1'b0;
    end else if (act_start) begin
      st_d0      <= prior_q ? prior_d0   : npe_d0;
      st_ph      <= prior_q ? prior_ph   : cp_ph;
      st_sdnr    <= prior_q ? prior_sdnr : sd_sdnr;
      st_used_cp <= prior_q ? 1'b0       : npe_used_cp;
    end
  end
  logic [SQ_W-1:0]   sel_d0, sel_ph;
  assign sel_d0   = prior_q ? prior_d0   : npe_d0;
  assign sel_ph   = prior_q ? prior_ph   : cp_ph;

  logic act_done, act_den_clip;
  logic [LM:0] act_qm;
  activity_est #(.M(M)) u_act (
    .clk, .rst_n, .sq_valid, .sq,
    .start(act_start), .d0(sel_d0), .ph(sel_ph),
    .done(act_done), .qm(act_qm), .den_clip(act_den_clip)
  );

  logic thr_done;
  logic [ETA_W-1:0] thr_eta;
  threshold_calc #(.M(M)) u_thr (
    .clk, .rst_n, .start(act_done), .sdnr(st_sdnr), .qm(act_qm), .d0(st_d0),
    .done(thr_done), .eta(thr_eta)
  );

  // ---------------------------------------------------------------- denoising, post-processing
  logic dn_busy, dn_valid, dn_keep, dn_last;
  logic signed [DN_W-1:0] dn_re, dn_im;
  denoise_unit #(.M(M)) u_dn (
    .clk, .rst_n,
    .in_valid(sq_valid), .in_re(sq_re), .in_im(sq_im), .in_sq(sq),
    .start(thr_done), .eta(thr_eta), .adc_bits,
    .busy(dn_busy), .out_valid(dn_valid), .out_re(dn_re), .out_im(dn_im),
    .out_keep(dn_keep), .out_last(dn_last)
  );

  logic ifft_in_ready;
  fft #(.M(M), .IN_W(DN_W), .OUT_W(ANT_W), .INVERSE(1'b1)) u_ifft (
    .clk, .rst_n,
    .in_valid(dn_valid), .in_re(dn_re), .in_im(dn_im), .in_ready(ifft_in_ready),
    .out_valid, .out_re, .out_im, .out_last
  );

  // ---------------------------------------------------------------- vector control
  logic [LM:0] kept_cnt;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prior_q     <= 1'b0;
      pipe_busy   <= 1'b0;
      st_qm       <= '0;
      st_eta      <= '0;
      st_den_clip <= 1'b0;
      st_kept     <= '0;
      kept_cnt    <= '0;
    end else begin
      if (in_valid && in_ready) prior_q <= prior_en;
      if (bs_valid) pipe_busy <= 1'b1;
      else if (out_valid && out_last) pipe_busy <= 1'b0;
      if (act_done) begin
        st_qm       <= act_qm;
        st_den_clip <= act_den_clip;
      end
      if (thr_done) begin
        st_eta   <= thr_eta;
        kept_cnt <= '0;
      end
      if (dn_valid) begin
        kept_cnt <= kept_cnt + (LM+1)'(dn_keep);
        if (dn_last) st_kept <= kept_cnt + (LM+1)'(dn_keep);
      end
    end
  end
  assign in_ready = fft_in_ready && !pipe_busy;

  // stream rules between the units
  assert property (@(posedge clk) disable iff (!rst_n) dn_valid |-> ifft_in_ready);
  assert property (@(posedge clk) disable iff (!rst_n) (sq_valid && !prior_q) |-> npe_ready);
  assert property (@(posedge clk) disable iff (!rst_n) thr_done |-> !dn_busy);

  logic unused;
  assign unused = ^{npe_d0_init, dn_busy};
endmodule
