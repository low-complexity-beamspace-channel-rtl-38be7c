// activity_est: number of active beams qM, the activity rate times M.
//
//   qM = round( 2 M^2 P^2 / ( sum_m |h'_m|^4 - 2 M D0^2 - 4 M D0 P ) ),  clipped to 1..M-1.
//
// This is the published hardware form of the moment-matching activity estimator: it works on
// P and D0 instead of the SDNR, so no squared quotient is needed, and it yields the integer
// count directly. The fourth-order moment is accumulated while the squared magnitudes stream
// past (each |h'|^2 is squared again and summed; the sum restarts with the first sample of
// every group of M). On start, D0 and P are captured into buffers; the products D0^2, D0*P,
// P^2 are formed, the powers of two 2M, 4M and 2M^2 are shifts, and one sequential divider
// forms the quotient with one fractional bit, which is rounded to nearest. A non-positive
// denominator or an oversized quotient gives M-1; the clipping range 1..M-1 (so that ln(qM)
// and ln(M-qM) exist downstream) and the round-to-nearest are this design's reading of the
// paper's "integer clipping". Latency: done pulses log2(M)+8 clocks after start.
module activity_est
  import bcd_pkg::*;
#(
  parameter int M = 64
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              sq_valid,
  input  logic [SQ_W-1:0]   sq,
  input  logic              start,
  input  logic [SQ_W-1:0]   d0,
  input  logic [SQ_W-1:0]   ph,
  output logic              done,
  output logic [$clog2(M):0] qm,
  output logic              den_clip    // denominator was not positive
);
  localparam int LM  = $clog2(M);
  localparam int P_W = 2 * SQ_W;                // products, 2*FRAC fractional bits
  localparam int A_W = P_W + LM;                // fourth-moment sum
  localparam int D_W = A_W + 3;                 // signed denominator
  localparam int N_W = P_W + 2 * LM + 2;        // 2 M^2 P^2 with one extra bit for rounding
  localparam int Q_W = LM + 2;                  // quotient with one fractional bit

  // ---------------------------------------------------------------- fourth-moment accumulator
  logic [A_W-1:0] acc4;
  logic [LM-1:0]  scnt;
  logic [P_W-1:0] sq2;
  assign sq2 = P_W'(sq) * P_W'(sq);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc4 <= '0;
      scnt <= '0;
    end else if (sq_valid) begin
      acc4 <= (scnt == '0) ? A_W'(sq2) : acc4 + A_W'(sq2);
      scnt <= scnt + 1'b1;   // wraps after M samples
    end
  end

  // ---------------------------------------------------------------- arithmetic sequence
  typedef enum logic [2:0] {S_IDLE, S_MUL, S_DEN, S_DIV, S_RND} state_t;
  state_t state;
  logic [SQ_W-1:0] d0_b, ph_b;                  // buffers
  logic [P_W-1:0]  d0sq, d0ph, phsq;
  logic signed [D_W-1:0] den;
  logic [N_W-1:0]  num;
  logic            div_start, div_busy, div_done;
  logic [Q_W-1:0]  quo;
  logic [Q_W-1:0]  rnd;

  always_comb begin
    den = D_W'(acc4) - (D_W'(d0sq) << (1 + LM)) - (D_W'(d0ph) << (2 + LM));
    rnd = (quo == '1) ? '1 : (quo + 1'b1) >> 1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      d0_b      <= '0;
      ph_b      <= '0;
      d0sq      <= '0;
      d0ph      <= '0;
      phsq      <= '0;
      num       <= '0;
      div_start <= 1'b0;
      done      <= 1'b0;
      qm        <= '0;
      den_clip  <= 1'b0;
    end else begin
      done      <= 1'b0;
      div_start <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          d0_b  <= d0;
          ph_b  <= ph;
          state <= S_MUL;
        end
        S_MUL: begin
          d0sq  <= P_W'(d0_b) * P_W'(d0_b);
          d0ph  <= P_W'(d0_b) * P_W'(ph_b);
          phsq  <= P_W'(ph_b) * P_W'(ph_b);
          state <= S_DEN;
        end
        S_DEN: begin
          num <= N_W'(phsq) << (2 + 2 * LM);       // 2 M^2 P^2, times 2 for the rounding bit
          if (den <= 0) begin
            den_clip <= 1'b1;
            qm       <= (LM+1)'(M - 1);
            done     <= 1'b1;
            state    <= S_IDLE;
          end else begin
            den_clip  <= 1'b0;
            div_start <= 1'b1;
            state     <= S_DIV;
          end
        end
        S_DIV: if (div_done) state <= S_RND;
        S_RND: begin
          if (rnd < Q_W'(1))          qm <= (LM+1)'(1);
          else if (rnd > Q_W'(M - 1)) qm <= (LM+1)'(M - 1);
          else                        qm <= (LM+1)'(rnd);
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  seq_divider #(.NW(N_W), .DW(D_W - 1), .QW(Q_W)) u_div (
    .clk, .rst_n, .start(div_start),
    .num, .den(den[D_W-2:0]),
    .busy(div_busy), .done(div_done), .quo
  );
  logic unused;
  assign unused = div_busy;
endmodule
