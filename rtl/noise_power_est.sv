// noise_power_est: composite noise power estimator, the sorting unit followed by the
// truncated-mean unit.
//
// The M squared magnitudes |h'_m|^2 of one vector stream in (one per clock, in_valid); the
// sorter orders them (load M, flush M-1, emit M clocks) and the truncated-mean unit turns the
// sorted sequence into the blind estimate D0 and the mean power ||h'||^2 / M. done pulses
// once per vector, about 3M + 20 clocks after the first input at M = 64. This pairing is the
// published structure; the interface signals are this design's.
// rst_n also disables the handshake assertion during reset; lint reports that double use of
// the asynchronous reset, which is intended.
module noise_power_est
  import bcd_pkg::*;
#(
  parameter int M       = 64,
  parameter int T       = N_ITER,
  parameter int RHO_MIN = M / 8
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  input  logic [SQ_W-1:0] in_data,
  output logic            in_ready,
  output logic            done,
  output logic [SQ_W-1:0] d0,
  output logic [SQ_W-1:0] d0_init,
  output logic [SQ_W-1:0] avg_pwr,
  output logic            used_cp
);
  logic            s_valid, s_last, tm_ready;
  logic [SQ_W-1:0] s_data;

  sorting_unit #(.M(M), .W(SQ_W)) u_sort (
    .clk, .rst_n,
    .in_valid, .in_data, .in_ready,
    .out_valid(s_valid), .out_data(s_data), .out_last(s_last)
  );

  truncated_mean #(.M(M), .T(T), .RHO_MIN(RHO_MIN)) u_tmean (
    .clk, .rst_n,
    .in_valid(s_valid), .in_data(s_data), .in_ready(tm_ready),
    .done, .d0, .d0_init, .avg_pwr, .used_cp
  );

  // the truncated-mean unit must be idle whenever the sorter emits
  assert property (@(posedge clk) disable iff (!rst_n) s_valid |-> tm_ready);
  logic unused;
  assign unused = s_last;
endmodule
