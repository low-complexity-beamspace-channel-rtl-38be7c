// sorting_unit: systolic insertion sorter for the M squared magnitudes of one vector.
//
// A chain of M stages, each holding one value. A value arriving at a stage is compared with
// the stored one; the smaller stays, the larger moves on to the next stage one clock later
// (compare-and-swap, one comparison per stage per clock, no global data path). A stage that
// is still empty simply keeps what arrives. A finite-state machine runs three phases:
//   LOAD   one input per in_valid, until M values have entered stage 1;
//   FLUSH  M-1 clocks, so the last forwarded value can reach its place;
//   OUT    M clocks; the chain shifts towards stage M and stage M's value is emitted.
// Because the smaller value is retained, stage 1 ends with the minimum and stage M with the
// maximum, so the values leave stage M in descending order (largest first); out_last marks
// the smallest. The stage rule, the three phases and the M-1 flush follow the published
// architecture; the empty-stage flags and the emitted order are this design's reading of it.
// Timing: first output 2M clocks after the first input of an unbroken stream; in_ready is
// high only in LOAD.
// rst_n also disables the overflow assertion during reset; lint reports that double use of the
// asynchronous reset, which is intended.
module sorting_unit
  import bcd_pkg::*;
#(
  parameter int M = 64,
  parameter int W = SQ_W
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  input  logic [W-1:0] in_data,
  output logic         in_ready,
  output logic         out_valid,
  output logic [W-1:0] out_data,
  output logic         out_last
);
  localparam int CW = $clog2(M + 1);

  typedef enum logic [1:0] {S_LOAD, S_FLUSH, S_OUT} state_t;
  state_t state;
  logic [CW-1:0] cnt;

  logic [W-1:0] held [M];   // value retained by each stage
  logic [M-1:0] occ;        // stage holds a value
  logic [W-1:0] fwd  [M];   // value arriving at each stage
  logic [M-1:0] fwd_v;

  // value presented to stage m this clock
  logic [W-1:0] arr_d [M];
  logic [M-1:0] arr_v;
  always_comb begin
    for (int m = 0; m < M; m++) begin
      if (m == 0) begin
        arr_v[m] = (state == S_LOAD) && in_valid;
        arr_d[m] = in_data;
      end else begin
        arr_v[m] = fwd_v[m];
        arr_d[m] = fwd[m];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_LOAD;
      cnt   <= '0;
      occ   <= '0;
      fwd_v <= '0;
      for (int m = 0; m < M; m++) begin
        held[m] <= '0;
        fwd[m]  <= '0;
      end
    end else begin
      unique case (state)
        S_LOAD, S_FLUSH: begin
          for (int m = 0; m < M; m++) begin
            if (m + 1 < M) fwd_v[m+1] <= 1'b0;
            if (arr_v[m]) begin
              if (!occ[m]) begin
                occ[m]  <= 1'b1;
                held[m] <= arr_d[m];
              end else if (m + 1 < M) begin
                // compare-and-swap: keep the smaller, forward the larger
                fwd_v[m+1] <= 1'b1;
                if (arr_d[m] < held[m]) begin
                  fwd[m+1] <= held[m];
                  held[m]  <= arr_d[m];
                end else begin
                  fwd[m+1] <= arr_d[m];
                end
              end
            end
          end
          if (state == S_LOAD) begin
            if (in_valid) begin
              cnt <= cnt + 1'b1;
              if (cnt == CW'(M - 1)) begin
                state <= S_FLUSH;
                cnt   <= '0;
              end
            end
          end else begin
            cnt <= cnt + 1'b1;
            if (cnt == CW'(M - 2)) begin
              state <= S_OUT;
              cnt   <= '0;
            end
          end
        end
        S_OUT: begin
          for (int m = M - 1; m > 0; m--) held[m] <= held[m-1];
          held[0] <= '0;
          cnt <= cnt + 1'b1;
          if (cnt == CW'(M - 1)) begin
            state <= S_LOAD;
            cnt   <= '0;
            occ   <= '0;
          end
        end
        default: state <= S_LOAD;
      endcase
    end
  end

  assign in_ready  = (state == S_LOAD);
  assign out_valid = (state == S_OUT);
  assign out_data  = held[M-1];
  assign out_last  = (state == S_OUT) && (cnt == CW'(M - 1));

  // a value is never forwarded past the last stage
  property p_no_overflow;
    @(posedge clk) disable iff (!rst_n) (arr_v[M-1] |-> !occ[M-1]);
  endproperty
  assert property (p_no_overflow);
endmodule
