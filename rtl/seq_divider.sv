// seq_divider: unsigned fixed-point sequential divider, one quotient bit per clock.
//
// Shared by the SDNR estimator, the activity-rate estimator and the threshold unit, which
// each scale their operands so that the wanted quotient is the integer floor(num / den) of
// QW bits. On start the operands are latched; if den is zero or the quotient needs more than
// QW bits the result is all ones (saturation) and done rises on the next clock. Otherwise a
// restoring long division produces one bit per clock: done is a one-clock pulse QW+1 clocks
// after start, and quo holds its value until the next start. The published design names a
// "fixed-point sequential divider" without its insides; the radix-2 restoring form and the
// saturation rule are this design's choice.
module seq_divider #(
  parameter int NW = 32,
  parameter int DW = 16,
  parameter int QW = 24
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [NW-1:0] num,
  input  logic [DW-1:0] den,
  output logic          busy,
  output logic          done,
  output logic [QW-1:0] quo
);
  localparam int XW = (NW > QW) ? NW : QW + 1;   // working width of the shifted numerator

  logic [DW:0]     rem;
  logic [XW-1:0]   nsh;     // numerator bits still to be shifted in (MSB first)
  logic [$clog2(QW+1)-1:0] left;
  logic [DW+1:0]   trial;

  logic [XW-1:0] num_x;
  logic          ovf;
  always_comb begin
    num_x = XW'(num);
    // quotient fits in QW bits iff (num >> QW) < den
    ovf   = (den == '0) || ((num_x >> QW) >= XW'(den));
    trial = {rem, nsh[QW-1]} - (DW+2)'(den);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      quo  <= '0;
      rem  <= '0;
      nsh  <= '0;
      left <= '0;
    end else begin
      done <= 1'b0;
      if (start) begin
        if (ovf) begin
          quo  <= '1;
          done <= 1'b1;
          busy <= 1'b0;
        end else begin
          rem  <= (DW+1)'(num_x >> QW);   // already smaller than den
          nsh  <= num_x;
          left <= ($clog2(QW+1))'(QW);
          quo  <= '0;
          busy <= 1'b1;
        end
      end else if (busy) begin
        if (!trial[DW+1]) begin
          rem <= trial[DW:0];
          quo <= {quo[QW-2:0], 1'b1};
        end else begin
          rem <= {rem[DW-1:0], nsh[QW-1]};
          quo <= {quo[QW-2:0], 1'b0};
        end
        nsh  <= nsh << 1;
        left <= left - 1'b1;
        if (left == 1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end
endmodule
