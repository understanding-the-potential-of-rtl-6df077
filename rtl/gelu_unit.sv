// gelu_unit: element-wise GeLU on an int8 stream, one element per cycle.
//
// x and y are int8 with value v / 2^FRAC. GeLU(x) = x/2 * (1 + erf(x/sqrt 2))
// with erf replaced by the second-order polynomial used by integer-only BERT
// inference:  erf(u) ~ sign(u) * (1 - 0.2888 * (min(|u|, 1.769) - 1.769)^2).
// All arithmetic is integer: |u| in Q12 is |x| * 4096/(2^FRAC * sqrt 2),
// the polynomial is evaluated in Q12 and y = round(x * (1 + erf) / 2),
// saturated. The largest deviation from exact GeLU is about 0.02 in real
// terms (a third of an LSB at FRAC = 4).
// One register stage with a valid/ready handshake (in_ready = !out_valid ||
// out_ready), so the unit sustains one element per cycle with latency 1.
// The GeLU kernel is named by the source design; this approximation and the
// fixed-point format are this design's own choice.
module gelu_unit #(
  parameter int unsigned FRAC = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  output logic              in_ready,
  input  logic signed [7:0] in_data,
  output logic              out_valid,
  input  logic              out_ready,
  output logic signed [7:0] out_data
);
  // 4096 / (2^FRAC * sqrt(2)), rounded
  localparam int unsigned USCALE = (2896 + (1 << (FRAC - 1))) >> FRAC;  // 2896 = 4096/sqrt 2
  localparam int          CLIP   = 7246;                                // 1.769 in Q12
  localparam int          A_Q12  = 1183;                                // 0.2888 in Q12

  logic signed [7:0] y;

  always_comb begin
    int          ax, u, dd;
    longint      sq, erfq, prod;
    ax   = (in_data < 0) ? -int'(in_data) : int'(in_data);
    u    = ax * int'(USCALE);
    if (u > CLIP) u = CLIP;
    dd   = u - CLIP;
    sq   = longint'(dd) * longint'(dd);             // Q24
    erfq = 4096 - ((longint'(A_Q12) * sq) >>> 24);  // Q12, in [0, 4096]
    if (in_data < 0) erfq = -erfq;
    prod = longint'(in_data) * (4096 + erfq);       // x * (1 + erf) in Q12
    prod = (prod + 4096) >>> 13;                    // / 2, rounded
    if (prod > 127)       y = 8'sd127;
    else if (prod < -128) y = -8'sd128;
    else                  y = 8'(prod);
  end

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (in_valid) out_data <= y;
    end
  end
endmodule
