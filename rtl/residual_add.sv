// residual_add: joins two int8 streams element by element and emits their
// saturated sum; this is the residual connection of the layer.
//
// One element is taken from each input in the same cycle, only when both
// are valid and the output register is free (or being emptied), so the two
// streams stay aligned element for element. Both operands are assumed to
// share one fixed-point scale. Latency one cycle, one element per cycle.
// The addition and where it sits follow the source design; saturation and
// the common scale are this design's choice.
module residual_add
  import llm_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              a_valid,
  output logic              a_ready,
  input  logic signed [7:0] a_data,
  input  logic              b_valid,
  output logic              b_ready,
  input  logic signed [7:0] b_data,
  output logic              o_valid,
  input  logic              o_ready,
  output logic signed [7:0] o_data
);
  logic take, room;
  assign room    = !o_valid || o_ready;
  assign take    = a_valid && b_valid && room;
  assign a_ready = b_valid && room;
  assign b_ready = a_valid && room;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      o_valid <= 1'b0;
      o_data  <= '0;
    end else if (room) begin
      o_valid <= take;
      if (take) o_data <= sat_add8(a_data, b_data);
    end
  end
endmodule
