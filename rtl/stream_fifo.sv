// stream_fifo: synchronous FIFO with a valid/ready stream on each side.
//
// These are the FIFOs that connect the kernels of the dataflow: every
// intermediate activation moves from one operator to the next through one.
// Storage is a simple array with read and write pointers; the output is
// presented from the array (first-word fall-through), so a word written in
// cycle t can be read in cycle t+1. in_ready is high while the FIFO is not
// full; out_valid while it is not empty. Depth and width are parameters; the
// depths used in the layer are this design's choice (the source of the
// design does not give them). count reports occupancy.
module stream_fifo #(
  parameter int unsigned W     = 8,
  parameter int unsigned DEPTH = 16
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  output logic                       in_ready,
  input  logic [W-1:0]               in_data,
  output logic                       out_valid,
  input  logic                       out_ready,
  output logic [W-1:0]               out_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic          push, pop;

  assign in_ready  = (count != DEPTH[$clog2(DEPTH+1)-1:0]);
  assign out_valid = (count != '0);
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;
  assign out_data  = mem[rp];

  always_ff @(posedge clk) begin
    if (push) mem[wp] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (push) wp <= (wp == AW'(DEPTH-1)) ? '0 : wp + 1'b1;
      if (pop)  rp <= (rp == AW'(DEPTH-1)) ? '0 : rp + 1'b1;
      count <= count + $bits(count)'(push) - $bits(count)'(pop);
    end
  end


  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
                                  count <= DEPTH[$clog2(DEPTH+1)-1:0]);

endmodule
