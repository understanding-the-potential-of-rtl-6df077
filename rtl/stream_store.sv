// stream_store: writes the layer's output stream back to off-chip memory.
//
// On start it latches base and count; the i-th element of the input stream
// is written to address base + i. A write is one beat on the write port,
// accepted when wr_valid && wr_ready; the input is taken in the same cycle.
// done pulses for one cycle after the last element is written and busy is
// high from start until then. That the layer result goes back to memory
// after each layer follows the source design; the port is this design's.
// wr_data is in_data passed straight through (no register), so a write
// beat and the input handshake happen in the same cycle.
module stream_store #(
  parameter int unsigned DW = 8,
  parameter int unsigned AW = 32
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [AW-1:0] base,
  input  logic [31:0]   count,
  output logic          busy,
  output logic          done,
  input  logic          in_valid,
  output logic          in_ready,
  input  logic [DW-1:0] in_data,
  output logic          wr_valid,
  input  logic          wr_ready,
  output logic [AW-1:0] wr_addr,
  output logic [DW-1:0] wr_data
);
  logic [AW-1:0] base_r;
  logic [31:0]   cnt_r, idx;

  assign wr_valid = busy && in_valid;
  assign in_ready = busy && wr_ready;
  assign wr_addr  = base_r + AW'(idx);
  assign wr_data  = in_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; base_r <= '0; cnt_r <= '0; idx <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy   <= (count != 0);
        base_r <= base;
        cnt_r  <= count;
        idx    <= '0;
      end else if (wr_valid && wr_ready) begin
        if (idx == cnt_r - 1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
        idx <= idx + 1;
      end
    end
  end
endmodule
