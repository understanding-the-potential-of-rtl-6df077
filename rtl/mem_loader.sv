// mem_loader: data loader that streams a region of off-chip memory into the
// dataflow (the L_Q, L_KV and L_I input loaders, and the weight and bias
// loaders of each GEMM).
//
// On start it latches base, words and repeats, then reads the words
// base .. base+words-1, in order, repeats times over (a weight matrix is
// streamed once per block of tokens). Reads go out on a request/response
// port: a request is accepted when req_valid && req_ready; responses come
// back in order, any number of cycles later, one per request, flagged by
// rsp_valid. The loader never has more requests in flight than its output
// FIFO has room for, so responses are never dropped and off-chip latency is
// hidden as long as the FIFO is deeper than the round trip. busy stays high
// until the last word has left the FIFO.
// The loaders themselves are named by the source design; the port protocol,
// the repeat counter and the FIFO depth are this design's choice.
module mem_loader #(
  parameter int unsigned DW    = 64,
  parameter int unsigned AW    = 32,
  parameter int unsigned DEPTH = 16
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [AW-1:0] base,
  input  logic [31:0]   words,
  input  logic [31:0]   repeats,
  output logic          busy,
  // memory read port
  output logic          req_valid,
  input  logic          req_ready,
  output logic [AW-1:0] req_addr,
  input  logic          rsp_valid,
  input  logic [DW-1:0] rsp_data,
  // output stream
  output logic          out_valid,
  input  logic          out_ready,
  output logic [DW-1:0] out_data
);
  localparam int unsigned CW = $clog2(DEPTH + 1);

  logic          active;
  logic [AW-1:0] base_r;
  logic [31:0]   words_r, reps_r, widx, ridx;
  logic [CW-1:0] inflight, fcnt;
  logic          fifo_in_ready;
  logic          fire;

  assign req_addr  = base_r + AW'(widx);
  assign req_valid = active && (32'(inflight) + 32'(fcnt) < DEPTH);
  assign fire      = req_valid && req_ready;
  assign busy      = active || (inflight != 0) || out_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0; base_r <= '0; words_r <= '0; reps_r <= '0; widx <= '0; ridx <= '0;
      inflight <= '0;
    end else begin
      if (start && !busy) begin
        active  <= (words != 0) && (repeats != 0);
        base_r  <= base;
        words_r <= words;
        reps_r  <= repeats;
        widx    <= '0;
        ridx    <= '0;
      end else if (fire) begin
        if (widx == words_r - 1) begin
          widx <= '0;
          if (ridx == reps_r - 1) active <= 1'b0;
          else ridx <= ridx + 1;
        end else widx <= widx + 1;
      end
      inflight <= inflight + CW'(fire) - CW'(rsp_valid);
    end
  end

  stream_fifo #(.W(DW), .DEPTH(DEPTH)) u_fifo (
    .clk, .rst_n,
    .in_valid(rsp_valid), .in_ready(fifo_in_ready), .in_data(rsp_data),
    .out_valid, .out_ready, .out_data(out_data),
    .count(fcnt)
  );

  a_rsp_room: assert property (@(posedge clk) disable iff (!rst_n) rsp_valid |-> fifo_in_ready);
endmodule
