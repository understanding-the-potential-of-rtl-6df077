// kv_buffer: double-buffered on-chip store for the K or V matrix of one
// layer, together with the loader (L_K or L_V) that streams it into an
// attention GEMM.
//
// The K and V projections produce their L x D result row-major. Attention
// cannot start before the whole matrix exists, so the matrix is kept here;
// two banks let the next layer (or sequence) fill one bank while the
// attention GEMMs still read the other. Each bank is split into M2
// partitions so that one read returns the M2 values a beat of the attention
// array needs:
//  * MODE 0 (K): the score GEMM needs, for head g, key tile ct and head
//    feature k, the M2 values K[ct*M2 + j][g*DK + k]. Partition j holds the
//    keys with index j mod M2.
//  * MODE 1 (V): the probability x V GEMM needs, for head g, feature tile ct
//    and key k, the M2 values V[k][g*DK + ct*M2 + j]. Partition j holds the
//    features with index j mod M2.
// One element is written per cycle; one M2-wide word is read per cycle. The
// whole read sequence (heads, tiles, reduction index) is repeated once per
// block of M1 queries, L/M1 times, and then the bank is released.
// Keeping K and V on chip and double buffering them follows the source
// design; the partitioning and read order are this design's choice, derived
// from the systolic array's needs.
module kv_buffer #(
  parameter int unsigned L    = 512,
  parameter int unsigned D    = 768,
  parameter int unsigned H    = 12,
  parameter int unsigned M1   = 8,
  parameter int unsigned M2   = 8,
  parameter bit          MODE = 1'b0
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [7:0]        in_data,
  output logic              out_valid,
  input  logic              out_ready,
  output logic [M2*8-1:0]   out_data,
  output logic [1:0]        bank_full
);
  localparam int unsigned DK    = D / H;
  localparam int unsigned DEPTH = L * D / M2;     // per partition and bank
  localparam int unsigned AW    = $clog2(2 * DEPTH);
  localparam int unsigned NCT   = MODE ? DK / M2 : L / M2;
  localparam int unsigned NK    = MODE ? L : DK;
  localparam int unsigned NRB   = L / M1;

  // ---------------- write side ----------------
  logic                     wbank;
  logic [$clog2(L)-1:0]     wrow;
  logic [$clog2(D)-1:0]     wcol;
  logic                     we;
  logic [AW-1:0]            waddr;
  logic [$clog2(M2)-1:0]    wpart;

  assign in_ready = !bank_full[wbank];
  assign we       = in_valid && in_ready;

  always_comb begin
    if (!MODE) begin
      wpart = wrow[$clog2(M2)-1:0];
      waddr = AW'(wbank ? DEPTH : 0) + AW'(wrow / M2) * AW'(D) + AW'(wcol);
    end else begin
      wpart = wcol[$clog2(M2)-1:0];
      waddr = AW'(wbank ? DEPTH : 0) + AW'(wrow) * AW'(D / M2) + AW'(wcol / M2);
    end
  end

  // ---------------- read side ----------------
  logic                                  rbank;
  logic [(NRB > 1 ? $clog2(NRB) : 1)-1:0] rb;
  logic [(H > 1 ? $clog2(H) : 1)-1:0]     g;
  logic [(NCT > 1 ? $clog2(NCT) : 1)-1:0] ct;
  logic [$clog2(NK)-1:0]                 k;
  logic [AW-1:0]                         raddr;
  logic                                  issue, r1_v, last_rd, fifo_rdy;
  logic [2:0]                            fcnt;
  logic [M2*8-1:0]                       rdata;

  assign last_rd = (32'(rb) == NRB - 1) && (32'(g) == H - 1) && (32'(ct) == NCT - 1) && (32'(k) == NK - 1);
  assign issue   = bank_full[rbank] && (32'(fcnt) + 32'(r1_v) < 32'd4);

  always_comb begin
    if (!MODE) raddr = AW'(rbank ? DEPTH : 0) + AW'(ct) * AW'(D) + AW'(g) * AW'(DK) + AW'(k);
    else       raddr = AW'(rbank ? DEPTH : 0) + AW'(k) * AW'(D / M2) +
                       AW'(g) * AW'(DK / M2) + AW'(ct);
  end

  for (genvar j = 0; j < M2; j++) begin : g_part
    logic [7:0] mem [2*DEPTH];
    always_ff @(posedge clk) begin
      if (we && wpart == j) mem[waddr] <= in_data;
      rdata[j*8 +: 8] <= mem[raddr];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wbank <= 1'b0; wrow <= '0; wcol <= '0; bank_full <= '0;
      rbank <= 1'b0; rb <= '0; g <= '0; ct <= '0; k <= '0; r1_v <= 1'b0;
    end else begin
      if (we) begin
        if (32'(wcol) == D - 1) begin
          wcol <= '0;
          if (32'(wrow) == L - 1) begin
            wrow <= '0;
            bank_full[wbank] <= 1'b1;
            wbank <= !wbank;
          end else wrow <= wrow + 1'b1;
        end else wcol <= wcol + 1'b1;
      end
      r1_v <= issue;
      if (issue) begin
        if (32'(k) == NK - 1) begin
          k <= '0;
          if (32'(ct) == NCT - 1) begin
            ct <= '0;
            if (32'(g) == H - 1) begin
              g <= '0;
              rb <= (32'(rb) == NRB - 1) ? '0 : rb + 1'b1;
            end else g <= g + 1'b1;
          end else ct <= ct + 1'b1;
        end else k <= k + 1'b1;
        if (last_rd) begin
          bank_full[rbank] <= 1'b0;
          rbank <= !rbank;
        end
      end
    end
  end

  stream_fifo #(.W(M2*8), .DEPTH(4)) u_fifo (
    .clk, .rst_n,
    .in_valid(r1_v), .in_ready(fifo_rdy), .in_data(rdata),
    .out_valid, .out_ready, .out_data(out_data),
    .count(fcnt)
  );

  a_fifo_room: assert property (@(posedge clk) disable iff (!rst_n) r1_v |-> fifo_rdy);
endmodule
