// softmax_row: row-wise softmax over attention scores, with an optional
// causal mask, for a stream of int8 scores.
//
// Scores arrive as rows of L int8 values with value x / 2^IN_FRAC (the
// 1/sqrt(d_k) scaling is folded into the requantisation of the score GEMM).
// The rows come in the order the score GEMM emits them: per block of M1
// queries, per head, per query; from this the unit knows each row's query
// index q, and with CAUSAL = 1 masks keys j > q (the "Mask" step).
// Output: probabilities as int8 in [0, 127] with value p / 128, in the
// same order.
//
// A row passes three stages, each working on a different row at the same
// time, connected by two-bank row buffers so that the unit keeps a rate of
// about one element per cycle:
//  A  buffer the row and find its maximum (unmasked entries only);
//  B  e = 2^((x - max) * log2(e) / 2^IN_FRAC) in Q0.16, zero if masked,
//     and the row sum S. 2^f for the fractional part f uses
//     1 + 0.6565 f + 0.3435 f^2 (error below 0.1 %), the integer part is a
//     right shift;
//  C  R = floor(2^40 / S) by a 41-step restoring divider, then
//     p = round(e * R / 2^33), saturated to 127.
// Latency of a row: about 2L + 45 cycles; throughput one row per
// max(L, 45) cycles plus a few cycles of hand-over.
// The source design buffers one row and computes softmax in floating
// point; this fixed-point version with its exp approximation is this
// design's own choice.
module softmax_row #(
  parameter int unsigned L       = 512,
  parameter int unsigned M1      = 8,
  parameter int unsigned H       = 12,
  parameter bit          CAUSAL  = 1'b0,
  parameter int unsigned IN_FRAC = 4
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
  localparam int unsigned LW  = $clog2(L);
  localparam int unsigned F   = 14 + IN_FRAC;
  localparam int unsigned NRB = L / M1;
  localparam logic [15:0] LOG2E_Q14 = 16'd23637;

  // ---------------- stage A: buffer + max ----------------
  logic [1:0]             xfull;
  logic                   abank;
  logic [LW-1:0]          aj;
  logic signed [7:0]      amax;
  logic [$clog2(M1)-1:0]  ai;
  logic [(H > 1 ? $clog2(H) : 1)-1:0]     ag;
  logic [(NRB > 1 ? $clog2(NRB) : 1)-1:0] arb;
  logic [LW-1:0]          aq;
  logic                   a_we, a_masked;
  logic signed [7:0]      xmax_r [2];
  logic [LW-1:0]          q_r    [2];

  assign aq       = LW'(arb) * LW'(M1) + LW'(ai);
  assign in_ready = !xfull[abank];
  assign a_we     = in_valid && in_ready;
  assign a_masked = CAUSAL && (aj > aq);

  logic [7:0]    xmem [2*L];
  logic [LW:0]   b_raddr;
  logic [7:0]    b_x;
  always_ff @(posedge clk) begin
    if (a_we) xmem[(LW+1)'(abank ? L : 0) + (LW+1)'(aj)] <= in_data;
    b_x <= xmem[b_raddr];
  end

  // ---------------- stage B: exponent + sum ----------------
  logic [1:0]    efull;
  logic          bbank;       // x bank being read, also e bank being written
  logic          b_act;
  logic [LW-1:0] bj;
  logic          b1_v;
  logic [LW-1:0] b1_j;
  logic [31:0]   bsum;
  logic [31:0]   sum_r [2];
  logic          b_go;
  logic [16:0]   e_val;

  assign b_go    = xfull[bbank] && !efull[bbank];
  assign b_raddr = (LW+1)'(bbank ? L : 0) + (LW+1)'(bj);

  // exp2 of (x - max) scaled
  always_comb begin
    logic signed [31:0] z, t;
    logic signed [31:0] n;
    logic [15:0]        f16;
    logic [31:0]        poly;
    z    = 32'($signed(b_x)) - 32'(xmax_r[bbank]);
    t    = z * $signed({16'd0, LOG2E_Q14});
    n    = t >>> F;
    f16  = 16'(t[F-1:0] >> (F - 16));
    poly = 32'd65536 + ((32'(f16) * (32'd43024 + ((32'd22511 * 32'(f16)) >> 16))) >> 16);
    if (CAUSAL && (b1_j > q_r[bbank])) e_val = '0;
    else if (n < -16)                  e_val = '0;
    else                               e_val = 17'(poly >> (-n));
  end

  logic [16:0]   emem [2*L];
  logic [LW:0]   c_raddr;
  logic [16:0]   c_e;
  always_ff @(posedge clk) begin
    if (b1_v) emem[(LW+1)'(bbank ? L : 0) + (LW+1)'(b1_j)] <= e_val;
    c_e <= emem[c_raddr];
  end

  // ---------------- stage C: reciprocal + scale ----------------
  logic          cbank;
  logic [1:0]    cstate;      // 0 idle, 1 divide, 2 emit
  logic [5:0]    dcnt;
  logic [40:0]   rem;
  logic [40:0]   quo;
  logic [LW-1:0] cj;
  logic          c_issue, c1_v, c2_v;
  logic signed [7:0] c2_p;
  logic [2:0]    ofcnt;
  logic          of_rdy;

  assign c_raddr = (LW+1)'(cbank ? L : 0) + (LW+1)'(cj);
  assign c_issue = (cstate == 2'd2) && (32'(ofcnt) + 32'(c1_v) + 32'(c2_v) < 32'd4);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      xfull <= '0; abank <= 1'b0; aj <= '0; amax <= -8'sd128; ai <= '0; ag <= '0; arb <= '0;
      xmax_r[0] <= '0; xmax_r[1] <= '0; q_r[0] <= '0; q_r[1] <= '0;
      efull <= '0; bbank <= 1'b0; b_act <= 1'b0; bj <= '0; b1_v <= 1'b0; b1_j <= '0;
      bsum <= '0; sum_r[0] <= '0; sum_r[1] <= '0;
      cbank <= 1'b0; cstate <= '0; dcnt <= '0; rem <= '0; quo <= '0; cj <= '0;
      c1_v <= 1'b0; c2_v <= 1'b0; c2_p <= '0;
    end else begin
      // ---- A ----
      if (a_we) begin
        logic signed [7:0] m;
        m = (aj == 0) ? -8'sd128 : amax;
        if (!a_masked && $signed(in_data) > m) m = in_data;
        amax <= m;
        if (aj == LW'(L - 1)) begin
          aj <= '0;
          xmax_r[abank] <= m;
          q_r[abank] <= aq;
          xfull[abank] <= 1'b1;
          abank <= !abank;
          if (32'(ai) == M1 - 1) begin
            ai <= '0;
            if (32'(ag) == H - 1) begin
              ag <= '0;
              arb <= (32'(arb) == NRB - 1) ? '0 : arb + 1'b1;
            end else ag <= ag + 1'b1;
          end else ai <= ai + 1'b1;
        end else aj <= aj + 1'b1;
      end
      // ---- B ----
      b1_v <= b_act;
      b1_j <= bj;
      if (!b_act && b_go && !b1_v) begin
        b_act <= 1'b1;
        bj    <= '0;
        bsum  <= '0;
      end else if (b_act) begin
        if (bj == LW'(L - 1)) b_act <= 1'b0;
        else bj <= bj + 1'b1;
      end
      if (b1_v) begin
        bsum <= bsum + 32'(e_val);
        if (b1_j == LW'(L - 1)) begin
          sum_r[bbank] <= bsum + 32'(e_val);
          efull[bbank] <= 1'b1;
          xfull[bbank] <= 1'b0;
          bbank <= !bbank;
        end
      end
      // ---- C ----
      c1_v <= c_issue;
      c2_v <= c1_v;
      if (c1_v) begin
        logic [63:0] pr;
        pr = (64'(c_e) * 64'(quo) + (64'd1 << 32)) >> 33;
        c2_p <= (pr > 64'd127) ? 8'sd127 : 8'(pr);
      end
      case (cstate)
        2'd0: if (efull[cbank]) begin
          cstate <= 2'd1;
          dcnt   <= 6'd40;
          rem    <= '0;
          quo    <= '0;
        end
        2'd1: begin
          // restoring division of 2^40 by sum, one quotient bit per cycle
          logic [41:0] r2;
          r2 = {rem, (dcnt == 6'd40) ? 1'b1 : 1'b0};
          if (r2 >= 42'(sum_r[cbank])) begin
            rem <= 41'(r2 - 42'(sum_r[cbank]));
            quo <= {quo[39:0], 1'b1};
          end else begin
            rem <= 41'(r2);
            quo <= {quo[39:0], 1'b0};
          end
          if (dcnt == 0) begin cstate <= 2'd2; cj <= '0; end
          else dcnt <= dcnt - 1'b1;
        end
        2'd2: if (c_issue) begin
          if (cj == LW'(L - 1)) begin
            cstate <= 2'd0;
            efull[cbank] <= 1'b0;
            cbank <= !cbank;
          end else cj <= cj + 1'b1;
        end
        default: cstate <= 2'd0;
      endcase
    end
  end

  stream_fifo #(.W(8), .DEPTH(4)) u_ofifo (
    .clk, .rst_n,
    .in_valid(c2_v), .in_ready(of_rdy), .in_data(c2_p),
    .out_valid, .out_ready, .out_data(out_data),
    .count(ofcnt)
  );

  a_of_room: assert property (@(posedge clk) disable iff (!rst_n) c2_v |-> of_rdy);
endmodule
