// layernorm_row: row-wise LayerNorm over a stream of int8 rows of length D.
//
// For a row x the unit computes y_i = (x_i - mean) / std * gamma_i + beta_i.
// It works in integers: with S = sum x and Q = sum x^2,
//   (x_i - mean) / std = (D x_i - S) / sqrt(D Q - S^2),
// so no division by D is needed. R = floor(sqrt(D Q - S^2)) comes from a
// 20-step bit-serial square root and inv = floor(2^36 / R) from a 37-step
// restoring divider; then
//   y_i = round((D x_i - S) * inv * gamma_i / 2^(42 - OUT_FRAC)) + beta_i,
// saturated to int8. gamma is int8 with value gamma / 64; beta and y are
// int8 with value y / 2^OUT_FRAC. gamma and beta are written through the
// cfg_* port (one feature per write) before the layer runs.
//
// Two row banks: while one row is normalised and emitted, the next row is
// buffered and summed. A row takes D cycles to enter, about 60 cycles of
// square root and division, then D cycles to leave; in steady state the
// unit accepts one row every D + 60 cycles or so. No epsilon is added to the variance;
// a constant row gives y = beta.
// The source design computes LayerNorm in floating point over one buffered
// row; this integer formulation is this design's own.
module layernorm_row #(
  parameter int unsigned D        = 768,
  parameter int unsigned OUT_FRAC = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 cfg_we,
  input  logic [$clog2(D)-1:0] cfg_addr,
  input  logic signed [7:0]    cfg_gamma,
  input  logic signed [7:0]    cfg_beta,
  input  logic                 in_valid,
  output logic                 in_ready,
  input  logic signed [7:0]    in_data,
  output logic                 out_valid,
  input  logic                 out_ready,
  output logic signed [7:0]    out_data
);
  localparam int unsigned DW = $clog2(D);

  logic signed [7:0] gamma [D];
  logic signed [7:0] beta  [D];
  always_ff @(posedge clk) begin
    if (cfg_we) begin
      gamma[cfg_addr] <= cfg_gamma;
      beta[cfg_addr]  <= cfg_beta;
    end
  end

  // ---------------- input stage ----------------
  logic [1:0]          full;
  logic                abank;
  logic [DW-1:0]       aj;
  logic signed [31:0]  asum;
  logic [31:0]         asq;
  logic signed [31:0]  s_r [2];
  logic [31:0]         q_r [2];
  logic                a_we;

  assign in_ready = !full[abank];
  assign a_we     = in_valid && in_ready;

  logic [7:0]    xmem [2*D];
  logic [DW:0]   raddr, waddr;
  logic [7:0]    rx;
  always_ff @(posedge clk) begin
    if (a_we) xmem[waddr] <= in_data;
    rx <= xmem[raddr];
  end

  // ---------------- normalise stage ----------------
  logic          cbank;
  logic [1:0]    st;          // 0 idle, 1 sqrt, 2 divide, 3 emit
  logic [5:0]    cnt;
  logic [41:0]   op, one;
  logic [41:0]   res;
  logic [36:0]   rem, inv;
  logic [DW-1:0] cj;
  logic [DW-1:0] c1_j;
  logic          c_issue, c1_v, c2_v;
  logic signed [7:0] c2_y;
  logic signed [31:0] s_cur;
  logic [2:0]    ofcnt;
  logic          of_rdy;

  assign raddr   = (DW+1)'(cbank ? D : 0) + (DW+1)'(cj);
  assign waddr   = (DW+1)'(abank ? D : 0) + (DW+1)'(aj);
  assign c_issue = (st == 2'd3) && (32'(ofcnt) + 32'(c1_v) + 32'(c2_v) < 32'd4);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full <= '0; abank <= 1'b0; aj <= '0; asum <= '0; asq <= '0;
      s_r[0] <= '0; s_r[1] <= '0; q_r[0] <= '0; q_r[1] <= '0;
      cbank <= 1'b0; st <= '0; cnt <= '0; op <= '0; one <= '0; res <= '0; rem <= '0; inv <= '0;
      cj <= '0; c1_j <= '0; s_cur <= '0; c1_v <= 1'b0; c2_v <= 1'b0; c2_y <= '0;
    end else begin
      // input
      if (a_we) begin
        logic signed [31:0] s;
        logic [31:0]        q;
        s = ((aj == 0) ? 32'sd0 : asum) + 32'($signed(in_data));
        q = ((aj == 0) ? 32'd0 : asq) + 32'($signed(in_data) * $signed(in_data));
        asum <= s;
        asq  <= q;
        if (aj == DW'(D - 1)) begin
          aj <= '0;
          s_r[abank] <= s;
          q_r[abank] <= q;
          full[abank] <= 1'b1;
          abank <= !abank;
        end else aj <= aj + 1'b1;
      end
      // normalise
      c1_v <= c_issue;
      c1_j <= cj;
      c2_v <= c1_v;
      if (c1_v) begin
        logic signed [63:0] num, p;
        num = 64'(D) * 64'($signed(rx)) - 64'(s_cur);
        p   = num * $signed({27'd0, inv}) * 64'(gamma[c1_j]);
        p   = (p + (64'sd1 <<< (41 - OUT_FRAC))) >>> (42 - OUT_FRAC);
        p   = p + 64'(beta[c1_j]);
        c2_y <= (p > 127) ? 8'sd127 : (p < -128) ? -8'sd128 : 8'(p);
      end
      case (st)
        2'd0: if (full[cbank]) begin
          st  <= 2'd1;
          s_cur <= s_r[cbank];
          cnt <= 6'd20;
          op  <= 42'($signed(64'(D) * 64'(q_r[cbank]) - 64'(s_r[cbank]) * 64'(s_r[cbank])));
          one <= 42'd1 << 40;
          res <= '0;
        end
        2'd1: begin
          if (op >= res + one) begin
            op  <= op - (res + one);
            res <= (res >> 1) + one;
          end else begin
            res <= res >> 1;
          end
          one <= one >> 2;
          if (cnt == 0) begin
            st  <= 2'd2;
            cnt <= 6'd36;
            rem <= '0;
            inv <= '0;
          end else cnt <= cnt - 1'b1;
        end
        2'd2: begin
          logic [37:0] r2;
          logic [36:0] dv;
          dv = (res == 0) ? 37'd1 : 37'(res);
          r2 = {rem, (cnt == 6'd36) ? 1'b1 : 1'b0};
          if (r2 >= 38'(dv)) begin
            rem <= 37'(r2 - 38'(dv));
            inv <= {inv[35:0], 1'b1};
          end else begin
            rem <= 37'(r2);
            inv <= {inv[35:0], 1'b0};
          end
          if (cnt == 0) begin st <= 2'd3; cj <= '0; end
          else cnt <= cnt - 1'b1;
        end
        2'd3: if (c_issue) begin
          if (cj == DW'(D - 1)) begin
            st <= 2'd0;
            full[cbank] <= 1'b0;
            cbank <= !cbank;
          end else cj <= cj + 1'b1;
        end
        default: st <= 2'd0;
      endcase
    end
  end

  stream_fifo #(.W(8), .DEPTH(4)) u_ofifo (
    .clk, .rst_n,
    .in_valid(c2_v), .in_ready(of_rdy), .in_data(c2_y),
    .out_valid, .out_ready, .out_data(out_data),
    .count(ofcnt)
  );

  a_of_room: assert property (@(posedge clk) disable iff (!rst_n) c2_v |-> of_rdy);
endmodule
