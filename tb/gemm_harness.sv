// gemm_harness: drives one gemm_engine configuration with random data and
// compares every output with a reference product computed here.
// STALL = 1 inserts random gaps on all inputs and random back-pressure on
// the output; STALL = 0 runs at full rate and checks the cycle count
// against rows*K*N/(M1*M2) plus fill and drain latency.
module gemm_harness
  import llm_pkg::*;
#(
  parameter int unsigned M1 = 4, M2 = 4,
  parameter bit PACK = 1'b1,
  parameter int unsigned WB = 4, KG = 8, G = 1, N = 8, NB = 3,
  parameter bit ACT_PER_GROUP = 1'b0, OUT_PER_GROUP = 1'b0, HAS_BIAS = 1'b1,
  parameter bit STALL = 1'b1
) (
  input  logic clk,
  input  logic rst_n,
  output int   checks,
  output int   failures,
  output logic done
);
  localparam int unsigned NT = N / M2;
  localparam int unsigned R  = NB * M1;
  rq_cfg_t rq;
  logic a_valid, a_ready, w_valid, w_ready, b_valid, b_ready, o_valid, o_ready;
  logic signed [7:0] a_data, o_data;
  logic [M2*WB-1:0] w_data;
  logic [M2*32-1:0] b_data;

  gemm_engine #(.M1(M1), .M2(M2), .PACK(PACK), .WB(WB), .KG(KG), .G(G), .N(N),
                .ACT_PER_GROUP(ACT_PER_GROUP), .OUT_PER_GROUP(OUT_PER_GROUP),
                .HAS_BIAS(HAS_BIAS)) dut (.*);

  int A [R][G][KG];
  int W [G][KG][N];
  int B [G][N];
  int exp_q[$];

  function automatic int wrand(input int bits);
    return int'($urandom_range((1 << bits) - 1)) - (1 << (bits - 1));
  endfunction

  initial begin
    rq.mult = 16'sd3; rq.shift = 6'd4;
    for (int r = 0; r < R; r++) for (int g = 0; g < G; g++) for (int k = 0; k < KG; k++)
      A[r][g][k] = wrand(8);
    for (int g = 0; g < G; g++) for (int k = 0; k < KG; k++) for (int n = 0; n < N; n++)
      W[g][k][n] = wrand(WB);
    for (int g = 0; g < G; g++) for (int n = 0; n < N; n++)
      B[g][n] = HAS_BIAS ? int'($urandom_range(2000)) - 1000 : 0;
    // expected output order
    for (int rb = 0; rb < NB; rb++) begin
      if (OUT_PER_GROUP) begin
        for (int g = 0; g < G; g++) for (int i = 0; i < M1; i++) for (int n = 0; n < N; n++)
          exp_q.push_back(ref_c(rb * M1 + i, g, n));
      end else begin
        for (int i = 0; i < M1; i++) for (int g = 0; g < G; g++) for (int n = 0; n < N; n++)
          exp_q.push_back(ref_c(rb * M1 + i, g, n));
      end
    end
  end

  function automatic int ref_c(input int r, input int g, input int n);
    longint acc, p;
    acc = B[g][n];
    for (int k = 0; k < KG; k++) acc += A[r][g][k] * W[g][k][n];
    p = acc * 3;
    p = (p + 8) >>> 4;
    if (p > 127) p = 127;
    if (p < -128) p = -128;
    return int'(p);
  endfunction

  // activation driver
  int a_idx;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin a_idx <= 0; a_valid <= 1'b0; end
    else begin
      if (a_valid && a_ready) a_idx <= a_idx + 1;
      a_valid <= (!STALL || $urandom_range(3) != 0);
    end
  end
  always_comb begin
    int rb, rem, gi, i, k, per_blk;
    per_blk = M1 * G * KG;
    rb  = a_idx / per_blk;
    rem = a_idx % per_blk;
    if (ACT_PER_GROUP) begin
      gi = rem / (M1 * KG); rem = rem % (M1 * KG); i = rem / KG; k = rem % KG;
    end else begin
      i = rem / (G * KG); rem = rem % (G * KG); gi = rem / KG; k = rem % KG;
    end
    a_data = (rb < NB) ? 8'(A[rb * M1 + i][gi][k]) : '0;
  end

  // weight and bias drivers (repeat per row block)
  int w_idx, b_idx;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin w_idx <= 0; b_idx <= 0; w_valid <= 1'b0; b_valid <= 1'b0; end
    else begin
      if (w_valid && w_ready) w_idx <= w_idx + 1;
      if (b_valid && b_ready) b_idx <= b_idx + 1;
      w_valid <= (!STALL || $urandom_range(3) != 0);
      b_valid <= (!STALL || $urandom_range(1) != 0);
    end
  end
  always_comb begin
    int rem, gi, ct, k;
    rem = w_idx % (G * NT * KG);
    gi = rem / (NT * KG); rem = rem % (NT * KG); ct = rem / KG; k = rem % KG;
    for (int j = 0; j < M2; j++) w_data[j*WB +: WB] = WB'(W[gi][k][ct * M2 + j]);
    rem = b_idx % (G * NT);
    gi = rem / NT; ct = rem % NT;
    for (int j = 0; j < M2; j++) b_data[j*32 +: 32] = 32'(B[gi][ct * M2 + j]);
  end

  // output checker
  int got, cyc, first_cyc;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      got <= 0; checks <= 0; failures <= 0; done <= 1'b0; o_ready <= 1'b0; cyc <= 0;
      first_cyc <= -1;
    end else begin
      cyc <= cyc + 1;
      if (first_cyc < 0 && w_valid && w_ready) first_cyc <= cyc;
      o_ready <= (!STALL || $urandom_range(2) != 0);
      if (o_valid && o_ready && got < exp_q.size()) begin
        int nc, nf, ideal;
        nc = 1; nf = 0;
        if (int'(o_data) != exp_q[got]) begin
          nf = 1;
          if (failures < 5) $display("gemm mismatch %0d: got %0d exp %0d", got, o_data, exp_q[got]);
        end
        if (got + 1 == exp_q.size()) begin
          done <= 1'b1;
          if (!STALL) begin
            // ideal: NB*G*NT*KG beats, plus fill, pipeline and last-unit drain
            ideal = NB * G * NT * KG + M1 * KG * (ACT_PER_GROUP ? 1 : G) +
                    KG + M1 + M2 + M1 * N * (OUT_PER_GROUP ? 1 : G) + 16;
            nc += 1;
            if (cyc - first_cyc > ideal) begin
              nf += 1;
              $display("gemm too slow: %0d cycles, bound %0d", cyc - first_cyc, ideal);
            end
          end
        end
        checks <= checks + nc;
        failures <= failures + nf;
        got <= got + 1;
      end
    end
  end
endmodule
