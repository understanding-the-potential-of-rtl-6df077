// sa_harness: drives one systolic_array configuration with T back-to-back
// tiles of K beats (random int8 activations, random weights and biases),
// then checks every captured output against a plain integer GEMM and checks
// that PE (i,c) finishes tile t exactly at cycle t*K + K + i + c after the
// first beat, i.e. one beat per cycle with no gap between tiles.
module sa_harness #(
  parameter int unsigned M1 = 3,
  parameter int unsigned M2 = 4,
  parameter bit          PACK = 1'b1,
  parameter int unsigned WB = 4,
  parameter int unsigned K = 5,
  parameter int unsigned T = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  logic go,
  output logic finished,
  output int   checks,
  output int   failures
);
  localparam int unsigned NC = PACK ? 2 : 1;
  localparam int unsigned PC = M2 / NC;
  localparam int unsigned TAW = 8;

  logic [M1-1:0][7:0]    a_vec;
  logic                  v, first, last;
  logic [TAW-1:0]        taddr;
  logic [M2*WB-1:0]      w_vec;
  logic [M2*32-1:0]      b_vec;
  logic [M1-1:0][PC-1:0] cap_valid;
  logic [TAW-1:0]        cap_taddr [M1][PC];
  logic [NC*32-1:0]      cap_data  [M1][PC];

  systolic_array #(.M1(M1), .M2(M2), .PACK(PACK), .WB(WB), .TAW(TAW)) dut (
    .clk, .rst_n, .a_vec, .v, .first, .last, .taddr, .w_vec, .b_vec,
    .cap_valid, .cap_taddr, .cap_data);

  int av [T][K][M1];
  int wvv [T][K][M2];
  int bv [T][M2];
  int refo [T][M1][M2];
  int seen [T][M1][PC];
  int cyc, beat;

  initial begin
    for (int t = 0; t < T; t++) begin
      for (int n = 0; n < M2; n++) bv[t][n] = $urandom_range(2000) - 1000;
      for (int k = 0; k < K; k++) begin
        for (int i = 0; i < M1; i++) av[t][k][i] = $urandom_range(255) - 128;
        for (int n = 0; n < M2; n++) wvv[t][k][n] = $urandom_range((1 << WB) - 1) - (1 << (WB - 1));
      end
      for (int i = 0; i < M1; i++)
        for (int n = 0; n < M2; n++) begin
          refo[t][i][n] = bv[t][n];
          for (int k = 0; k < K; k++) refo[t][i][n] += av[t][k][i] * wvv[t][k][n];
          seen[t][i][n / NC] = 0;
        end
    end
  end

  // stimulus: beat b of the whole run is tile b/K, step b%K
  always_comb begin
    int t, k;
    t = beat / K; k = beat % K;
    v = go && beat < T * K;
    first = v && k == 0;
    last  = v && k == K - 1;
    taddr = TAW'(t);
    a_vec = '0; w_vec = '0; b_vec = '0;
    if (v) begin
      for (int i = 0; i < M1; i++) a_vec[i] = 8'(av[t][k][i]);
      for (int n = 0; n < M2; n++) begin
        w_vec[n*WB +: WB] = WB'(wvv[t][k][n]);
        b_vec[n*32 +: 32] = 32'(bv[t][n]);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      beat <= 0; cyc <= 0; checks <= 0; failures <= 0; finished <= 1'b0;
    end else if (go) begin
      int nc, nf;
      nc = 0; nf = 0;
      if (beat < T * K) beat <= beat + 1;
      cyc <= cyc + 1;
      for (int i = 0; i < M1; i++)
        for (int c = 0; c < PC; c++)
          if (cap_valid[i][c]) begin
            int t;
            t = int'(cap_taddr[i][c]);
            nc++;
            if (t >= T || cyc != t * int'(K) + int'(K) + i + c) begin
              nf++;
              $display("sa M1=%0d M2=%0d: PE(%0d,%0d) tile %0d at cycle %0d", M1, M2, i, c, t, cyc);
            end else begin
              seen[t][i][c]++;
              for (int n = 0; n < NC; n++) begin
                nc++;
                if ($signed(cap_data[i][c][n*32 +: 32]) != refo[t][i][c*NC+n]) begin
                  nf++;
                  if (failures < 5)
                    $display("sa PE(%0d,%0d) col %0d tile %0d got %0d exp %0d", i, c, n, t,
                             $signed(cap_data[i][c][n*32 +: 32]), refo[t][i][c*NC+n]);
                end
              end
            end
          end
      if (cyc == T * K + M1 + PC + 4) begin
        for (int t = 0; t < T; t++)
          for (int i = 0; i < M1; i++)
            for (int c = 0; c < PC; c++) begin
              nc++;
              if (seen[t][i][c] != 1) nf++;
            end
        finished <= 1'b1;
      end
      checks <= checks + nc;
      failures <= failures + nf;
    end
  end
endmodule
