// tb_kv_buffer: writes two random L x D matrices (one per bank) into a K-mode
// and a V-mode kv_buffer and checks every word read back against the read
// order the attention GEMMs expect. Random gaps on input and output.
module tb_kv_buffer;
  localparam int L = 8, D = 8, H = 2, M1 = 4, M2 = 4, DK = D / H, NMAT = 3;
  logic clk = 1'b0, rst_n = 1'b1;
  always #5 clk = !clk;

  logic [7:0] X [NMAT][L][D];
  logic iv, ir[2], ov[2], orr[2];
  logic [M2*8-1:0] od[2];
  logic [1:0] bf[2];
  logic [7:0] idata;
  int ii, oi[2];
  int checks = 0, failures = 0;

  kv_buffer #(.L(L), .D(D), .H(H), .M1(M1), .M2(M2), .MODE(0)) u_k (
    .clk, .rst_n, .in_valid(iv && ir[1]), .in_ready(ir[0]), .in_data(idata),
    .out_valid(ov[0]), .out_ready(orr[0]), .out_data(od[0]), .bank_full(bf[0]));
  kv_buffer #(.L(L), .D(D), .H(H), .M1(M1), .M2(M2), .MODE(1)) u_v (
    .clk, .rst_n, .in_valid(iv && ir[0]), .in_ready(ir[1]), .in_data(idata),
    .out_valid(ov[1]), .out_ready(orr[1]), .out_data(od[1]), .bank_full(bf[1]));

  // both buffers accept in lock-step (identical state)
  assign idata = (ii < NMAT * L * D) ? X[ii / (L*D)][(ii / D) % L][ii % D] : 8'd0;

  function automatic logic [M2*8-1:0] expect_word(input int mode, input int idx);
    int m, rem, g, ct, k;
    logic [M2*8-1:0] w;
    int nct, nk;
    nct = mode ? DK / M2 : L / M2;
    nk  = mode ? L : DK;
    m   = idx / ((L / M1) * H * nct * nk);
    rem = idx % (H * nct * nk);
    g   = rem / (nct * nk); rem = rem % (nct * nk);
    ct  = rem / nk; k = rem % nk;
    for (int j = 0; j < M2; j++)
      w[j*8 +: 8] = mode ? X[m][k][g*DK + ct*M2 + j] : X[m][ct*M2 + j][g*DK + k];
    return w;
  endfunction

  localparam int WORDS = (L / M1) * H * (L / M2) * DK;  // same count for both modes

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ii <= 0; iv <= 1'b0; oi[0] <= 0; oi[1] <= 0; orr[0] <= 1'b0; orr[1] <= 1'b0;
    end else begin
      iv <= ($urandom_range(3) != 0) && (ii < NMAT * L * D);
      if (iv && ir[0] && ir[1]) ii <= ii + 1;
      for (int m = 0; m < 2; m++) begin
        orr[m] <= $urandom_range(2) != 0;
        if (ov[m] && orr[m]) begin
          checks++;
          if (od[m] !== expect_word(m, oi[m])) begin
            failures++;
            if (failures < 5) $display("mode %0d word %0d got %h exp %h", m, oi[m], od[m], expect_word(m, oi[m]));
          end
          oi[m] <= oi[m] + 1;
        end
      end
    end
  end

  // hold the V buffer's write in step with K: gate K's input on V's ready too
  initial begin
    for (int m = 0; m < NMAT; m++) for (int r = 0; r < L; r++) for (int c = 0; c < D; c++)
      X[m][r][c] = 8'($urandom);
    #1 rst_n = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (oi[0] == NMAT * WORDS && oi[1] == NMAT * WORDS);
    repeat (2) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (50000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
