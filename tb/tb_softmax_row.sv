// tb_softmax_row: feeds random score rows to a plain and a causal softmax
// unit and compares each output probability (x128) with a real-valued
// softmax computed here, allowing 2 LSB of error. Masked entries must be 0.
// Also checks the steady-state rate: with no back-pressure the plain unit
// must take fewer than L + 60 cycles per row.
module tb_softmax_row;
  localparam int L = 16, M1 = 2, H = 2, NRB = L / M1, ROWS = NRB * H * M1 * 2;
  logic clk = 1'b0, rst_n = 1'b1;
  always #5 clk = !clk;

  logic signed [7:0] S [ROWS][L];
  logic iv, ir[2], ov[2], orr[2];
  logic signed [7:0] od[2];
  int ii, oi[2];
  int checks = 0, failures = 0;
  logic stall_out;
  int t_start, t_end;

  softmax_row #(.L(L), .M1(M1), .H(H), .CAUSAL(0), .IN_FRAC(4)) u_p (
    .clk, .rst_n, .in_valid(iv && ir[1]), .in_ready(ir[0]), .in_data(S[ii / L][ii % L]),
    .out_valid(ov[0]), .out_ready(orr[0]), .out_data(od[0]));
  softmax_row #(.L(L), .M1(M1), .H(H), .CAUSAL(1), .IN_FRAC(4)) u_c (
    .clk, .rst_n, .in_valid(iv && ir[0]), .in_ready(ir[1]), .in_data(S[ii / L][ii % L]),
    .out_valid(ov[1]), .out_ready(orr[1]), .out_data(od[1]));

  function automatic real ref_p(input int causal, input int row, input int j);
    int q, rowi;
    real mx, sum;
    rowi = row % (NRB * H * M1);
    q = (rowi / (H * M1)) * M1 + (rowi % M1);
    if (causal && j > q) return 0.0;
    mx = -1000.0;
    for (int k = 0; k < L; k++) if (!(causal && k > q) && S[row][k] / 16.0 > mx) mx = S[row][k] / 16.0;
    sum = 0.0;
    for (int k = 0; k < L; k++) if (!(causal && k > q)) sum += $exp(S[row][k] / 16.0 - mx);
    return 128.0 * $exp(S[row][j] / 16.0 - mx) / sum;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ii <= 0; iv <= 1'b0; oi[0] <= 0; oi[1] <= 0; orr[0] <= 1'b0; orr[1] <= 1'b0;
    end else begin
      iv <= (stall_out ? ($urandom_range(3) != 0) : 1'b1) && (ii < ROWS * L - 1 || (ii == ROWS * L - 1 && !(iv && ir[0] && ir[1])));
      if (iv && ir[0] && ir[1]) ii <= ii + 1;
      for (int m = 0; m < 2; m++) begin
        orr[m] <= stall_out ? ($urandom_range(2) != 0) : 1'b1;
        if (ov[m] && orr[m]) begin
          real r, e;
          r = ref_p(m, oi[m] / L, oi[m] % L);
          e = real'(od[m]) - (r > 127.0 ? 127.0 : r);
          checks++;
          if (e > 2.0 || e < -2.0) begin
            failures++;
            if (failures < 6) $display("causal=%0d row %0d j %0d got %0d exp %f", m, oi[m] / L, oi[m] % L, od[m], r);
          end
          oi[m] <= oi[m] + 1;
        end
      end
    end
  end

  initial begin
    for (int r = 0; r < ROWS; r++) for (int c = 0; c < L; c++) S[r][c] = 8'($urandom);
    stall_out = 1'b1;
    #1 rst_n = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (oi[0] >= ROWS * L / 2);
    // second half: full rate, measure the plain unit's row rate
    stall_out = 1'b0;
    wait (oi[0] >= ROWS * L / 2 + 4 * L);
    t_start = $time;
    wait (oi[0] >= ROWS * L / 2 + 12 * L);
    t_end = $time;
    checks++;
    if ((t_end - t_start) / 10 > 8 * (L + 60)) begin
      failures++;
      $display("softmax rate: %0d cycles for 8 rows", (t_end - t_start) / 10);
    end
    wait (oi[0] == ROWS * L && oi[1] == ROWS * L);
    repeat (2) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
