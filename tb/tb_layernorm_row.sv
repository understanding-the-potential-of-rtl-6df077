// tb_layernorm_row: random gamma/beta and random rows (including one
// constant row) through layernorm_row; every output is compared with a
// real-valued LayerNorm computed here, allowing 1 LSB of error.
module tb_layernorm_row;
  localparam int D = 24, ROWS = 10, OF = 4;
  logic clk = 1'b0, rst_n = 1'b1;
  always #5 clk = !clk;

  logic signed [7:0] X [ROWS][D];
  logic signed [7:0] GM [D], BT [D];
  logic cfg_we;
  logic [$clog2(D)-1:0] cfg_addr;
  logic signed [7:0] cfg_gamma, cfg_beta;
  logic iv, ir, ov, orr;
  logic signed [7:0] od;
  int ii, oi;
  int checks = 0, failures = 0;
  logic go;

  layernorm_row #(.D(D), .OUT_FRAC(OF)) dut (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_gamma, .cfg_beta,
    .in_valid(iv), .in_ready(ir), .in_data(X[ii / D][ii % D]),
    .out_valid(ov), .out_ready(orr), .out_data(od));

  function automatic real ref_y(input int r, input int i);
    real m, v, y;
    m = 0.0; v = 0.0;
    for (int k = 0; k < D; k++) m += X[r][k];
    m /= D;
    for (int k = 0; k < D; k++) v += (X[r][k] - m) * (X[r][k] - m);
    v /= D;
    if (v == 0.0) y = 0.0;
    else y = (X[r][i] - m) / $sqrt(v) * (GM[i] / 64.0) * (2.0 ** OF);
    y = y + BT[i];
    if (y > 127.0) y = 127.0;
    if (y < -128.0) y = -128.0;
    return y;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin ii <= 0; iv <= 1'b0; oi <= 0; orr <= 1'b0; end
    else begin
      iv <= go && ($urandom_range(3) != 0) && (ii < ROWS * D - 1 || (ii == ROWS * D - 1 && !(iv && ir)));
      if (iv && ir) ii <= ii + 1;
      orr <= $urandom_range(2) != 0;
      if (ov && orr) begin
        real e;
        e = real'(od) - ref_y(oi / D, oi % D);
        checks++;
        if (e > 1.0 || e < -1.0) begin
          failures++;
          if (failures < 6) $display("row %0d i %0d got %0d exp %f", oi / D, oi % D, od, ref_y(oi / D, oi % D));
        end
        oi <= oi + 1;
      end
    end
  end

  initial begin
    go = 1'b0; cfg_we = 1'b0; cfg_addr = '0; cfg_gamma = '0; cfg_beta = '0;
    for (int i = 0; i < D; i++) begin
      GM[i] = 8'($urandom_range(100) + 20);
      BT[i] = 8'($urandom_range(40)) - 8'sd20;
    end
    for (int r = 0; r < ROWS; r++) for (int c = 0; c < D; c++)
      X[r][c] = (r == 3) ? 8'sd17 : (r == 5 ? 8'($urandom_range(255)) : 8'($urandom_range(60)) - 8'sd30);
    #1 rst_n = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < D; i++) begin
      @(negedge clk);
      cfg_we = 1'b1; cfg_addr = i[$clog2(D)-1:0]; cfg_gamma = GM[i]; cfg_beta = BT[i];
    end
    @(negedge clk) cfg_we = 1'b0;
    go = 1'b1;
    wait (oi == ROWS * D);
    repeat (2) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
