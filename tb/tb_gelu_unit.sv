// tb_gelu_unit: sends all 256 int8 codes (twice, with random gaps and
// back-pressure) through gelu_unit and compares each result with exact
// GeLU computed here in real arithmetic, allowing 1 LSB. A third pass at
// full rate checks one result per cycle.
module tb_gelu_unit;
  logic clk = 1'b0, rst_n = 1'b1;
  always #5 clk = !clk;
  logic iv, ir, ov, orr, stall;
  logic signed [7:0] idata, od;
  int ii, oi, checks = 0, failures = 0, t0, t1;
  localparam int N = 768;

  gelu_unit #(.FRAC(4)) dut (.clk, .rst_n, .in_valid(iv), .in_ready(ir), .in_data(idata),
                             .out_valid(ov), .out_ready(orr), .out_data(od));
  assign idata = 8'(ii);

  function automatic real gelu_ref(input int code);
    real x, y;
    x = code / 16.0;
    y = 0.5 * x * (1.0 + $tanh(0.7978845608 * (x + 0.044715 * x * x * x)));
    y = y * 16.0;
    if (y > 127.0) y = 127.0;
    return y;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin ii <= 0; oi <= 0; iv <= 1'b0; orr <= 1'b0; end
    else begin
      if (iv && ir) ii <= ii + 1;
      iv  <= (ii + ((iv && ir) ? 1 : 0) < N) && (!stall || $urandom_range(3) != 0);
      orr <= !stall || $urandom_range(2) != 0;
      if (ov && orr) begin
        real e;
        e = real'(od) - gelu_ref(int'($signed(8'(oi))));
        checks++;
        if (e > 1.0 || e < -1.0) begin
          failures++;
          if (failures < 6) $display("x=%0d got %0d exp %f", $signed(8'(oi)), od, gelu_ref(int'($signed(8'(oi)))));
        end
        oi <= oi + 1;
      end
    end
  end

  initial begin
    stall = 1'b1;
    #1 rst_n = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (oi == 512);
    stall = 1'b0;
    @(posedge clk);
    t0 = $time;
    wait (oi == N);
    t1 = $time;
    checks++;
    if ((t1 - t0) / 10 > 256 + 4) begin
      failures++;
      $display("gelu rate: %0d cycles for 256", (t1 - t0) / 10);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
