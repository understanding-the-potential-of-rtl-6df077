// tb_residual_add: joins two int8 streams with independent random valid
// gaps and random output back-pressure, and checks that each output is the
// saturating sum of the matching pair, in order, with no pair lost or
// repeated. A second phase with both inputs always valid and the output
// always ready checks one element per cycle.
module tb_residual_add;
  import llm_pkg::*;
  logic clk = 1'b0, rst_n = 1'b1;
  always #5 clk = !clk;
  localparam int N = 600;
  logic av, ar, bv, br, ov, orr;
  logic signed [7:0] ad, bd, od;
  int ai, bi, oi, checks = 0, failures = 0, full_rate = 0, t0, t1, cyc = 0;

  residual_add dut (.clk, .rst_n, .a_valid(av), .a_ready(ar), .a_data(ad),
    .b_valid(bv), .b_ready(br), .b_data(bd), .o_valid(ov), .o_ready(orr), .o_data(od));

  function automatic logic signed [7:0] va(input int i); return 8'(i * 37 + (i >> 3)); endfunction
  function automatic logic signed [7:0] vb(input int i); return 8'(i * 91 + 5); endfunction
  assign ad = va(ai);
  assign bd = vb(bi);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin ai <= 0; bi <= 0; oi <= 0; av <= 0; bv <= 0; orr <= 0; end
    else begin
      cyc <= cyc + 1;
      av  <= (ai + ((av && ar) ? 1 : 0)) < N && (full_rate != 0 || $urandom_range(2) != 0);
      bv  <= (bi + ((bv && br) ? 1 : 0)) < N && (full_rate != 0 || $urandom_range(2) != 0);
      orr <= full_rate != 0 || $urandom_range(3) != 0;
      if (av && ar) ai <= ai + 1;
      if (bv && br) bi <= bi + 1;
      if (ov && orr) begin
        checks++;
        if (od != sat_add8(va(oi), vb(oi))) begin
          failures++;
          if (failures < 5) $display("item %0d got %0d", oi, od);
        end
        oi <= oi + 1;
      end
    end
  end

  initial begin
    #1 rst_n = 1'b0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    wait (oi == N / 2);
    full_rate = 1;
    @(posedge clk);
    t0 = cyc;
    wait (oi == N);
    t1 = cyc;
    // the last N/2 - 4 items at one per cycle (a few cycles to refill)
    checks++;
    if (t1 - t0 > N / 2 + 4) begin
      failures++;
      $display("rate: %0d items took %0d cycles", N / 2, t1 - t0);
    end
    repeat (3) @(posedge clk);
    checks++;
    if (ov) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
