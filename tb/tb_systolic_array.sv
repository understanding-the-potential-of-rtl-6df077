// tb_systolic_array: runs the output-stationary array in two shapes, a
// packed int4 one (two columns per PE) and a plain 8-bit-weight one, each
// with back-to-back tiles, and reports the combined result.
module tb_systolic_array;
  logic clk = 1'b0, rst_n = 1'b1, go = 1'b0;
  always #5 clk = !clk;
  logic f0, f1;
  int c0, c1, e0, e1;

  sa_harness #(.M1(3), .M2(4), .PACK(1'b1), .WB(4), .K(5), .T(4)) h0 (
    .clk, .rst_n, .go, .finished(f0), .checks(c0), .failures(e0));
  sa_harness #(.M1(4), .M2(3), .PACK(1'b0), .WB(8), .K(7), .T(3)) h1 (
    .clk, .rst_n, .go, .finished(f1), .checks(c1), .failures(e1));

  initial begin
    #1 rst_n = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    go = 1'b1;
    wait (f0 && f1);
    @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1, e0 + e1);
    $finish;
  end
  initial begin
    repeat (2000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1, e0 + e1 + 1);
    $finish;
  end
endmodule
