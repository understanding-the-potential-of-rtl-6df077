// tb_gemm_engine: self-checking test of gemm_engine in the three ways the
// layer uses it: a packed-int4 weight GEMM with bias, the score GEMM
// (all heads' queries buffered, one output unit per head) and the
// probability x V GEMM (one activation block per head, heads concatenated
// on output). Each runs once with random stalls and back-pressure and the
// weight GEMM also once at full rate with a cycle-count check.
module tb_gemm_engine;
  logic clk = 1'b0, rst_n = 1'b1;
  always #5 clk = !clk;
  int c[4], f[4];
  logic d[4];

  gemm_harness #(.M1(4), .M2(4), .PACK(1), .WB(4), .KG(12), .G(1), .N(8), .NB(3),
                 .HAS_BIAS(1), .STALL(1)) h_aw (.clk, .rst_n, .checks(c[0]), .failures(f[0]), .done(d[0]));
  gemm_harness #(.M1(4), .M2(4), .PACK(1), .WB(4), .KG(24), .G(1), .N(8), .NB(3),
                 .HAS_BIAS(1), .STALL(0)) h_rate (.clk, .rst_n, .checks(c[1]), .failures(f[1]), .done(d[1]));
  gemm_harness #(.M1(4), .M2(4), .PACK(0), .WB(8), .KG(8), .G(2), .N(8), .NB(2),
                 .ACT_PER_GROUP(0), .OUT_PER_GROUP(1), .HAS_BIAS(0), .STALL(1))
               h_a1 (.clk, .rst_n, .checks(c[2]), .failures(f[2]), .done(d[2]));
  gemm_harness #(.M1(4), .M2(4), .PACK(0), .WB(8), .KG(8), .G(3), .N(4), .NB(2),
                 .ACT_PER_GROUP(1), .OUT_PER_GROUP(0), .HAS_BIAS(0), .STALL(1))
               h_a2 (.clk, .rst_n, .checks(c[3]), .failures(f[3]), .done(d[3]));

  int checks, failures;
  initial begin
    #1 rst_n = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    wait (d[0] && d[1] && d[2] && d[3]);
    repeat (2) @(posedge clk);
    $display("per-config checks %0d %0d %0d %0d", c[0], c[1], c[2], c[3]);
    checks = c[0] + c[1] + c[2] + c[3];
    failures = f[0] + f[1] + f[2] + f[3];
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c[0] + c[1] + c[2] + c[3],
             f[0] + f[1] + f[2] + f[3] + 1);
    $finish;
  end
endmodule
