// tb_dsp_pack_mul: exhaustive check of the packed multiply: every int8
// activation against every pair of int4 weights (2^16 cases), each product
// compared with the plain product.
module tb_dsp_pack_mul;
  logic signed [7:0] a;
  logic signed [3:0] w0, w1;
  logic signed [11:0] p0, p1;
  int checks = 0, failures = 0;

  dsp_pack_mul dut (.a, .w0, .w1, .p0, .p1);

  initial begin
    for (int ia = -128; ia < 128; ia++)
      for (int i0 = -8; i0 < 8; i0++)
        for (int i1 = -8; i1 < 8; i1++) begin
          a = 8'(ia); w0 = 4'(i0); w1 = 4'(i1);
          #1;
          checks += 2;
          if (int'(p0) != ia * i0) failures++;
          if (int'(p1) != ia * i1) begin
            failures++;
            if (failures < 5) $display("a=%0d w1=%0d got %0d", ia, i1, p1);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
