// tb_stream_fifo: pushes a counting sequence through a 5-deep FIFO with
// random valid and ready, checks order, that it fills to exactly DEPTH
// (in_ready low when full) and that count tracks occupancy.
module tb_stream_fifo;
  logic clk = 1'b0, rst_n = 1'b1;
  always #5 clk = !clk;
  localparam int DEPTH = 5, N = 400;
  logic iv, ir, ov, orr;
  logic [7:0] id, od;
  logic [2:0] cnt;
  int ii, oi, occ, checks = 0, failures = 0, saw_full = 0;
  logic phase_fill;

  stream_fifo #(.W(8), .DEPTH(DEPTH)) dut (.clk, .rst_n, .in_valid(iv), .in_ready(ir), .in_data(id),
    .out_valid(ov), .out_ready(orr), .out_data(od), .count(cnt));
  assign id = 8'(ii);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin ii <= 0; oi <= 0; iv <= 1'b0; orr <= 1'b0; occ <= 0; end
    else begin
      iv  <= (ii < N) && $urandom_range(2) != 0;
      orr <= phase_fill ? 1'b0 : ($urandom_range(2) != 0);
      if (iv && ir) ii <= ii + 1;
      occ <= occ + ((iv && ir) ? 1 : 0) - ((ov && orr) ? 1 : 0);
      checks++;
      if (int'(cnt) != occ || ir != (occ < DEPTH) || ov != (occ > 0)) begin
        failures++;
        if (failures < 5) $display("count %0d occ %0d ir %0b ov %0b", cnt, occ, ir, ov);
      end
      if (occ == DEPTH) saw_full++;
      if (ov && orr) begin
        checks++;
        if (od != 8'(oi)) begin
          failures++;
          if (failures < 5) $display("order: got %0d exp %0d", od, 8'(oi));
        end
        oi <= oi + 1;
      end
    end
  end

  initial begin
    phase_fill = 1'b1;
    #1 rst_n = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (30) @(posedge clk);
    phase_fill = 1'b0;
    wait (oi == N);
    checks++;
    if (saw_full == 0) failures++;
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
