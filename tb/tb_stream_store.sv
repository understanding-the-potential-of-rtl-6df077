// tb_stream_store: streams two blocks of data into the store with random
// input gaps and random write back-pressure, and checks every write's
// address and data, that done pulses once per block and that busy falls
// after the last write. A third block with no gaps and no back-pressure
// checks one write per cycle.
module tb_stream_store;
  logic clk = 1'b0, rst_n = 1'b1;
  always #5 clk = !clk;
  logic start, busy, done, in_valid, in_ready, wr_valid, wr_ready;
  logic [31:0] base, count, wr_addr;
  logic [7:0] in_data, wr_data;
  int checks = 0, failures = 0, cyc = 0, sent, wrote, dones = 0, eb, en;
  bit rnd;

  stream_store #(.DW(8), .AW(32)) dut (.clk, .rst_n, .start, .base, .count, .busy, .done,
    .in_valid, .in_ready, .in_data, .wr_valid, .wr_ready, .wr_addr, .wr_data);

  assign in_data = 8'(sent * 13 + 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin in_valid <= 1'b0; wr_ready <= 1'b0; end
    else begin
      cyc <= cyc + 1;
      if (done) dones <= dones + 1;
      in_valid <= (sent + ((in_valid && in_ready) ? 1 : 0)) < en && (!rnd || $urandom_range(2) != 0);
      wr_ready <= !rnd || $urandom_range(2) != 0;
      if (in_valid && in_ready) sent <= sent + 1;
      if (wr_valid && wr_ready) begin
        checks++;
        if (wr_addr != 32'(eb + wrote) || wr_data != 8'(wrote * 13 + 1)) begin
          failures++;
          if (failures < 5) $display("write %0d: addr %0d data %0d", wrote, wr_addr, wr_data);
        end
        wrote <= wrote + 1;
      end
    end
  end

  task automatic block(input int b, input int n, input bit r);
    int t0, d0;
    rnd = r; eb = b; en = n; sent = 0; wrote = 0; d0 = dones;
    @(posedge clk);
    start <= 1'b1; base <= 32'(b); count <= 32'(n);
    @(posedge clk);
    start <= 1'b0;
    t0 = cyc;
    @(posedge clk);
    while (busy) @(posedge clk);
    @(posedge clk);
    checks += 2;
    if (wrote != n) begin failures++; $display("wrote %0d of %0d", wrote, n); end
    if (dones != d0 + 1) begin failures++; $display("done pulses %0d", dones - d0); end
    if (!r) begin
      checks++;
      if (cyc - t0 > n + 4) begin failures++; $display("rate: %0d writes in %0d cycles", n, cyc - t0); end
    end
  endtask

  initial begin
    start = 1'b0; base = '0; count = '0; rnd = 1'b1; sent = 0; wrote = 0; en = 0; eb = 0;
    #1 rst_n = 1'b0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    block(1000, 150, 1'b1);
    block(3, 1, 1'b1);
    block(64, 300, 1'b0);
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
