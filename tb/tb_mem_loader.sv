// tb_mem_loader: three loads against a memory model with in-order responses.
// Load 1 and 2 use random request back-pressure, random response latency and
// random output back-pressure and check every word and the repeat order.
// Load 3 uses a memory that accepts every request and answers after a fixed
// latency with the output always ready, and checks that the loader streams
// one word per cycle once the pipe is full (the loaders must keep the
// dataflow fed at full rate).
module tb_mem_loader;
  logic clk = 1'b0, rst_n = 1'b1;
  always #5 clk = !clk;
  localparam int DW = 16, LAT = 5;
  logic start, busy, req_valid, req_ready, rsp_valid, out_valid, out_ready;
  logic [31:0] base, words, repeats, req_addr;
  logic [DW-1:0] rsp_data, out_data;
  int checks = 0, failures = 0, cyc = 0, exp_idx, exp_words, exp_reps, exp_base;
  bit random_mode;

  mem_loader #(.DW(DW), .AW(32), .DEPTH(8)) dut (.clk, .rst_n, .start, .base, .words, .repeats,
    .busy, .req_valid, .req_ready, .req_addr, .rsp_valid, .rsp_data, .out_valid, .out_ready,
    .out_data);

  function automatic logic [DW-1:0] mem(input logic [31:0] a); return DW'(a * 2654435761); endfunction

  // in-order response pipe: each accepted request is answered at due time
  int due_q[$];
  logic [DW-1:0] dat_q[$];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      req_ready <= 1'b0; rsp_valid <= 1'b0; rsp_data <= '0; out_ready <= 1'b0;
    end else begin
      cyc <= cyc + 1;
      req_ready <= !random_mode || $urandom_range(2) != 0;
      out_ready <= !random_mode || $urandom_range(3) != 0;
      if (req_valid && req_ready) begin
        int d;
        d = cyc + (random_mode ? $urandom_range(12, 2) : LAT);
        if (due_q.size() > 0 && d < due_q[$]) d = due_q[$];
        due_q.push_back(d);
        dat_q.push_back(mem(req_addr));
      end
      rsp_valid <= 1'b0;
      if (due_q.size() > 0 && due_q[0] <= cyc) begin
        void'(due_q.pop_front());
        rsp_valid <= 1'b1;
        rsp_data <= dat_q.pop_front();
      end
      if (out_valid && out_ready) begin
        int a;
        a = exp_base + (exp_idx % exp_words);
        checks++;
        if (exp_idx >= exp_words * exp_reps || out_data != mem(32'(a))) begin
          failures++;
          if (failures < 5) $display("word %0d: got %h exp %h", exp_idx, out_data, mem(32'(a)));
        end
        exp_idx <= exp_idx + 1;
      end
    end
  end

  task automatic load(input int b, input int w, input int r, input bit rnd, input bit timed);
    int t0;
    random_mode = rnd;
    exp_base = b; exp_words = w; exp_reps = r; exp_idx = 0;
    @(posedge clk);
    start <= 1'b1; base <= 32'(b); words <= 32'(w); repeats <= 32'(r);
    @(posedge clk);
    start <= 1'b0;
    t0 = cyc;
    @(posedge clk);
    while (busy) @(posedge clk);
    checks++;
    if (exp_idx != w * r) begin
      failures++;
      $display("load of %0d x %0d delivered %0d", w, r, exp_idx);
    end
    if (timed) begin
      checks++;
      if (cyc - t0 > w * r + LAT + 6) begin
        failures++;
        $display("rate: %0d words took %0d cycles", w * r, cyc - t0);
      end
    end
  endtask

  initial begin
    start = 1'b0; base = '0; words = '0; repeats = '0; random_mode = 1'b1;
    #1 rst_n = 1'b0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    load(100, 37, 3, 1'b1, 1'b0);
    load(7, 1, 5, 1'b1, 1'b0);
    load(5000, 200, 2, 1'b0, 1'b1);
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
