// tb_gpt2_layer: one GPT2-medium (355M) decoder layer at its full width in
// the W8A8 format (d = 1024, 16 heads, d_FFN = 4096, int8 weights, causal
// mask) on a 64-token prompt (the source design's GPT2 prefill experiment
// uses 128 tokens; 64 keeps the run within a few minutes); 8x16 arrays for
// the weight GEMMs, 8x8 for attention.
// The memory model serves X, weights and biases with random latency but no
// back-pressure, so the layer can run at its full rate. All 512 x 768 outputs must be written; the first
// ROWS_CHECKED token rows are compared bit for bit with the integer
// reference (K and V are computed in full, because every row needs them).
// The layer latency is checked against the pipeline model of the source
// design for one layer, T = l d^2/M_k + max(l d^2/M_k, l^2 d/M_a1,
// l d d_FFN/M_f1) cycles (the K/V projections, then the slowest stage of
// the overlapped rest). The model leaves out pipeline fill and drain, so
// the latency must lie between T and 1.05 T plus two blocks of FFN time
// (2 d d_FFN/m2 cycles: the first block reaching f1, the last leaving f2).
module tb_gpt2_layer
  import llm_pkg::*;
  import layer_tb_pkg::*;
;
  localparam int L = 64, D = 1024, H = 16, DFF = 4096, M2 = SA_M2, NRD = 15;
  localparam int ROWS_CHECKED = 2;
  logic clk = 1'b0, rst_n = 1'b1;
  always #5 clk = !clk;

  logic start, busy, done;
  logic [NRD-1:0][31:0] rd_base;
  rq_cfg_t [7:0] rq;
  logic [1:0] ln_we;
  logic [$clog2(D)-1:0] ln_addr;
  logic signed [7:0] ln_gamma, ln_beta;
  logic [NRD-1:0] rqv, rqr, rsv;
  logic [NRD-1:0][31:0] rqa;
  logic [NRD-1:0][511:0] rsd;
  logic wv, wr;
  logic [31:0] wa;
  logic [7:0] wd;
  int checks, failures, written;
  logic ref_ready;
  longint cyc = 0, t_start, t_done;

  transformer_layer #(.L(L), .D(D), .H(H), .DFF(DFF), .CAUSAL(1'b1), .WBITS(8)) dut (
    .clk, .rst_n, .start, .busy, .done, .rd_base, .wr_base(32'd0), .rq,
    .ln_we, .ln_addr, .ln_gamma, .ln_beta,
    .rd_req_valid(rqv), .rd_req_ready(rqr), .rd_req_addr(rqa),
    .rd_rsp_valid(rsv), .rd_rsp_data(rsd),
    .wr_valid(wv), .wr_ready(wr), .wr_addr(wa), .wr_data(wd));

  hbm_model #(.L(L), .D(D), .DFF(DFF), .M2(M2), .NRD(NRD), .BP(1'b0), .WBITS(8)) u_mem (
    .clk, .rst_n, .rd_req_valid(rqv), .rd_req_ready(rqr), .rd_req_addr(rqa),
    .rd_rsp_valid(rsv), .rd_rsp_data(rsd), .wr_ready(wr));

  layer_checker #(.L(L), .D(D), .H(H), .DFF(DFF), .CAUSAL(1'b1), .NLAYERS(1),
                  .ROWS_CHECKED(ROWS_CHECKED), .WBITS(8)) u_chk (
    .clk, .rst_n, .wr_valid(wv), .wr_ready(wr), .wr_addr(wa), .wr_data(wd),
    .rq, .checks, .failures, .written, .ref_ready);

  assign rd_base = '0;
  always_ff @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && written > 0 && written % (16 * D) == 0 && wv && wr)
      $display("cycle %0d: %0d rows written", cyc, written / D);
  end

  initial begin
    int c, f;
    start = 1'b0; ln_we = '0; ln_addr = '0; ln_gamma = '0; ln_beta = '0;
    #1 rst_n = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int w = 0; w < 2; w++) for (int i = 0; i < D; i++) begin
      @(negedge clk);
      ln_we = 2'(1 << w); ln_addr = i[$clog2(D)-1:0];
      ln_gamma = 8'(gammaval(w, i)); ln_beta = 8'(betaval(w, i));
    end
    @(negedge clk) ln_we = '0;
    wait (ref_ready);
    @(negedge clk) start = 1'b1;
    t_start = cyc;
    @(negedge clk) start = 1'b0;
    @(posedge done);
    t_done = cyc;
    repeat (5) @(posedge clk);
    c = checks + 1; f = failures;
    if (written != L * D) begin
      f++;
      $display("written %0d of %0d", written, L * D);
    end
    begin
      longint mk, ma, tq, tm;
      mk = longint'(SA_M1) * SA_M2;
      ma = longint'(SA_M1) * SA_M2_ATT;
      tq = longint'(L) * D * D / mk;
      tm = tq;
      if (longint'(L) * L * D / ma > tm) tm = longint'(L) * L * D / ma;
      if (longint'(L) * D * DFF / mk > tm) tm = longint'(L) * D * DFF / mk;
      $display("layer latency: %0d cycles, model %0d cycles", t_done - t_start, tq + tm);
      c++;
      if (t_done - t_start < tq + tm ||
          (t_done - t_start) * 100 > (tq + tm) * 105 + 200 * longint'(D) * DFF / SA_M2) begin
        f++;
        $display("latency outside [T, 1.05 T + 2 d d_FFN / m2]");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", c, f);
    $finish;
  end
  initial begin
    repeat (40000000) @(posedge clk);
    $display("watchdog expired: written %0d", written);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
