// tb_transformer_layer: end-to-end test of the layer at reduced size
// (L = 16 tokens, D = 16, 2 heads, d_FFN = 32, 4x4 and 4x4 arrays), run
// for two consecutive layers on three instances: an encoder with int4
// weights (BERT-style W4A8), a causal decoder with int4 weights, and a
// causal decoder with int8 weights (GPT-style W8A8). Every output element is compared bit for bit with the integer
// reference model. It also counts how often each mechanism of the design
// happened and fails if one never did:
//   sync   - Q waiting at the score GEMM for the complete K/V buffers
//   kvbank - the K/V double buffer used its second bank (second layer)
//   overlap- score GEMM and FFN1 GEMM producing output in the same cycle
//   bp     - a loader held back by memory back-pressure
//   mask   - causal-mask entries zeroed in the softmax
//   resq   - the residual FIFO of region 2 holding data
//   pack   - beats through the DSP-packed int4 arrays
//   w8     - beats through the int8-weight (unpacked) arrays
module tb_transformer_layer
  import llm_pkg::*;
  import layer_tb_pkg::*;
;
  localparam int L = 16, D = 16, H = 2, DFF = 32, M1 = 4, M2 = 4, M2A = 4, NRD = 15;
  localparam int NLAYERS = 2;
  logic clk = 1'b0, rst_n = 1'b1;
  always #5 clk = !clk;

  int checks_total = 0, failures_total = 0;
  int n_sync = 0, n_kvbank = 0, n_overlap = 0, n_bp = 0, n_mask = 0, n_resq = 0, n_pack = 0, n_w8 = 0;
  logic [2:0] all_done;

  for (genvar inst = 0; inst < 3; inst++) begin : g_inst
    localparam bit CAUSAL = (inst != 0);
    localparam int WBITS = (inst == 2) ? 8 : 4;
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

    transformer_layer #(.L(L), .D(D), .H(H), .DFF(DFF), .M1(M1), .M2(M2), .M2A(M2A),
                        .CAUSAL(CAUSAL), .WBITS(WBITS)) dut (
      .clk, .rst_n, .start, .busy, .done, .rd_base, .wr_base(32'd0), .rq,
      .ln_we, .ln_addr, .ln_gamma, .ln_beta,
      .rd_req_valid(rqv), .rd_req_ready(rqr), .rd_req_addr(rqa),
      .rd_rsp_valid(rsv), .rd_rsp_data(rsd),
      .wr_valid(wv), .wr_ready(wr), .wr_addr(wa), .wr_data(wd));

    hbm_model #(.L(L), .D(D), .DFF(DFF), .M2(M2), .NRD(NRD), .WBITS(WBITS)) u_mem (
      .clk, .rst_n, .rd_req_valid(rqv), .rd_req_ready(rqr), .rd_req_addr(rqa),
      .rd_rsp_valid(rsv), .rd_rsp_data(rsd), .wr_ready(wr));

    layer_checker #(.L(L), .D(D), .H(H), .DFF(DFF), .CAUSAL(CAUSAL), .NLAYERS(NLAYERS),
                    .ROWS_CHECKED(L), .WBITS(WBITS)) u_chk (
      .clk, .rst_n, .wr_valid(wv), .wr_ready(wr), .wr_addr(wa), .wr_data(wd),
      .rq, .checks, .failures, .written, .ref_ready);

    assign rd_base = '0;

    initial begin
      start = 1'b0; ln_we = '0; ln_addr = '0; ln_gamma = '0; ln_beta = '0;
      all_done[inst] = 1'b0;
      wait (rst_n === 1'b0);
      wait (rst_n === 1'b1);
      for (int w = 0; w < 2; w++) for (int i = 0; i < D; i++) begin
        @(negedge clk);
        ln_we = 2'(1 << w); ln_addr = i[$clog2(D)-1:0];
        ln_gamma = 8'(gammaval(w, i)); ln_beta = 8'(betaval(w, i));
      end
      @(negedge clk) ln_we = '0;
      wait (ref_ready);
      for (int n = 0; n < NLAYERS; n++) begin
        @(negedge clk) start = 1'b1;
        @(negedge clk) start = 1'b0;
        @(posedge done);
      end
      repeat (5) @(posedge clk);
      all_done[inst] = 1'b1;
    end

    // mechanism counters
    always_ff @(posedge clk) if (rst_n) begin
      if (dut.u_gemm_a1.a_valid && !dut.u_gemm_a1.a_ready && !dut.u_kbuf.bank_full[dut.u_kbuf.rbank]) n_sync++;
      if (dut.u_kbuf.we && dut.u_kbuf.wbank) n_kvbank++;
      if (dut.s_v && dut.h_v) n_overlap++;
      if (|(rqv & ~rqr)) n_bp++;
      if (dut.u_sm.b1_v && CAUSAL && dut.u_sm.b1_j > dut.u_sm.q_r[dut.u_sm.bbank]) n_mask++;
      if (dut.u_res.count > 0) n_resq++;
      if (dut.u_gemm_q.s1_v && WBITS == 4) n_pack++;
      if (dut.u_gemm_q.s1_v && WBITS == 8) n_w8++;
    end
  end

  initial begin
    #1 rst_n = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (&all_done);
    checks_total = g_inst[0].checks + g_inst[1].checks + g_inst[2].checks;
    failures_total = g_inst[0].failures + g_inst[1].failures + g_inst[2].failures;
    // every written element was checked, for both layers
    checks_total += 3;
    if (g_inst[0].written != NLAYERS * L * D) failures_total++;
    if (g_inst[1].written != NLAYERS * L * D) failures_total++;
    if (g_inst[2].written != NLAYERS * L * D) failures_total++;
    $display("mechanisms: sync=%0d kvbank=%0d overlap=%0d bp=%0d mask=%0d resq=%0d pack=%0d w8=%0d",
             n_sync, n_kvbank, n_overlap, n_bp, n_mask, n_resq, n_pack, n_w8);
    checks_total += 8;
    if (n_w8 == 0) failures_total++;
    if (n_sync == 0) failures_total++;
    if (n_kvbank == 0) failures_total++;
    if (n_overlap == 0) failures_total++;
    if (n_bp == 0) failures_total++;
    if (n_mask == 0) failures_total++;
    if (n_resq == 0) failures_total++;
    if (n_pack == 0) failures_total++;
    $display("TB_RESULT checks=%0d failures=%0d", checks_total, failures_total);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog expired: written %0d %0d %0d", g_inst[0].written, g_inst[1].written,
             g_inst[2].written);
    $display("TB_RESULT checks=%0d failures=%0d", g_inst[0].checks + g_inst[1].checks +
             g_inst[2].checks, g_inst[0].failures + g_inst[1].failures + g_inst[2].failures + 1);
    $finish;
  end
endmodule
