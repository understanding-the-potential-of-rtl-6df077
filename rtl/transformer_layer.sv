// transformer_layer: spatial (dataflow) accelerator for one post-LayerNorm
// Transformer encoder layer, with every operator given its own hardware.
//
// Data path, in three regions (one per die of the target FPGA):
//  Region 0: loaders L_Q and L_KV read the layer input X (L x D int8) from
//            off-chip memory; three W4A8 GEMMs (8x16 arrays) compute
//            Q = X Wq + bq, K = X Wk + bk, V = X Wv + bv.
//  Region 1: K and V are stored in double-buffered on-chip memories
//            (kv_buffer, whose read side is L_K / L_V). For each block of
//            8 queries and each head, the score GEMM (8x8) computes Q K^T,
//            softmax_row (with optional causal mask) turns scores into
//            probabilities, and the second attention GEMM (8x8) multiplies
//            them by V; heads are concatenated. The projection GEMM
//            (8x16) follows, then LayerNorm, then the residual add with X,
//            which loader L_I fetches a second time from memory.
//  Region 2: FFN1 GEMM (8x16), GeLU, FFN2 GEMM (8x16), LayerNorm, and the
//            residual add with the region-1 result, carried by a deep FIFO.
//            The result is written back to memory (stream_store).
// Operators are connected by valid/ready streams of int8 elements in
// row-major (token, feature) order; only K and V are buffered whole. Q and
// the attention path wait for the complete K and V, which is the one
// synchronisation point of the layer; everything after it overlaps.
//
// Off-chip memory: NRD read ports, one per loader, each a request/response
// port (see mem_loader), and one write port. Port numbering:
//   0 L_Q, 1 L_KV, 2 L_I (8-bit words, X row-major);
//   3..8 weights of q, k, v, p, f1, f2 (words of M2 WBITS-bit weights, see
//        gemm_engine for the order); 9..14 biases of q, k, v, p, f1, f2
//        (M2 x int32).
// Each loader reads from rd_base[port]. rq[0..7] are the requantisation
// settings of q, k, v, score, context, p, f1, f2. LayerNorm gammas/betas are
// written through ln_we (bit 0: first LayerNorm, bit 1: second),
// ln_addr, ln_gamma and ln_beta.
// A layer starts with a start pulse while busy is low; done pulses when the
// last output element has been written. Running a model means running the
// layer N times with new weight addresses, as the source design does.
//
// WBITS selects the weight format of the six weight GEMMs: 4 (W4A8, two
// MACs per multiply, the default and the BERT setting) or 8 (W8A8, one MAC
// per multiply, the GPT setting); the attention GEMMs are always int8.
//
// Follows the source design: the operator graph, the region split, the
// FIFO/double-buffer choice, the array shapes and the quantisation. This
// design's own: the stream protocol, FIFO depths, memory ports and data
// layouts, the integer non-linear units and the requantisation points. The
// order LayerNorm-then-add follows the layer diagram; the residual FIFO
// depth (RES_DEPTH) is sized so the FFN path can never starve it.
module transformer_layer
  import llm_pkg::*;
#(
  parameter int unsigned L         = SEQ_LEN,
  parameter int unsigned D         = D_MODEL,
  parameter int unsigned H         = N_HEADS,
  parameter int unsigned DFF       = D_FFN,
  parameter int unsigned M1        = SA_M1,
  parameter int unsigned M2        = SA_M2,
  parameter int unsigned M2A       = SA_M2_ATT,
  parameter bit          CAUSAL    = 1'b0,
  parameter int unsigned WBITS     = W_BITS,   // weight width of the weight GEMMs: 4 or 8
  parameter int unsigned XFIFO     = 32,
  parameter int unsigned RES_DEPTH = 4 * M1 * D,
  parameter int unsigned NRD       = 15,
  parameter int unsigned MDW       = 512,
  parameter int unsigned AW        = 32
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // control
  input  logic                       start,
  output logic                       busy,
  output logic                       done,
  input  logic [NRD-1:0][AW-1:0]     rd_base,
  input  logic [AW-1:0]              wr_base,
  input  rq_cfg_t [7:0]              rq,
  // LayerNorm parameters
  input  logic [1:0]                 ln_we,
  input  logic [$clog2(D)-1:0]       ln_addr,
  input  logic signed [7:0]          ln_gamma,
  input  logic signed [7:0]          ln_beta,
  // off-chip memory read ports
  output logic [NRD-1:0]             rd_req_valid,
  input  logic [NRD-1:0]             rd_req_ready,
  output logic [NRD-1:0][AW-1:0]     rd_req_addr,
  input  logic [NRD-1:0]             rd_rsp_valid,
  input  logic [NRD-1:0][MDW-1:0]    rd_rsp_data,
  // off-chip memory write port
  output logic                       wr_valid,
  input  logic                       wr_ready,
  output logic [AW-1:0]              wr_addr,
  output logic [7:0]                 wr_data
);
  localparam int unsigned DK = D / H;
  localparam bit          WPACK = (WBITS == 4);   // two int4 MACs per multiply
  localparam int unsigned WW = M2 * WBITS;
  localparam int unsigned BW = M2 * 32;
  localparam int unsigned RB = L / M1;

  // ------------------------------------------------------------------
  // loaders
  // ------------------------------------------------------------------
  logic [NRD-1:0] ld_busy, ld_valid, ld_ready;
  logic [31:0]    ld_words [NRD];
  logic [31:0]    ld_reps  [NRD];
  logic [MDW-1:0] ld_data  [NRD];
  logic           st_busy, go;

  assign busy = (|ld_busy) || st_busy;
  assign go   = start && !busy;

  always_comb begin
    for (int p = 0; p < 3; p++) begin ld_words[p] = L * D; ld_reps[p] = 1; end
    ld_words[3] = (D / M2) * D;   ld_words[9]  = D / M2;
    ld_words[4] = (D / M2) * D;   ld_words[10] = D / M2;
    ld_words[5] = (D / M2) * D;   ld_words[11] = D / M2;
    ld_words[6] = (D / M2) * D;   ld_words[12] = D / M2;
    ld_words[7] = (DFF / M2) * D; ld_words[13] = DFF / M2;
    ld_words[8] = (D / M2) * DFF; ld_words[14] = D / M2;
    for (int p = 3; p < NRD; p++) ld_reps[p] = RB;
  end

  for (genvar p = 0; p < NRD; p++) begin : g_ld
    localparam int unsigned DWP = (p < 3) ? 8 : (p < 9) ? WW : BW;
    logic [DWP-1:0] d;
    mem_loader #(.DW(DWP), .AW(AW), .DEPTH(32)) u_ld (
      .clk, .rst_n, .start(go), .base(rd_base[p]), .words(ld_words[p]), .repeats(ld_reps[p]),
      .busy(ld_busy[p]),
      .req_valid(rd_req_valid[p]), .req_ready(rd_req_ready[p]), .req_addr(rd_req_addr[p]),
      .rsp_valid(rd_rsp_valid[p]), .rsp_data(rd_rsp_data[p][DWP-1:0]),
      .out_valid(ld_valid[p]), .out_ready(ld_ready[p]), .out_data(d)
    );
    assign ld_data[p] = MDW'(d);
  end

  // ------------------------------------------------------------------
  // Region 0: Q, K, V projections
  // ------------------------------------------------------------------
  logic q_v, q_r, k_v, k_r, v_v, v_r;
  logic signed [7:0] q_d, k_d, v_d;
  logic ka_ready, va_ready;

  // L_KV feeds both the K and the V GEMM
  assign ld_ready[1] = ka_ready && va_ready;

  gemm_engine #(.M1(M1), .M2(M2), .PACK(WPACK), .WB(WBITS), .KG(D), .G(1), .N(D)) u_gemm_q (
    .clk, .rst_n, .rq(rq[0]),
    .a_valid(ld_valid[0]), .a_ready(ld_ready[0]), .a_data(ld_data[0][7:0]),
    .w_valid(ld_valid[3]), .w_ready(ld_ready[3]), .w_data(ld_data[3][WW-1:0]),
    .b_valid(ld_valid[9]), .b_ready(ld_ready[9]), .b_data(ld_data[9][BW-1:0]),
    .o_valid(q_v), .o_ready(q_r), .o_data(q_d));
  gemm_engine #(.M1(M1), .M2(M2), .PACK(WPACK), .WB(WBITS), .KG(D), .G(1), .N(D)) u_gemm_k (
    .clk, .rst_n, .rq(rq[1]),
    .a_valid(ld_valid[1] && va_ready), .a_ready(ka_ready), .a_data(ld_data[1][7:0]),
    .w_valid(ld_valid[4]), .w_ready(ld_ready[4]), .w_data(ld_data[4][WW-1:0]),
    .b_valid(ld_valid[10]), .b_ready(ld_ready[10]), .b_data(ld_data[10][BW-1:0]),
    .o_valid(k_v), .o_ready(k_r), .o_data(k_d));
  gemm_engine #(.M1(M1), .M2(M2), .PACK(WPACK), .WB(WBITS), .KG(D), .G(1), .N(D)) u_gemm_v (
    .clk, .rst_n, .rq(rq[2]),
    .a_valid(ld_valid[1] && ka_ready), .a_ready(va_ready), .a_data(ld_data[1][7:0]),
    .w_valid(ld_valid[5]), .w_ready(ld_ready[5]), .w_data(ld_data[5][WW-1:0]),
    .b_valid(ld_valid[11]), .b_ready(ld_ready[11]), .b_data(ld_data[11][BW-1:0]),
    .o_valid(v_v), .o_ready(v_r), .o_data(v_d));

  // region crossing FIFOs 0 -> 1
  logic q1_v, q1_r, k1_v, k1_r, v1_v, v1_r, i1_v, i1_r;
  logic [7:0] q1_d, k1_d, v1_d, i1_d;
  stream_fifo #(.W(8), .DEPTH(XFIFO)) u_xq (.clk, .rst_n,
    .in_valid(q_v), .in_ready(q_r), .in_data(q_d),
    .out_valid(q1_v), .out_ready(q1_r), .out_data(q1_d), .count());
  stream_fifo #(.W(8), .DEPTH(XFIFO)) u_xk (.clk, .rst_n,
    .in_valid(k_v), .in_ready(k_r), .in_data(k_d),
    .out_valid(k1_v), .out_ready(k1_r), .out_data(k1_d), .count());
  stream_fifo #(.W(8), .DEPTH(XFIFO)) u_xv (.clk, .rst_n,
    .in_valid(v_v), .in_ready(v_r), .in_data(v_d),
    .out_valid(v1_v), .out_ready(v1_r), .out_data(v1_d), .count());
  stream_fifo #(.W(8), .DEPTH(XFIFO)) u_xi (.clk, .rst_n,
    .in_valid(ld_valid[2]), .in_ready(ld_ready[2]), .in_data(ld_data[2][7:0]),
    .out_valid(i1_v), .out_ready(i1_r), .out_data(i1_d), .count());

  // ------------------------------------------------------------------
  // Region 1: scaled dot-product attention, projection, LN, residual
  // ------------------------------------------------------------------
  logic kb_v, kb_r, vb_v, vb_r;
  logic [M2A*8-1:0] kb_d, vb_d;
  logic [1:0] kfull, vfull;

  kv_buffer #(.L(L), .D(D), .H(H), .M1(M1), .M2(M2A), .MODE(0)) u_kbuf (
    .clk, .rst_n, .in_valid(k1_v), .in_ready(k1_r), .in_data(k1_d),
    .out_valid(kb_v), .out_ready(kb_r), .out_data(kb_d), .bank_full(kfull));
  kv_buffer #(.L(L), .D(D), .H(H), .M1(M1), .M2(M2A), .MODE(1)) u_vbuf (
    .clk, .rst_n, .in_valid(v1_v), .in_ready(v1_r), .in_data(v1_d),
    .out_valid(vb_v), .out_ready(vb_r), .out_data(vb_d), .bank_full(vfull));

  logic s_v, s_r, p_v, p_r, c_v, c_r;
  logic signed [7:0] s_d, p_d, c_d;

  gemm_engine #(.M1(M1), .M2(M2A), .PACK(0), .WB(8), .KG(DK), .G(H), .N(L),
                .ACT_PER_GROUP(0), .OUT_PER_GROUP(1), .HAS_BIAS(0)) u_gemm_a1 (
    .clk, .rst_n, .rq(rq[3]),
    .a_valid(q1_v), .a_ready(q1_r), .a_data(q1_d),
    .w_valid(kb_v), .w_ready(kb_r), .w_data(kb_d),
    .b_valid(1'b0), .b_ready(), .b_data('0),
    .o_valid(s_v), .o_ready(s_r), .o_data(s_d));

  softmax_row #(.L(L), .M1(M1), .H(H), .CAUSAL(CAUSAL), .IN_FRAC(4)) u_sm (
    .clk, .rst_n, .in_valid(s_v), .in_ready(s_r), .in_data(s_d),
    .out_valid(p_v), .out_ready(p_r), .out_data(p_d));

  gemm_engine #(.M1(M1), .M2(M2A), .PACK(0), .WB(8), .KG(L), .G(H), .N(DK),
                .ACT_PER_GROUP(1), .OUT_PER_GROUP(0), .HAS_BIAS(0)) u_gemm_a2 (
    .clk, .rst_n, .rq(rq[4]),
    .a_valid(p_v), .a_ready(p_r), .a_data(p_d),
    .w_valid(vb_v), .w_ready(vb_r), .w_data(vb_d),
    .b_valid(1'b0), .b_ready(), .b_data('0),
    .o_valid(c_v), .o_ready(c_r), .o_data(c_d));

  logic pj_v, pj_r, n1_v, n1_r, r1_v, r1_r;
  logic signed [7:0] pj_d, n1_d, r1_d;

  gemm_engine #(.M1(M1), .M2(M2), .PACK(WPACK), .WB(WBITS), .KG(D), .G(1), .N(D)) u_gemm_p (
    .clk, .rst_n, .rq(rq[5]),
    .a_valid(c_v), .a_ready(c_r), .a_data(c_d),
    .w_valid(ld_valid[6]), .w_ready(ld_ready[6]), .w_data(ld_data[6][WW-1:0]),
    .b_valid(ld_valid[12]), .b_ready(ld_ready[12]), .b_data(ld_data[12][BW-1:0]),
    .o_valid(pj_v), .o_ready(pj_r), .o_data(pj_d));

  layernorm_row #(.D(D), .OUT_FRAC(4)) u_ln1 (
    .clk, .rst_n, .cfg_we(ln_we[0]), .cfg_addr(ln_addr), .cfg_gamma(ln_gamma), .cfg_beta(ln_beta),
    .in_valid(pj_v), .in_ready(pj_r), .in_data(pj_d),
    .out_valid(n1_v), .out_ready(n1_r), .out_data(n1_d));

  residual_add u_add1 (
    .clk, .rst_n,
    .a_valid(n1_v), .a_ready(n1_r), .a_data(n1_d),
    .b_valid(i1_v), .b_ready(i1_r), .b_data(i1_d),
    .o_valid(r1_v), .o_ready(r1_r), .o_data(r1_d));

  // region crossing FIFO 1 -> 2
  logic x2_v, x2_r;
  logic [7:0] x2_d;
  stream_fifo #(.W(8), .DEPTH(XFIFO)) u_x2 (.clk, .rst_n,
    .in_valid(r1_v), .in_ready(r1_r), .in_data(r1_d),
    .out_valid(x2_v), .out_ready(x2_r), .out_data(x2_d), .count());

  // ------------------------------------------------------------------
  // Region 2: FFN, LN, residual
  // ------------------------------------------------------------------
  logic f1a_r, res_in_r, res_v, res_r;
  logic [7:0] res_d;
  assign x2_r = f1a_r && res_in_r;

  stream_fifo #(.W(8), .DEPTH(RES_DEPTH)) u_res (.clk, .rst_n,
    .in_valid(x2_v && f1a_r), .in_ready(res_in_r), .in_data(x2_d),
    .out_valid(res_v), .out_ready(res_r), .out_data(res_d), .count());

  logic h_v, h_r, gl_v, gl_r, f2_v, f2_r, n2_v, n2_r, o_v, o_r;
  logic signed [7:0] h_d, gl_d, f2_d, n2_d, o_d;

  gemm_engine #(.M1(M1), .M2(M2), .PACK(WPACK), .WB(WBITS), .KG(D), .G(1), .N(DFF)) u_gemm_f1 (
    .clk, .rst_n, .rq(rq[6]),
    .a_valid(x2_v && res_in_r), .a_ready(f1a_r), .a_data(x2_d),
    .w_valid(ld_valid[7]), .w_ready(ld_ready[7]), .w_data(ld_data[7][WW-1:0]),
    .b_valid(ld_valid[13]), .b_ready(ld_ready[13]), .b_data(ld_data[13][BW-1:0]),
    .o_valid(h_v), .o_ready(h_r), .o_data(h_d));

  gelu_unit #(.FRAC(4)) u_gelu (
    .clk, .rst_n, .in_valid(h_v), .in_ready(h_r), .in_data(h_d),
    .out_valid(gl_v), .out_ready(gl_r), .out_data(gl_d));

  gemm_engine #(.M1(M1), .M2(M2), .PACK(WPACK), .WB(WBITS), .KG(DFF), .G(1), .N(D)) u_gemm_f2 (
    .clk, .rst_n, .rq(rq[7]),
    .a_valid(gl_v), .a_ready(gl_r), .a_data(gl_d),
    .w_valid(ld_valid[8]), .w_ready(ld_ready[8]), .w_data(ld_data[8][WW-1:0]),
    .b_valid(ld_valid[14]), .b_ready(ld_ready[14]), .b_data(ld_data[14][BW-1:0]),
    .o_valid(f2_v), .o_ready(f2_r), .o_data(f2_d));

  layernorm_row #(.D(D), .OUT_FRAC(4)) u_ln2 (
    .clk, .rst_n, .cfg_we(ln_we[1]), .cfg_addr(ln_addr), .cfg_gamma(ln_gamma), .cfg_beta(ln_beta),
    .in_valid(f2_v), .in_ready(f2_r), .in_data(f2_d),
    .out_valid(n2_v), .out_ready(n2_r), .out_data(n2_d));

  residual_add u_add2 (
    .clk, .rst_n,
    .a_valid(n2_v), .a_ready(n2_r), .a_data(n2_d),
    .b_valid(res_v), .b_ready(res_r), .b_data(res_d),
    .o_valid(o_v), .o_ready(o_r), .o_data(o_d));

  stream_store #(.DW(8), .AW(AW)) u_store (
    .clk, .rst_n, .start(go), .base(wr_base), .count(L * D), .busy(st_busy), .done,
    .in_valid(o_v), .in_ready(o_r), .in_data(o_d),
    .wr_valid, .wr_ready, .wr_addr, .wr_data);
endmodule
