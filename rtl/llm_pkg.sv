// llm_pkg: constants and helpers shared by the spatial Transformer-layer accelerator.
//
// The default model sizes are those of BERT-base (12 heads, hidden size 768,
// FFN size 3072) run at a sequence length of 512, the main design point the
// accelerator was built for. Weights are 4-bit and activations 8-bit (W4A8).
// The systolic-array shapes (8x16 for the weight GEMMs, 8x8 for the two
// attention GEMMs) also follow that design point.
//
// Requantisation, which brings a 32-bit accumulator back to an int8
// activation, is this design's own choice: acc * mult, rounded shift right,
// saturated to [-128, 127].
package llm_pkg;

  // Model dimensions (BERT-base, sequence length 512)
  localparam int unsigned SEQ_LEN  = 512;   // l
  localparam int unsigned D_MODEL  = 768;   // d
  localparam int unsigned N_HEADS  = 12;    // h
  localparam int unsigned D_FFN    = 3072;  // d_FFN
  localparam int unsigned D_HEAD   = D_MODEL / N_HEADS;

  // Quantisation: W4A8
  localparam int unsigned W_BITS   = 4;
  localparam int unsigned A_BITS   = 8;
  localparam int unsigned ACC_BITS = 32;

  // Systolic-array shapes
  localparam int unsigned SA_M1     = 8;    // rows (tokens per tile)
  localparam int unsigned SA_M2     = 16;   // columns of the weight GEMMs
  localparam int unsigned SA_M2_ATT = 8;    // columns of the attention GEMMs

  // Requantisation setting of one GEMM (run-time configuration)
  typedef struct packed {
    logic signed [15:0] mult;
    logic        [5:0]  shift;
  } rq_cfg_t;

  // acc * mult, rounded arithmetic shift, saturate to int8
  function automatic logic signed [7:0] requant(input logic signed [31:0] acc,
                                                input rq_cfg_t cfg);
    logic signed [63:0] p;
    logic signed [63:0] r;
    p = 64'(acc) * 64'(cfg.mult);
    if (cfg.shift != 0) p = p + (64'sd1 <<< (cfg.shift - 6'd1));
    r = p >>> cfg.shift;
    if (r > 64'sd127)       return 8'sd127;
    else if (r < -64'sd128) return -8'sd128;
    else                    return r[7:0];
  endfunction

  // saturating int8 addition
  function automatic logic signed [7:0] sat_add8(input logic signed [7:0] a,
                                                 input logic signed [7:0] b);
    logic signed [8:0] s;
    s = 9'(a) + 9'(b);
    if (s > 9'sd127)       return 8'sd127;
    else if (s < -9'sd128) return -8'sd128;
    else                   return s[7:0];
  endfunction

endpackage
