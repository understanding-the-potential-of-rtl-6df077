// layer_checker: computes the expected layer output with the integer
// reference model of layer_tb_pkg and checks every element the layer
// writes to memory (address = wr_base + t*D + f), for NLAYERS runs.
// ROWS_CHECKED limits how many token rows are computed and compared (the
// K and V projections are always computed in full, since every query needs
// them); the remaining rows are only counted.
module layer_checker
  import llm_pkg::*;
  import layer_tb_pkg::*;
#(
  parameter int L = 16, D = 16, H = 2, DFF = 32,
  parameter bit CAUSAL = 1'b0,
  parameter int NLAYERS = 2,
  parameter int ROWS_CHECKED = 16,
  parameter int WBITS = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              wr_valid,
  input  logic              wr_ready,
  input  logic [31:0]       wr_addr,
  input  logic [7:0]        wr_data,
  output rq_cfg_t [7:0]     rq,
  output int                checks,
  output int                failures,
  output int                written,
  output logic              ref_ready
);
  localparam int DK = D / H;
  localparam int WX = (WBITS == 8) ? 4 : 0;
  int X  [L][D];
  int Q  [L][D];
  int K  [L][D];
  int V  [L][D];
  int C  [L][D];
  int R1 [L][D];
  int OUT [L][D];

  function automatic void gemm_row(input int gi, input int xin[], input int n_out,
                                   input rq_cfg_t cfg, output int y[]);
    y = new[n_out];
    for (int n = 0; n < n_out; n++) begin
      longint acc;
      acc = bval(gi, n);
      for (int k = 0; k < xin.size(); k++) acc += longint'(xin[k]) * wval(gi, k, n, WBITS);
      y[n] = rq_ref(acc, cfg.mult, cfg.shift);
    end
  endfunction

  initial begin
    int xr[], y[], s[], p[], hrow[], grow[];
    ref_ready = 1'b0;
    for (int g = 0; g < 8; g++) rq[g].mult = 16'sd1;
    // int8 weights are 16 times larger than int4 ones: 4 more bits of shift
    rq[0].shift = 6'(shift_for(D) + WX); rq[1].shift = 6'(shift_for(D) + WX);
    rq[2].shift = 6'(shift_for(D) + WX);
    rq[3].shift = 6'(shift_for(DK) + 2);
    rq[4].shift = 6'd7;
    rq[5].shift = 6'(shift_for(D) + WX); rq[6].shift = 6'(shift_for(D) + WX);
    rq[7].shift = 6'(shift_for(DFF) + WX);
    for (int t = 0; t < L; t++) for (int f = 0; f < D; f++) X[t][f] = xval(t, f);
    xr = new[D];
    for (int t = 0; t < L; t++) begin
      for (int f = 0; f < D; f++) xr[f] = X[t][f];
      gemm_row(1, xr, D, rq[1], y); for (int f = 0; f < D; f++) K[t][f] = y[f];
      gemm_row(2, xr, D, rq[2], y); for (int f = 0; f < D; f++) V[t][f] = y[f];
      if (t < ROWS_CHECKED) begin
        gemm_row(0, xr, D, rq[0], y); for (int f = 0; f < D; f++) Q[t][f] = y[f];
      end
    end
    s = new[L];
    for (int t = 0; t < ROWS_CHECKED; t++) begin
      for (int h = 0; h < H; h++) begin
        for (int j = 0; j < L; j++) begin
          longint acc;
          acc = 0;
          for (int k = 0; k < DK; k++) acc += Q[t][h*DK + k] * K[j][h*DK + k];
          s[j] = rq_ref(acc, rq[3].mult, rq[3].shift);
        end
        softmax_ref(s, t, CAUSAL, p);
        for (int n = 0; n < DK; n++) begin
          longint acc;
          acc = 0;
          for (int j = 0; j < L; j++) acc += p[j] * V[j][h*DK + n];
          C[t][h*DK + n] = rq_ref(acc, rq[4].mult, rq[4].shift);
        end
      end
      for (int f = 0; f < D; f++) xr[f] = C[t][f];
      gemm_row(3, xr, D, rq[5], y);
      layernorm_ref(y, 0, p);
      for (int f = 0; f < D; f++) R1[t][f] = sat8(p[f] + X[t][f]);
      for (int f = 0; f < D; f++) xr[f] = R1[t][f];
      gemm_row(4, xr, DFF, rq[6], hrow);
      grow = new[DFF];
      for (int n = 0; n < DFF; n++) grow[n] = gelu_ref(hrow[n]);
      gemm_row(5, grow, D, rq[7], y);
      layernorm_ref(y, 1, p);
      for (int f = 0; f < D; f++) OUT[t][f] = sat8(p[f] + R1[t][f]);
    end
    ref_ready = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      checks <= 0; failures <= 0; written <= 0;
    end else if (wr_valid && wr_ready) begin
      int e, t, f;
      e = int'(wr_addr) % (L * D);
      t = e / D; f = e % D;
      written <= written + 1;
      if (t < ROWS_CHECKED) begin
        checks <= checks + 1;
        if (int'($signed(wr_data)) != OUT[t][f]) begin
          failures <= failures + 1;
          if (failures < 8) $display("layer out [%0d][%0d]: got %0d exp %0d", t, f,
                                     $signed(wr_data), OUT[t][f]);
        end
      end
    end
  end
endmodule
