// hbm_model: behavioural model of the off-chip memory seen by the layer:
// NRD independent read ports with in-order responses after a random
// latency of 2..LAT cycles and random request back-pressure, plus one write
// port that is always ready. Contents are computed from the tensor
// functions of layer_tb_pkg at the addresses the layer's loaders use
// (each port's data starts at address 0): X row-major on ports 0..2,
// weight words (column tile, k) on ports 3..8, bias words on 9..14.
// With BP = 0 every request is accepted at once (full-rate memory).
module hbm_model
  import layer_tb_pkg::*;
#(
  parameter int L = 16, D = 16, DFF = 32, M2 = 4,
  parameter int NRD = 15, MDW = 512, AW = 32, LAT = 6,
  parameter bit BP = 1'b1,    // random request back-pressure (1 in 5 cycles)
  parameter int WBITS = 4     // weight width
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [NRD-1:0]          rd_req_valid,
  output logic [NRD-1:0]          rd_req_ready,
  input  logic [NRD-1:0][AW-1:0]  rd_req_addr,
  output logic [NRD-1:0]          rd_rsp_valid,
  output logic [NRD-1:0][MDW-1:0] rd_rsp_data,
  output logic                    wr_ready
);
  function automatic logic [MDW-1:0] word(input int p, input int a);
    logic [MDW-1:0] w;
    int gi, kk;
    w = '0;
    if (p < 3) begin
      w[7:0] = 8'(xval(a / D, a % D));
    end else if (p < 9) begin
      gi = p - 3;
      kk = (gi == 5) ? DFF : D;
      for (int j = 0; j < M2; j++) w[j*WBITS +: WBITS] = WBITS'(wval(gi, a % kk, (a / kk) * M2 + j, WBITS));
    end else begin
      gi = p - 9;
      for (int j = 0; j < M2; j++) w[j*32 +: 32] = 32'(bval(gi, a * M2 + j));
    end
    return w;
  endfunction

  typedef struct { int due; logic [MDW-1:0] d; } rsp_t;
  rsp_t q [NRD][$];
  int cyc;

  assign wr_ready = 1'b1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cyc <= 0;
      rd_req_ready <= '0;
      rd_rsp_valid <= '0;
    end else begin
      cyc <= cyc + 1;
      for (int p = 0; p < NRD; p++) begin
        rd_req_ready[p] <= !BP || $urandom_range(4) != 0;
        if (rd_req_valid[p] && rd_req_ready[p]) begin
          rsp_t r;
          r.due = cyc + int'($urandom_range(LAT - 2)) + 2;
          if (q[p].size() > 0 && q[p][$].due > r.due) r.due = q[p][$].due;
          r.d = word(p, int'(rd_req_addr[p]));
          q[p].push_back(r);
        end
        rd_rsp_valid[p] <= 1'b0;
        if (q[p].size() > 0 && q[p][0].due <= cyc) begin
          rd_rsp_valid[p] <= 1'b1;
          rd_rsp_data[p]  <= q[p][0].d;
          void'(q[p].pop_front());
        end
      end
    end
  end
endmodule
