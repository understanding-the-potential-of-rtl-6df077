// sa_pe: one processing element of the output-stationary systolic array.
//
// The activation enters from the left together with the beat's control
// flags (valid, first and last beat of a tile, and the tile's address in the
// output buffer) and leaves to the right one cycle later. The weight word
// and the bias enter from the top and leave downwards one cycle later. The
// PE keeps its output in place: on the first beat of a tile the accumulator
// starts at bias + a*w, on later beats it adds a*w, and on the last beat the
// finished sum is presented on cap_* for one cycle, which writes it straight
// into this PE's slice of the output buffer (the small output buffers drawn
// beside each PE of the array).
//
// With PACK = 1 the PE serves two neighbouring output columns with one
// packed multiply (int4 weights, see dsp_pack_mul), so NC = 2 accumulators
// share a single DSP; with PACK = 0 it is a plain WB-bit x int8 MAC. Seeding
// the accumulator with the bias is this design's choice; the source only
// says the weight GEMM includes a bias.
module sa_pe #(
  parameter bit          PACK = 1'b1,
  parameter int unsigned WB   = 4,     // weight width
  parameter int unsigned TAW  = 8,     // tile address width
  localparam int unsigned NC  = PACK ? 2 : 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // from the left / to the right
  input  logic signed [7:0]        a_in,
  input  logic                     v_in,
  input  logic                     first_in,
  input  logic                     last_in,
  input  logic [TAW-1:0]           taddr_in,
  output logic signed [7:0]        a_out,
  output logic                     v_out,
  output logic                     first_out,
  output logic                     last_out,
  output logic [TAW-1:0]           taddr_out,
  // from the top / downwards
  input  logic [NC*WB-1:0]         w_in,
  input  logic [NC*32-1:0]         b_in,
  output logic [NC*WB-1:0]         w_out,
  output logic [NC*32-1:0]         b_out,
  // finished outputs
  output logic                     cap_valid,
  output logic [TAW-1:0]           cap_taddr,
  output logic [NC*32-1:0]         cap_data
);
  logic signed [31:0] prod [NC];
  logic signed [31:0] acc  [NC];
  logic signed [31:0] nxt  [NC];

  if (PACK) begin : g_pack
    logic signed [11:0] p0, p1;
    dsp_pack_mul u_mul (.a(a_in), .w0(w_in[WB-1:0]), .w1(w_in[2*WB-1:WB]),
                        .p0(p0), .p1(p1));
    assign prod[0] = 32'(p0);
    assign prod[1] = 32'(p1);
  end else begin : g_plain
    assign prod[0] = 32'(a_in) * 32'($signed(w_in[WB-1:0]));
  end

  always_comb begin
    for (int c = 0; c < NC; c++) begin
      nxt[c] = (first_in ? $signed(b_in[c*32 +: 32]) : acc[c]) + prod[c];
      cap_data[c*32 +: 32] = acc[c];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_out <= '0; v_out <= 1'b0; first_out <= 1'b0; last_out <= 1'b0; taddr_out <= '0;
      w_out <= '0; b_out <= '0;
      cap_valid <= 1'b0; cap_taddr <= '0;
      for (int c = 0; c < NC; c++) acc[c] <= '0;
    end else begin
      a_out <= a_in; v_out <= v_in; first_out <= first_in; last_out <= last_in;
      taddr_out <= taddr_in;
      w_out <= w_in; b_out <= b_in;
      cap_valid <= v_in && last_in;
      cap_taddr <= taddr_in;
      if (v_in) for (int c = 0; c < NC; c++) acc[c] <= nxt[c];
    end
  end
endmodule
