// systolic_array: M1 x M2 output-stationary systolic array of MAC units.
//
// One "beat" supplies M1 activations (one per output row, same reduction
// index k) and M2 weights plus M2 biases (one per output column). The array
// skews the beat itself: row i's activation and flags are delayed by i
// cycles and PE column c's weights by c cycles, so PE (i,c) sees beat k at
// cycle k + i + c. Activations then move right and weights down one PE per
// cycle. Each PE accumulates its own output; when the last beat of a tile
// reaches it, the PE raises its cap_valid for one cycle with the finished
// sums and the tile address, so results leave the array in the same
// diagonal wave as the data. A tile of M1 x M2 outputs with reduction length
// K therefore costs K beats, one per cycle, and the next tile can follow
// with no gap.
//
// With PACK = 1 a PE holds two neighbouring columns (int4 weights packed in
// one multiply), so there are M2/2 PE columns. The structure follows the
// systolic-array figure of the source design; the skew registers at the
// edges are this design's own way of feeding it.
module systolic_array #(
  parameter int unsigned M1   = 8,
  parameter int unsigned M2   = 16,
  parameter bit          PACK = 1'b1,
  parameter int unsigned WB   = 4,
  parameter int unsigned TAW  = 8,
  localparam int unsigned NC  = PACK ? 2 : 1,
  localparam int unsigned PC  = M2 / NC
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [M1-1:0][7:0]     a_vec,
  input  logic                   v,
  input  logic                   first,
  input  logic                   last,
  input  logic [TAW-1:0]         taddr,
  input  logic [M2*WB-1:0]       w_vec,
  input  logic [M2*32-1:0]       b_vec,
  output logic [M1-1:0][PC-1:0]  cap_valid,
  output logic [TAW-1:0]         cap_taddr [M1][PC],
  output logic [NC*32-1:0]       cap_data  [M1][PC]
);
  // horizontal links: index c is the input of PE column c, c = PC is the exit
  logic signed [7:0]  ah [M1][PC+1];
  logic               vh [M1][PC+1];
  logic               fh [M1][PC+1];
  logic               lh [M1][PC+1];
  logic [TAW-1:0]     th [M1][PC+1];
  // vertical links
  logic [NC*WB-1:0]   wv [M1+1][PC];
  logic [NC*32-1:0]   bv [M1+1][PC];

  // left-edge skew: row i delayed by i cycles
  for (genvar i = 0; i < M1; i++) begin : g_rskew
    if (i == 0) begin : g_direct
      assign ah[0][0] = a_vec[0];
      assign vh[0][0] = v;
      assign fh[0][0] = first;
      assign lh[0][0] = last;
      assign th[0][0] = taddr;
    end else begin : g_delay
      logic [7:0]     da [i];
      logic           dv [i], df [i], dl [i];
      logic [TAW-1:0] dt [i];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int s = 0; s < i; s++) begin
            da[s] <= '0; dv[s] <= 1'b0; df[s] <= 1'b0; dl[s] <= 1'b0; dt[s] <= '0;
          end
        end else begin
          da[0] <= a_vec[i]; dv[0] <= v; df[0] <= first; dl[0] <= last; dt[0] <= taddr;
          for (int s = 1; s < i; s++) begin
            da[s] <= da[s-1]; dv[s] <= dv[s-1]; df[s] <= df[s-1];
            dl[s] <= dl[s-1]; dt[s] <= dt[s-1];
          end
        end
      end
      assign ah[i][0] = da[i-1];
      assign vh[i][0] = dv[i-1];
      assign fh[i][0] = df[i-1];
      assign lh[i][0] = dl[i-1];
      assign th[i][0] = dt[i-1];
    end
  end

  // top-edge skew: PE column c delayed by c cycles
  for (genvar c = 0; c < PC; c++) begin : g_cskew
    if (c == 0) begin : g_direct
      assign wv[0][0] = w_vec[0 +: NC*WB];
      assign bv[0][0] = b_vec[0 +: NC*32];
    end else begin : g_delay
      logic [NC*WB-1:0] dw [c];
      logic [NC*32-1:0] db [c];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int s = 0; s < c; s++) begin dw[s] <= '0; db[s] <= '0; end
        end else begin
          dw[0] <= w_vec[c*NC*WB +: NC*WB];
          db[0] <= b_vec[c*NC*32 +: NC*32];
          for (int s = 1; s < c; s++) begin dw[s] <= dw[s-1]; db[s] <= db[s-1]; end
        end
      end
      assign wv[0][c] = dw[c-1];
      assign bv[0][c] = db[c-1];
    end
  end

  for (genvar i = 0; i < M1; i++) begin : g_row
    for (genvar c = 0; c < PC; c++) begin : g_col
      sa_pe #(.PACK(PACK), .WB(WB), .TAW(TAW)) u_pe (
        .clk, .rst_n,
        .a_in(ah[i][c]), .v_in(vh[i][c]), .first_in(fh[i][c]), .last_in(lh[i][c]),
        .taddr_in(th[i][c]),
        .a_out(ah[i][c+1]), .v_out(vh[i][c+1]), .first_out(fh[i][c+1]),
        .last_out(lh[i][c+1]), .taddr_out(th[i][c+1]),
        .w_in(wv[i][c]), .b_in(bv[i][c]), .w_out(wv[i+1][c]), .b_out(bv[i+1][c]),
        .cap_valid(cap_valid[i][c]), .cap_taddr(cap_taddr[i][c]), .cap_data(cap_data[i][c])
      );
    end
  end
endmodule
