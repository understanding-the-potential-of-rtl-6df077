// tb_sa_pe: drives a packed (two-column, int4) PE and a plain (int8 weight)
// PE with random tiles of random length, including back-to-back tiles and
// idle gaps, and checks that each finished sum equals bias + sum(a*w) and
// appears exactly one cycle after the tile's last beat, that the
// pass-through outputs are the inputs delayed by one cycle, and that no
// spurious capture happens.
module tb_sa_pe;
  logic clk = 1'b0, rst_n = 1'b1;
  always #5 clk = !clk;

  logic signed [7:0] a;
  logic v, first, last;
  logic [7:0] taddr;
  logic [7:0] w;         // packed: two int4; plain: one int8
  logic [63:0] b;
  logic signed [7:0] ao0, ao1;
  logic vo0, fo0, lo0, vo1, fo1, lo1;
  logic [7:0] to0, to1, wo0;
  logic [7:0] wo1;
  logic [63:0] bo0;
  logic [31:0] bo1;
  logic cv0, cv1;
  logic [7:0] ct0, ct1;
  logic [63:0] cd0;
  logic [31:0] cd1;

  sa_pe #(.PACK(1'b1), .WB(4), .TAW(8)) p0 (.clk, .rst_n, .a_in(a), .v_in(v), .first_in(first),
    .last_in(last), .taddr_in(taddr), .a_out(ao0), .v_out(vo0), .first_out(fo0), .last_out(lo0),
    .taddr_out(to0), .w_in(w), .b_in(b), .w_out(wo0), .b_out(bo0),
    .cap_valid(cv0), .cap_taddr(ct0), .cap_data(cd0));
  sa_pe #(.PACK(1'b0), .WB(8), .TAW(8)) p1 (.clk, .rst_n, .a_in(a), .v_in(v), .first_in(first),
    .last_in(last), .taddr_in(taddr), .a_out(ao1), .v_out(vo1), .first_out(fo1), .last_out(lo1),
    .taddr_out(to1), .w_in(w), .b_in(b[31:0]), .w_out(wo1), .b_out(bo1),
    .cap_valid(cv1), .cap_taddr(ct1), .cap_data(cd1));

  int checks = 0, failures = 0, tiles = 0, beat = 0, len = 1, cyc = 0;
  longint e0, e1, e2;      // running references: packed col 0, col 1, plain
  longint x0, x1, x2;      // expected capture values
  logic  exp_cap;
  logic [7:0] exp_t;
  logic signed [7:0] pa;
  logic pv, pf, pl;
  logic [7:0] pw, pt;
  logic [63:0] pb;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 8) $display("%t %s", $time, what);
    end
  endtask

  // stimulus and reference model, both on the rising edge
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a <= 0; v <= 0; first <= 0; last <= 0; taddr <= 0; w <= 0; b <= 0;
      exp_cap <= 0; pa <= 0; pv <= 0; pf <= 0; pl <= 0; pw <= 0; pt <= 0; pb <= 0;
      e0 <= 0; e1 <= 0; e2 <= 0; x0 <= 0; x1 <= 0; x2 <= 0; exp_t <= 0;
    end else begin
      longint n0, n1, n2;
      cyc <= cyc + 1;
      // model of the beat presented in this cycle
      pa <= a; pv <= v; pf <= first; pl <= last; pw <= w; pt <= taddr; pb <= b;
      n0 = (first ? longint'($signed(b[31:0])) : e0) + a * $signed(w[3:0]);
      n1 = (first ? longint'($signed(b[63:32])) : e1) + a * $signed(w[7:4]);
      n2 = (first ? longint'($signed(b[31:0])) : e2) + a * $signed(w);
      if (v) begin e0 <= n0; e1 <= n1; e2 <= n2; end
      exp_cap <= v && last;
      if (v && last) begin x0 <= n0; x1 <= n1; x2 <= n2; exp_t <= taddr; end
      // next beat: random gaps, random tile lengths 1..6
      a <= 8'($urandom); w <= 8'($urandom); b <= {$urandom, $urandom};
      if (tiles < 60 && $urandom_range(3) != 0) begin
        int l;
        l = (beat == 0) ? $urandom_range(6, 1) : len;
        v <= 1'b1; first <= (beat == 0); last <= (beat == l - 1); taddr <= 8'(tiles);
        len <= l;
        if (beat == l - 1) begin beat <= 0; tiles <= tiles + 1; end
        else beat <= beat + 1;
      end else begin
        v <= 1'b0; first <= 1'b0; last <= 1'b0;
      end
    end
  end

  // compare at the falling edge, after the registered outputs settle
  always @(negedge clk) if (rst_n && cyc > 0) begin
    chk(cv0 == exp_cap && cv1 == exp_cap, "cap_valid");
    if (exp_cap) begin
      chk(ct0 == exp_t && ct1 == exp_t, "cap_taddr");
      chk($signed(cd0[31:0]) == 32'(x0), "packed col 0");
      chk($signed(cd0[63:32]) == 32'(x1), "packed col 1");
      chk($signed(cd1) == 32'(x2), "plain");
    end
    chk(ao0 == pa && vo0 == pv && fo0 == pf && lo0 == pl && to0 == pt && wo0 == pw &&
        bo0 == pb && ao1 == pa && vo1 == pv && fo1 == pf && lo1 == pl && to1 == pt &&
        wo1 == pw && bo1 == pb[31:0], "pass-through");
  end

  initial begin
    #1 rst_n = 1'b0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    wait (tiles == 60);
    repeat (4) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (3000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
