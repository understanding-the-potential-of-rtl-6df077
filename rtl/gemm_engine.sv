// gemm_engine: streaming GEMM processing engine built around an output-
// stationary systolic array.
//
// It multiplies an activation stream (int8, row-major, M1 rows at a time)
// with a stream of weight words and emits the int8 result row-major. The
// same engine serves the two kinds of linear operator of the layer:
//  * activation x weight (projections and FFN, "A-W"): the weight words come
//    from an off-chip loader, int4 weights packed two per multiply, with a
//    bias per output column (G = 1);
//  * activation x activation (the two attention GEMMs, "A-A"): the weight
//    words come from the double-buffered K or V store, int8, no bias, with
//    one group per attention head.
//
// Work is organised in row blocks of M1 tokens. For each block, each group
// g < G and each column tile of M2 outputs, KG beats are fed; beat k gives
// every row its activation at reduction index k and the array one word of
// M2 weights. Activation buffer: M1 rows x KA int8, double buffered
// (filling one bank while the array reads the other). With ACT_PER_GROUP the
// stream supplies a new M1 x KG block per group (the probabilities of one
// head); otherwise one M1 x (G*KG) block serves all groups, group g reading
// columns g*KG .. g*KG+KG-1 (Q of all heads).
// Output buffer: each PE writes its finished sums straight into a buffer of
// M1 rows x NT_OUT*M2 int32, double buffered; a unit is emitted row-major,
// requantised to int8, while the array fills the other bank. With
// OUT_PER_GROUP a unit is one group's N columns (scores of one head);
// otherwise the G groups are concatenated (heads side by side).
//
// Throughput: one beat per cycle, so a block costs G*(N/M2)*KG cycles,
// i.e. (rows*K*N)/(M1*M2) cycles per GEMM, provided the output of a unit
// (M1*NT_OUT*M2 words at one per cycle) drains no slower than it is made
// (M1*M2 <= KG). The first result of a block leaves about KG + M1 + M2
// cycles after its first beat.
//
// Follows the source design: output-stationary array, activation buffer
// filled from a FIFO, weights streamed, fully partitioned output buffer
// written directly by the PEs, DSP packing for W4A8. This design's own
// choices: the double buffering of both buffers, the beat/flag protocol,
// the bias seeding the accumulator, and requantisation on the way out.
module gemm_engine
  import llm_pkg::*;
#(
  parameter int unsigned M1            = 8,
  parameter int unsigned M2            = 16,
  parameter bit          PACK          = 1'b1,
  parameter int unsigned WB            = 4,
  parameter int unsigned KG            = 768,
  parameter int unsigned G             = 1,
  parameter int unsigned N             = 768,
  parameter bit          ACT_PER_GROUP = 1'b0,
  parameter bit          OUT_PER_GROUP = 1'b0,
  parameter bit          HAS_BIAS      = 1'b1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  rq_cfg_t              rq,
  // activation stream
  input  logic                 a_valid,
  output logic                 a_ready,
  input  logic signed [7:0]    a_data,
  // weight words: M2 weights, column j in bits j*WB +: WB
  input  logic                 w_valid,
  output logic                 w_ready,
  input  logic [M2*WB-1:0]     w_data,
  // bias words: M2 int32, one per column tile
  input  logic                 b_valid,
  output logic                 b_ready,
  input  logic [M2*32-1:0]     b_data,
  // result stream
  output logic                 o_valid,
  input  logic                 o_ready,
  output logic signed [7:0]    o_data
);
  localparam int unsigned NC     = PACK ? 2 : 1;
  localparam int unsigned PC     = M2 / NC;
  localparam int unsigned KA     = ACT_PER_GROUP ? KG : G * KG;
  localparam int unsigned NT     = N / M2;
  localparam int unsigned NT_OUT = OUT_PER_GROUP ? NT : G * NT;
  localparam int unsigned TAW    = $clog2(2 * NT_OUT);
  localparam int unsigned AAW    = $clog2(2 * KA);
  localparam int unsigned OAW    = $clog2(2 * NT_OUT * PC);

  // ------------------------------------------------------------------
  // activation buffer (M1 partitions, two banks of KA each)
  // ------------------------------------------------------------------
  logic [1:0]             act_full;
  logic                   fbank, cbank;
  logic [$clog2(M1)-1:0]  frow;
  logic [$clog2(KA)-1:0]  fcol;
  logic                   fill_we;
  logic [M1-1:0][7:0]     a_rd;
  logic [AAW-1:0]         act_raddr;

  assign a_ready = !act_full[fbank];
  assign fill_we = a_valid && a_ready;

  for (genvar i = 0; i < M1; i++) begin : g_abuf
    logic [7:0] mem [2*KA];
    always_ff @(posedge clk) begin
      if (fill_we && frow == i) mem[AAW'(fbank ? KA : 0) + AAW'(fcol)] <= a_data;
      a_rd[i] <= mem[act_raddr];
    end
  end

  // ------------------------------------------------------------------
  // beat feeder
  // ------------------------------------------------------------------
  logic [$clog2(KG)-1:0]            k;
  logic [(NT > 1 ? $clog2(NT) : 1)-1:0] ct;
  logic [(G > 1 ? $clog2(G) : 1)-1:0]   g;
  logic                             obank;
  logic [1:0]                       out_busy;
  logic                             unit_start, unit_end, grp_end, blk_end, go;
  logic [TAW-1:0]                   tile_addr;

  assign unit_start = (k == 0) && (ct == 0) && (OUT_PER_GROUP || g == 0);
  assign grp_end    = (32'(k) == KG - 1) && (32'(ct) == NT - 1);
  assign blk_end    = grp_end && (32'(g) == G - 1);
  assign unit_end   = OUT_PER_GROUP ? grp_end : blk_end;
  assign go         = act_full[cbank] && w_valid && (!HAS_BIAS || k != 0 || b_valid) &&
                      (!unit_start || !out_busy[obank]);
  assign w_ready    = go;
  assign b_ready    = HAS_BIAS ? (go && k == 0) : 1'b0;
  assign act_raddr  = AAW'(cbank ? KA : 0) + AAW'(ACT_PER_GROUP ? 0 : g * KG) + AAW'(k);
  assign tile_addr  = TAW'(obank ? NT_OUT : 0) + TAW'(OUT_PER_GROUP ? 0 : g * NT) + TAW'(ct);

  // stage-1 registers (aligned with the activation read)
  logic              s1_v, s1_first, s1_last;
  logic [TAW-1:0]    s1_taddr;
  logic [M2*WB-1:0]  s1_w;
  logic [M2*32-1:0]  s1_b;

  // emitter side signals used by the feeder
  logic       emit_done;
  logic       ebank;
  logic [1:0] obank_full;
  logic       cap_last;
  logic       cap_bank;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      k <= '0; ct <= '0; g <= '0; cbank <= 1'b0; obank <= 1'b0; fbank <= 1'b0;
      frow <= '0; fcol <= '0; act_full <= '0; out_busy <= '0; obank_full <= '0;
      s1_v <= 1'b0; s1_first <= 1'b0; s1_last <= 1'b0; s1_taddr <= '0; s1_w <= '0; s1_b <= '0;
    end else begin
      // fill
      if (fill_we) begin
        if (32'(fcol) == KA - 1) begin
          fcol <= '0;
          if (32'(frow) == M1 - 1) begin
            frow <= '0;
            act_full[fbank] <= 1'b1;
            fbank <= !fbank;
          end else frow <= frow + 1'b1;
        end else fcol <= fcol + 1'b1;
      end
      // feed
      s1_v <= go;
      if (go) begin
        s1_first <= (k == 0);
        s1_last  <= (32'(k) == KG - 1);
        s1_taddr <= tile_addr;
        s1_w     <= w_data;
        s1_b     <= HAS_BIAS ? b_data : '0;
        if (unit_start) out_busy[obank] <= 1'b1;
        if (unit_end) obank <= !obank;
        if (32'(k) == KG - 1) begin
          k <= '0;
          if (32'(ct) == NT - 1) begin
            ct <= '0;
            g  <= (32'(g) == G - 1) ? '0 : g + 1'b1;
            if (ACT_PER_GROUP || 32'(g) == G - 1) begin
              act_full[cbank] <= 1'b0;
              cbank <= !cbank;
            end
          end else ct <= ct + 1'b1;
        end else k <= k + 1'b1;
      end
      // output bank bookkeeping
      if (cap_last) obank_full[cap_bank] <= 1'b1;
      if (emit_done) begin
        obank_full[ebank] <= 1'b0;
        out_busy[ebank]   <= 1'b0;
      end
    end
  end

  // ------------------------------------------------------------------
  // systolic array
  // ------------------------------------------------------------------
  logic [M1-1:0][PC-1:0] cap_valid;
  logic [TAW-1:0]        cap_taddr [M1][PC];
  logic [NC*32-1:0]      cap_data  [M1][PC];

  systolic_array #(.M1(M1), .M2(M2), .PACK(PACK), .WB(WB), .TAW(TAW)) u_sa (
    .clk, .rst_n,
    .a_vec(a_rd), .v(s1_v), .first(s1_first), .last(s1_last), .taddr(s1_taddr),
    .w_vec(s1_w), .b_vec(s1_b),
    .cap_valid, .cap_taddr, .cap_data
  );

  assign cap_last = cap_valid[M1-1][PC-1] &&
                    ((cap_taddr[M1-1][PC-1] == TAW'(NT_OUT - 1)) ||
                     (cap_taddr[M1-1][PC-1] == TAW'(2 * NT_OUT - 1)));
  assign cap_bank = (cap_taddr[M1-1][PC-1] >= TAW'(NT_OUT));

  // ------------------------------------------------------------------
  // output buffer: one memory per row; PEs of a row never finish in the
  // same cycle (KG >= PC), so one write port per row suffices
  // ------------------------------------------------------------------
  logic [OAW-1:0]        o_raddr;
  logic [NC*32-1:0]      o_rd [M1];

  for (genvar i = 0; i < M1; i++) begin : g_obuf
    logic [NC*32-1:0] mem [2*NT_OUT*PC];
    logic             we;
    logic [OAW-1:0]   waddr;
    logic [NC*32-1:0] wdata;
    always_comb begin
      we = 1'b0; waddr = '0; wdata = '0;
      for (int c = 0; c < PC; c++) begin
        if (cap_valid[i][c]) begin
          we    = 1'b1;
          waddr = OAW'(cap_taddr[i][c]) * OAW'(PC) + OAW'(c);
          wdata = cap_data[i][c];
        end
      end
    end
    always_ff @(posedge clk) begin
      if (we) mem[waddr] <= wdata;
      o_rd[i] <= mem[o_raddr];
    end
  end

  // ------------------------------------------------------------------
  // emitter: row-major read-out, requantisation, small output FIFO
  // ------------------------------------------------------------------
  logic [$clog2(M1)-1:0]                    er;
  logic [(NT_OUT > 1 ? $clog2(NT_OUT) : 1)-1:0] et;
  logic [(PC > 1 ? $clog2(PC) : 1)-1:0]     epc;
  logic                                     elane;
  logic                                     e_issue;
  logic                                     e1_v, e2_v;
  logic [$clog2(M1)-1:0]                    e1_row;
  logic                                     e1_lane;
  logic signed [7:0]                        e2_q;
  logic [2:0]                               ofifo_cnt;
  logic                                     ofifo_rdy;
  logic                                     e_last_elem;

  assign e_last_elem = (32'(er) == M1 - 1) && (32'(et) == NT_OUT - 1) && (32'(epc) == PC - 1) &&
                       (elane == 1'(NC - 1));
  assign e_issue  = obank_full[ebank] &&
                    (32'(ofifo_cnt) + 32'(e1_v) + 32'(e2_v) < 32'd4);
  assign emit_done = e_issue && e_last_elem;
  assign o_raddr  = OAW'(ebank ? NT_OUT * PC : 0) + OAW'(et) * OAW'(PC) + OAW'(epc);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      er <= '0; et <= '0; epc <= '0; elane <= 1'b0; ebank <= 1'b0;
      e1_v <= 1'b0; e2_v <= 1'b0; e1_row <= '0; e1_lane <= 1'b0; e2_q <= '0;
    end else begin
      e1_v <= e_issue;
      e1_row <= er;
      e1_lane <= elane;
      e2_v <= e1_v;
      if (e1_v) e2_q <= requant($signed(o_rd[e1_row][((NC > 1 && e1_lane) ? 32 : 0) +: 32]), rq);
      if (e_issue) begin
        if (elane == 1'(NC - 1)) begin
          elane <= 1'b0;
          if (32'(epc) == PC - 1) begin
            epc <= '0;
            if (32'(et) == NT_OUT - 1) begin
              et <= '0;
              if (32'(er) == M1 - 1) begin
                er <= '0;
                ebank <= !ebank;
              end else er <= er + 1'b1;
            end else et <= et + 1'b1;
          end else epc <= epc + 1'b1;
        end else elane <= 1'b1;
      end
    end
  end

  stream_fifo #(.W(8), .DEPTH(4)) u_ofifo (
    .clk, .rst_n,
    .in_valid(e2_v), .in_ready(ofifo_rdy), .in_data(e2_q),
    .out_valid(o_valid), .out_ready(o_ready), .out_data(o_data),
    .count(ofifo_cnt)
  );

  a_kg_ge_pc: assert property (@(posedge clk) KG >= PC);
  a_ofifo:    assert property (@(posedge clk) disable iff (!rst_n) e2_v |-> ofifo_rdy);
endmodule
