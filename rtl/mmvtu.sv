// mmvtu: multi-vector matrix-vector-threshold unit, the compute core of a
// hardware layer.
//
// It multiplies an MH x MW weight matrix with M input vectors at once (M
// images processed in lockstep) and thresholds the results. The work is
// folded as in the paper: PE processing elements each own MH/PE matrix rows
// (output channels) and SIMD columns are consumed per cycle, so one output
// pixel takes SF*NF cycles with SF = MW/SIMD synapse folds and NF = MH/PE
// neuron folds, doing M*PE*SIMD multiply-accumulates per cycle (Eq. 3). The
// weights read in a cycle are shared by all M vectors, which is the paper's
// multi-vector improvement: M times the compute for the same weight memory
// bandwidth.
//
// Datapath per PE (paper's MMVTU figure): weight memory -> M vector_mul ->
// M vector_sum -> M accumulators -> M threshold_unit fed by the threshold
// memory. Both memories are addressed by the fold index.
//
// Own choices (the paper gives no control details): a vector is taken from
// the input stream during neuron fold 0 and kept in an input buffer of SF
// words that is replayed for the other neuron folds; the pipeline has two
// stages (memory read, then multiply-sum-accumulate), and stops as a whole
// while the output register is full and not accepted.
//
// Interface: valid/ready streams. in_data packs M vectors of SIMD unsigned
// A-bit elements (vector m, element i in bits [(m*SIMD+i)*A +: A]); per input
// vector SF beats arrive in column order. out_data packs M x PE results of OB
// bits (image m, PE p in bits [(m*PE+p)*OB +: OB]); NF beats per vector,
// beat nf carrying output channels nf*PE .. nf*PE+PE-1 (channel nf*PE+p is
// computed by PE p). OB is AO when THRESH=1, else the raw ACC-bit
// accumulator. Weights and thresholds are loaded through the wr_* port:
// wr_pe selects the PE, wr_addr the word (nf*SF+sf for weights, nf for
// thresholds).
module mmvtu import qnn_pkg::*; #(
  parameter int unsigned M      = 1,
  parameter int unsigned SIMD   = 4,
  parameter int unsigned PE     = 2,
  parameter int unsigned MW     = 16,
  parameter int unsigned MH     = 8,
  parameter int unsigned W      = 1,
  parameter int unsigned A      = 2,
  parameter int unsigned AO     = 2,
  parameter int unsigned THRESH = 1,
  parameter int unsigned ACC    = acc_bits(W, A, MW),
  localparam int unsigned OB    = (THRESH != 0) ? AO : ACC,
  localparam int unsigned NT    = (1 << AO) - 1,
  localparam int unsigned WRB   = wr_bits(SIMD, W, AO, ACC, THRESH),
  localparam int unsigned PEW   = (PE > 1) ? $clog2(PE) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  output logic                 in_ready,
  input  logic [M*SIMD*A-1:0]  in_data,
  output logic                 out_valid,
  input  logic                 out_ready,
  output logic [M*PE*OB-1:0]   out_data,
  input  logic                 wr_en,
  input  mem_sel_e             wr_sel,
  input  logic [PEW-1:0]       wr_pe,
  input  logic [31:0]          wr_addr,
  input  logic [WRB-1:0]       wr_data
);
  localparam int unsigned SF  = MW / SIMD;
  localparam int unsigned NF  = MH / PE;
  localparam int unsigned WD  = SF * NF;
  localparam int unsigned WAW = (WD > 1) ? $clog2(WD) : 1;
  localparam int unsigned TAW = (NF > 1) ? $clog2(NF) : 1;
  localparam int unsigned SFW = (SF > 1) ? $clog2(SF) : 1;
  localparam int unsigned NFW = (NF > 1) ? $clog2(NF) : 1;
  localparam int unsigned PW  = prod_bits(W, A);
  localparam int unsigned SW  = PW + $clog2(SIMD) + 1;

  // ---------------- stage 0: fold counters, input buffer, memory reads -----
  logic           adv;      // the whole pipeline moves this cycle
  logic           issue;    // a (vector, fold) step enters stage 1
  logic [SFW-1:0] sf;
  logic [NFW-1:0] nf;
  logic [WAW-1:0] widx;     // nf*SF + sf
  logic [M*SIMD*A-1:0] ibuf [SF];
  logic [M*SIMD*A-1:0] vec;

  assign adv      = !out_valid || out_ready;
  assign in_ready = adv && (nf == '0);
  assign issue    = adv && ((nf != '0) || in_valid);
  assign vec      = (nf == '0) ? in_data : ibuf[sf];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      sf   <= '0;
      nf   <= '0;
      widx <= '0;
    end else if (issue) begin
      if (sf == SFW'(SF - 1)) begin
        sf <= '0;
        nf <= (nf == NFW'(NF - 1)) ? '0 : nf + 1'b1;
      end else begin
        sf <= sf + 1'b1;
      end
      widx <= (widx == WAW'(WD - 1)) ? '0 : widx + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (issue && nf == '0) ibuf[sf] <= in_data;
  end

  // stage 1 registers
  logic                s1_valid, s1_first, s1_last;
  logic [M*SIMD*A-1:0] s1_vec;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      s1_first <= 1'b0;
      s1_last  <= 1'b0;
      s1_vec   <= '0;
    end else if (adv) begin
      s1_valid <= issue;
      s1_first <= (sf == '0);
      s1_last  <= (sf == SFW'(SF - 1));
      s1_vec   <= vec;
    end
  end

  // ---------------- stage 1: multiply, sum, accumulate, threshold ----------
  logic [M*PE*OB-1:0] res;

  for (genvar p = 0; p < PE; p++) begin : g_pe
    logic [SIMD*W-1:0] wword;
    logic [NT*ACC-1:0] tword;

    weight_mem #(.DW(SIMD * W), .DEPTH(WD)) u_wmem (
      .clk   (clk),
      .we    (wr_en && wr_sel == SEL_WEIGHT && wr_pe == PEW'(p)),
      .waddr (WAW'(wr_addr)),
      .wdata (wr_data[SIMD*W-1:0]),
      .re    (adv),
      .raddr (widx),
      .rdata (wword)
    );

    if (THRESH != 0) begin : g_thr
      threshold_mem #(.ACC(ACC), .AO(AO), .DEPTH(NF)) u_tmem (
        .clk   (clk),
        .we    (wr_en && wr_sel == SEL_THRESH && wr_pe == PEW'(p)),
        .waddr (TAW'(wr_addr)),
        .wdata (wr_data[NT*ACC-1:0]),
        .re    (adv),
        .raddr (TAW'(nf)),
        .rdata (tword)
      );
    end else begin : g_nothr
      assign tword = '0;
    end

    for (genvar m = 0; m < M; m++) begin : g_mv
      logic [SIMD*PW-1:0] prods;
      logic [SW-1:0]      dot;
      logic [ACC-1:0]     acc, acc_next;

      vector_mul #(.SIMD(SIMD), .W(W), .A(A)) u_mul (
        .w (wword),
        .a (s1_vec[m*SIMD*A +: SIMD*A]),
        .p (prods)
      );
      vector_sum #(.SIMD(SIMD), .IW(PW), .OW(SW)) u_sum (
        .x (prods),
        .s (dot)
      );

      assign acc_next = (s1_first ? '0 : acc) + ACC'(signed'(dot));

      always_ff @(posedge clk) begin
        if (!rst_n)                   acc <= '0;
        else if (adv && s1_valid)     acc <= acc_next;
      end

      if (THRESH != 0) begin : g_q
        logic [AO-1:0] q;
        threshold_unit #(.ACC(ACC), .AO(AO)) u_thr (
          .acc (acc_next),
          .thr (tword),
          .q   (q)
        );
        assign res[(m*PE+p)*OB +: OB] = q;
      end else begin : g_raw
        assign res[(m*PE+p)*OB +: OB] = acc_next;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
    end else if (adv && s1_valid && s1_last) begin
      out_valid <= 1'b1;
      out_data  <= res;
    end else if (out_ready) begin
      out_valid <= 1'b0;
    end
  end

  // Stream rule: a result that is offered stays offered, unchanged, until taken.
  a_out_hold: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_data));

endmodule
