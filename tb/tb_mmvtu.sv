// tb_mmvtu: loads random weights and thresholds into two MMVTUs (bipolar
// weights with 2-bit thresholded outputs, and 4-bit weights with raw
// accumulator outputs), streams random input vectors for M = 2 images and
// checks every output beat against dot products computed here. The first
// phase randomises valid and ready to exercise stalls; the second keeps
// both high and checks the rate of one (synapse, neuron) fold per cycle,
// SF*NF cycles per vector.
module tb_mmvtu;
  import qnn_pkg::*;
  localparam int M = 2, SIMD = 4, PE = 2, MW = 16, MH = 8, A = 2, AO = 2, NT = 3;
  localparam int SF = MW / SIMD, NF = MH / PE;
  localparam int ACC1 = acc_bits(1, A, MW), ACC4 = acc_bits(4, A, MW);
  localparam int WRB1 = wr_bits(SIMD, 1, AO, ACC1, 1), WRB4 = wr_bits(SIMD, 4, AO, ACC4, 0);
  localparam int NV1 = 40, NV2 = 20;

  int checks = 0, failures = 0, stalls = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid = 0, in_ready, in_ready4;
  logic [M*SIMD*A-1:0] in_data = '0;
  logic out_valid, out_valid4, out_ready = 0;
  logic [M*PE*AO-1:0] out_data;
  logic [M*PE*ACC4-1:0] out_data4;
  logic wr_en = 0;
  mem_sel_e wr_sel = SEL_WEIGHT;
  logic [0:0] wr_pe = '0;
  logic [31:0] wr_addr = '0;
  logic [WRB1-1:0] wr_data1 = '0;
  logic [WRB4-1:0] wr_data4 = '0;

  mmvtu #(.M(M), .SIMD(SIMD), .PE(PE), .MW(MW), .MH(MH), .W(1), .A(A), .AO(AO), .THRESH(1))
    dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_ready(in_ready), .in_data(in_data),
         .out_valid(out_valid), .out_ready(out_ready), .out_data(out_data),
         .wr_en(wr_en), .wr_sel(wr_sel), .wr_pe(wr_pe), .wr_addr(wr_addr), .wr_data(wr_data1));
  mmvtu #(.M(M), .SIMD(SIMD), .PE(PE), .MW(MW), .MH(MH), .W(4), .A(A), .AO(AO), .THRESH(0))
    dut4 (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_ready(in_ready4), .in_data(in_data),
          .out_valid(out_valid4), .out_ready(out_ready), .out_data(out_data4),
          .wr_en(wr_en), .wr_sel(wr_sel), .wr_pe(wr_pe), .wr_addr(wr_addr), .wr_data(wr_data4));

  int w1 [MH][MW], w4 [MH][MW], th [MH][NT];
  int x [$];                      // input elements, vector-major: (v*M + m)*MW + col
  int exp1 [$], exp4 [$];         // expected outputs in stream order
  int nout = 0;

  initial begin
    #2000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected results of vector v
  task automatic expect_vec(int v);
    for (int nf = 0; nf < NF; nf++)
      for (int m = 0; m < M; m++)
        for (int p = 0; p < PE; p++) begin
          int co, s1, s4, q;
          co = nf * PE + p; s1 = 0; s4 = 0;
          for (int c = 0; c < MW; c++) begin
            s1 += w1[co][c] * x[(v * M + m) * MW + c];
            s4 += w4[co][c] * x[(v * M + m) * MW + c];
          end
          q = 0;
          for (int j = 0; j < NT; j++) if (s1 >= th[co][j]) q++;
          exp1.push_back(q);
          exp4.push_back(s4);
        end
  endtask

  task automatic send_vec(int v, bit rnd);
    for (int sf = 0; sf < SF; sf++) begin
      while (rnd && ($urandom % 3 == 0)) begin in_valid = 0; @(negedge clk); end
      in_valid = 1;
      for (int m = 0; m < M; m++)
        for (int i = 0; i < SIMD; i++)
          in_data[(m * SIMD + i) * A +: A] = A'(x[(v * M + m) * MW + sf * SIMD + i]);
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      @(negedge clk);
    end
    in_valid = 0;
  endtask

  // output monitor
  bit rnd_ready = 1;
  always @(negedge clk) out_ready <= rnd_ready ? ($urandom % 4 != 0) : 1'b1;
  always @(posedge clk) begin
    if (rst_n && out_valid && !out_ready) stalls++;
    if (rst_n && out_valid != out_valid4) begin failures++; $display("units out of step"); end
    if (rst_n && out_valid && out_ready) begin
      for (int i = 0; i < M * PE; i++) begin
        int e1, e4;
        e1 = exp1.pop_front();
        e4 = exp4.pop_front();
        checks += 2;
        if (int'(out_data[i*AO +: AO]) != e1) begin
          failures++; $display("beat %0d lane %0d: level %0d expected %0d", nout, i, out_data[i*AO +: AO], e1);
        end
        if (int'(signed'(out_data4[i*ACC4 +: ACC4])) != e4) begin
          failures++; $display("beat %0d lane %0d: raw %0d expected %0d", nout, i,
                               int'(signed'(out_data4[i*ACC4 +: ACC4])), e4);
        end
      end
      nout++;
    end
  end

  initial begin
    int t0, t1;
    for (int co = 0; co < MH; co++) begin
      int t;
      for (int c = 0; c < MW; c++) begin
        w1[co][c] = ($urandom % 2) ? 1 : -1;
        w4[co][c] = int'($urandom % 16) - 8;
      end
      t = int'($urandom % 10) - 12;
      for (int j = 0; j < NT; j++) begin th[co][j] = t; t += 2 + int'($urandom % 8); end
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    // load weights and thresholds
    wr_en = 1;
    for (int p = 0; p < PE; p++)
      for (int nf = 0; nf < NF; nf++) begin
        wr_pe = 1'(p);
        for (int sf = 0; sf < SF; sf++) begin
          wr_sel = SEL_WEIGHT; wr_addr = 32'(nf * SF + sf); wr_data1 = '0; wr_data4 = '0;
          for (int i = 0; i < SIMD; i++) begin
            wr_data1[i] = (w1[nf * PE + p][sf * SIMD + i] > 0);
            wr_data4[i*4 +: 4] = 4'(w4[nf * PE + p][sf * SIMD + i]);
          end
          @(negedge clk);
        end
        wr_sel = SEL_THRESH; wr_addr = 32'(nf);
        for (int j = 0; j < NT; j++) wr_data1[j*ACC1 +: ACC1] = ACC1'(th[nf * PE + p][j]);
        @(negedge clk);
      end
    wr_en = 0;
    for (int v = 0; v < NV1 + NV2; v++) begin
      for (int e = 0; e < M * MW; e++) x.push_back(int'($urandom % (1 << A)));
      expect_vec(v);
    end
    // phase 1: random handshakes
    for (int v = 0; v < NV1; v++) send_vec(v, 1);
    while (nout < NV1 * NF) @(negedge clk);
    // phase 2: full rate
    rnd_ready = 0;
    @(negedge clk);
    t0 = $time / 10;
    for (int v = NV1; v < NV1 + NV2; v++) send_vec(v, 0);
    while (nout < (NV1 + NV2) * NF) @(negedge clk);
    t1 = $time / 10;
    checks++;
    if (t1 - t0 > NV2 * SF * NF + 4) begin
      failures++; $display("rate: %0d cycles for %0d vectors, expected %0d", t1 - t0, NV2, NV2 * SF * NF);
    end
    checks++;
    if (stalls == 0) begin failures++; $display("no output stall happened"); end
    $display("stalls=%0d cycles(full rate)=%0d", stalls, t1 - t0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
