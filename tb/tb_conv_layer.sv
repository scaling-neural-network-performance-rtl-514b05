// tb_conv_layer: one complete hardware layer (6x6x4 input, 3x3 convolution
// with padding 1 to 4 channels, bipolar weights, 2-bit activations, 2x2 max
// pooling) for M = 2 images, two frames. Weights and thresholds come from the
// reference model's hash, are loaded through the write port, and every
// output value is compared with the reference model's layer function.
// Output backpressure is random.
module tb_conv_layer;
  import qnn_pkg::*;
  import qnn_ref_pkg::*;
  localparam int M = 2, FR = 2;
  localparam layer_cfg_t CFG = '{N: 6, C: 4, K: 3, S: 1, PAD: 1, CO: 4, A: 2, W: 1, AO: 2,
                                 SIMD: 2, PE: 2, IN_PAR: 2, THRESH: 1,
                                 POOL_K: 2, POOL_S: 2, POOL_PAD: 0};
  localparam int IW = M * CFG.IN_PAR * CFG.A, OB = cfg_ob(CFG), OW = M * CFG.PE * OB;
  localparam int WRB = cfg_wr_bits(CFG), OD = cfg_od(CFG);
  localparam int SF = cfg_mw(CFG) / CFG.SIMD, NF = CFG.CO / CFG.PE;
  localparam int PEN = CFG.PE, IP = CFG.IN_PAR, AB = CFG.A;

  int checks = 0, failures = 0, stalls = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [IW-1:0] in_data = '0;
  logic [OW-1:0] out_data;
  logic wr_en = 0;
  mem_sel_e wr_sel = SEL_WEIGHT;
  logic [0:0] wr_pe = '0;
  logic [31:0] wr_addr = '0;
  logic [WRB-1:0] wr_data = '0;

  conv_layer #(.M(M), .CFG(CFG)) dut (.*);

  int inmap [$], outmap [$];
  int exp_q [$], frames [$];
  int nbeats = 0;

  initial begin
    #2000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) out_ready <= ($urandom % 3 != 0);
  always @(posedge clk) if (rst_n) begin
    if (out_valid && !out_ready) stalls++;
    if (out_valid && out_ready) begin
      for (int i = 0; i < M * PEN; i++) begin
        int e;
        e = exp_q.pop_front();
        checks++;
        if (int'(out_data[i*OB +: OB]) != e) begin
          failures++;
          $display("beat %0d lane %0d: %0d expected %0d", nbeats, i, out_data[i*OB +: OB], e);
        end
      end
      nbeats++;
    end
  end

  initial begin
    int N, C, CO;
    N = int'(CFG.N); C = int'(CFG.C); CO = int'(CFG.CO);
    for (int f = 0; f < FR; f++) begin
      inmap = {};
      for (int e = 0; e < M * N * N * C; e++) inmap.push_back(int'($urandom % 4));
      layer(0, CFG, M, inmap, outmap);
      for (int e = 0; e < M * N * N * C; e++) frames.push_back(inmap[e]);
      for (int y = 0; y < OD; y++)
        for (int x = 0; x < OD; x++)
          for (int b = 0; b < NF; b++)
            for (int m = 0; m < M; m++)
              for (int p = 0; p < PEN; p++)
                exp_q.push_back(outmap[((m * OD + y) * OD + x) * CO + b * PEN + p]);
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    wr_en = 1;
    for (int p = 0; p < PEN; p++)
      for (int nf = 0; nf < NF; nf++) begin
        wr_pe = 1'(p);
        for (int sf = 0; sf < SF; sf++) begin
          wr_sel = SEL_WEIGHT; wr_addr = 32'(nf * SF + sf);
          wr_data = WRB'(wword(0, CFG, p, nf, sf));
          @(negedge clk);
        end
        wr_sel = SEL_THRESH; wr_addr = 32'(nf); wr_data = WRB'(tword(0, CFG, p, nf));
        @(negedge clk);
      end
    wr_en = 0;
    for (int f = 0; f < FR; f++)
      for (int px = 0; px < N * N; px++)
        for (int b = 0; b < C / IP; b++) begin
          in_valid = 1;
          for (int m = 0; m < M; m++)
            for (int i = 0; i < IP; i++)
              in_data[(m * IP + i) * AB +: AB] =
                AB'(frames[f * M * N * N * C + (m * N * N + px) * C + b * IP + i]);
          @(posedge clk);
          while (!in_ready) @(posedge clk);
          @(negedge clk);
        end
    in_valid = 0;
    while (nbeats < FR * OD * OD * NF) @(negedge clk);
    repeat (20) @(negedge clk);
    checks++;
    if (out_valid) begin failures++; $display("extra output beats"); end
    checks++;
    if (stalls == 0) begin failures++; $display("no output stall"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
