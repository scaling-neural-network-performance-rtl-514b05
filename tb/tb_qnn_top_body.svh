// Shared body of the end-to-end testbenches of qnn_top. The including
// module defines NL, M, CFG, FR (frames) and RND (1: random backpressure),
// and instantiates the design as "dut" on the signals declared here.
//
// Flow: load every layer's weights and thresholds (generated by
// qnn_ref_pkg's hash) through the cfg port; stream FR frames of random
// pixels for M images; compute the expected class scores with the
// reference model, layer by layer; compare every output beat. Counted
// events: output stalls (backpressure), input stalls (line buffers or the
// pipeline full), frame overlap (frame f+1 entering while frame f is still
// being computed) and images of one beat giving different results (the M
// vectors are really independent). With FR > 1 the interval between the
// last beats of successive frames is checked against the cycle count of
// the slowest unit (MMVTU folds per frame, pooling windows or input beats),
// so the layers must really overlap.

  localparam int IW  = M * CFG[0].IN_PAR * CFG[0].A;
  localparam layer_cfg_t LL = CFG[NL-1];
  localparam int OB  = cfg_ob(LL);
  localparam int OW  = M * LL.PE * OB;
  localparam int LPE = LL.PE;
  localparam int IPAR = CFG[0].IN_PAR, IA = CFG[0].A, IN0 = CFG[0].N, IC0 = CFG[0].C;
  localparam int OD  = cfg_od(LL);
  localparam int NFL = LL.CO / LL.PE;
  localparam int LCO = LL.CO;
  localparam bit LTH = (LL.THRESH != 0);

  function automatic int unsigned dw();
    int unsigned r = 1;
    for (int i = 0; i < NL; i++) r = max2(r, cfg_wr_bits(CFG[i]));
    return r;
  endfunction
  localparam int DW = dw();

  // cycles per frame of the slowest unit: MMVTU folds, pooling windows, or
  // the input beats of the first layer; frames that stream back to back
  // should finish this far apart
  function automatic longint bottleneck();
    longint r, od, c;
    r = longint'(CFG[0].N * CFG[0].N * (CFG[0].C / CFG[0].IN_PAR));
    for (int i = 0; i < NL; i++) begin
      od = longint'(out_dim(CFG[i].N, CFG[i].K, CFG[i].S, CFG[i].PAD));
      c  = od * od * longint'(cfg_mw(CFG[i]) / CFG[i].SIMD) * longint'(CFG[i].CO / CFG[i].PE);
      if (c > r) r = c;
      if (CFG[i].POOL_K != 0) begin
        c = longint'(cfg_od(CFG[i]) * cfg_od(CFG[i]) * CFG[i].POOL_K * CFG[i].POOL_K *
                     (CFG[i].CO / CFG[i].PE));
        if (c > r) r = c;
      end
    end
    return r;
  endfunction

  int checks = 0, failures = 0;
  int out_stalls = 0, in_stalls = 0, overlap = 0, lanes_differ = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [IW-1:0] in_data = '0;
  logic [OW-1:0] out_data;
  logic cfg_we = 0;
  logic [7:0] cfg_layer = '0;
  mem_sel_e cfg_sel = SEL_WEIGHT;
  logic [15:0] cfg_pe = '0;
  logic [31:0] cfg_addr = '0;
  logic [DW-1:0] cfg_data = '0;

  int frames [$];        // all input pixels, frame-major
  int exp_q [$];
  int nbeats = 0, frames_in = 0;
  bit rnd_ready = RND;
  longint t_load, t_start, t_end;
  longint frame_done [$];   // cycle of the last result beat of each frame

  always @(negedge clk) out_ready <= rnd_ready ? ($urandom % 3 != 0) : 1'b1;
  always @(posedge clk) if (rst_n) begin
    if (out_valid && !out_ready) out_stalls++;
    if (in_valid && !in_ready) in_stalls++;
    if (in_valid && in_ready && frames_in > nbeats / (OD * OD * NFL)) overlap++;
    if (out_valid && out_ready) begin
      for (int i = 0; i < M * LPE; i++) begin
        int e, g;
        e = exp_q.pop_front();
        g = LTH ? int'(out_data[i*OB +: OB]) : int'(signed'(out_data[i*OB +: OB]));
        checks++;
        if (g != e) begin
          failures++;
          if (failures < 10) $display("beat %0d lane %0d: %0d expected %0d", nbeats, i, g, e);
        end
      end
      if (M > 1 && out_data[0 +: LPE*OB] != out_data[LPE*OB +: LPE*OB]) lanes_differ++;
      nbeats++;
      if (nbeats % (OD * OD * NFL) == 0) frame_done.push_back($time / 10);
    end
  end

  initial begin
    int inmap [$], a [$], b [$];
    repeat (3) @(negedge clk);
    rst_n = 1;
    // load weights and thresholds of every layer
    cfg_we = 1;
    for (int l = 0; l < NL; l++) begin
      int sf_n, nf_n;
      sf_n = int'(cfg_mw(CFG[l]) / CFG[l].SIMD);
      nf_n = int'(CFG[l].CO / CFG[l].PE);
      cfg_layer = 8'(l);
      for (int p = 0; p < int'(CFG[l].PE); p++) begin
        cfg_pe = 16'(p);
        for (int nf = 0; nf < nf_n; nf++) begin
          for (int sf = 0; sf < sf_n; sf++) begin
            cfg_sel = SEL_WEIGHT; cfg_addr = 32'(nf * sf_n + sf);
            cfg_data = DW'(wword(l, CFG[l], p, nf, sf));
            @(negedge clk);
          end
          if (CFG[l].THRESH != 0) begin
            cfg_sel = SEL_THRESH; cfg_addr = 32'(nf);
            cfg_data = DW'(tword(l, CFG[l], p, nf));
            @(negedge clk);
          end
        end
      end
    end
    cfg_we = 0;
    t_load = $time / 10;
    // stimulus and expected results
    for (int f = 0; f < FR; f++) begin
      inmap = {};
      for (int e = 0; e < M * IN0 * IN0 * IC0; e++) inmap.push_back(int'($urandom % (1 << IA)));
      for (int e = 0; e < M * IN0 * IN0 * IC0; e++) frames.push_back(inmap[e]);
      a = inmap;
      for (int l = 0; l < NL; l++) begin
        layer(l, CFG[l], M, a, b);
        a = b;
      end
      for (int y = 0; y < OD; y++)
        for (int x = 0; x < OD; x++)
          for (int nf = 0; nf < NFL; nf++)
            for (int m = 0; m < M; m++)
              for (int p = 0; p < LPE; p++)
                exp_q.push_back(a[((m * OD + y) * OD + x) * LCO + nf * LPE + p]);
    end
    // the scores must not be degenerate (all equal) for the comparison to mean much
    begin
      int distinct [int];
      foreach (exp_q[i]) distinct[exp_q[i]] = 1;
      checks++;
      if (distinct.num() < 2) begin failures++; $display("reference scores are all equal"); end
      $display("reference model done, %0d distinct score values", distinct.num());
    end
    t_start = $time / 10;
    for (int f = 0; f < FR; f++) begin
      frames_in = f + 1;
      for (int px = 0; px < IN0 * IN0; px++)
        for (int bt = 0; bt < IC0 / IPAR; bt++) begin
          in_valid = 1;
          for (int m = 0; m < M; m++)
            for (int i = 0; i < IPAR; i++)
              in_data[(m * IPAR + i) * IA +: IA] =
                IA'(frames[f * M * IN0 * IN0 * IC0 + (m * IN0 * IN0 + px) * IC0 + bt * IPAR + i]);
          @(posedge clk);
          while (!in_ready) @(posedge clk);
          @(negedge clk);
        end
    end
    in_valid = 0;
    while (nbeats < FR * OD * OD * NFL) @(negedge clk);
    t_end = $time / 10;
    repeat (20) @(negedge clk);
    checks++;
    if (out_valid) begin failures++; $display("extra output beats"); end
    checks++;
    if (RND && out_stalls == 0) begin failures++; $display("no output stall"); end
    checks++;
    if (in_stalls == 0) begin failures++; $display("no input stall"); end
    checks++;
    if (FR > 1 && overlap == 0) begin failures++; $display("frames never overlapped"); end
    checks++;
    if (M > 1 && lanes_differ == 0) begin failures++; $display("the M images never differed"); end
    $display("load cycles=%0d run cycles=%0d for %0d frames", t_load, t_end - t_start, FR);
    for (int f = 1; f < FR; f++) begin
      longint iv;
      iv = frame_done[f] - frame_done[f-1];
      $display("frame %0d finished %0d cycles after frame %0d (slowest unit %0d)", f, iv, f - 1,
               bottleneck());
      checks++;
      if (iv > bottleneck() + bottleneck() / 10 + 20) begin
        failures++; $display("frame interval above the slowest unit's cycle count");
      end
    end
    $display("out_stalls=%0d in_stalls=%0d overlap=%0d lanes_differ=%0d", out_stalls, in_stalls,
             overlap, lanes_differ);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
