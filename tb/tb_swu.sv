// tb_swu: streams three random frames into a sliding window unit (7x7
// pixels, 4 channels, 3x3 kernel, stride 2, padding 1, two images in
// lockstep, one channel per input beat, two channels per output beat) with
// random valid and ready, and compares every output beat with the window
// elements computed here from the frames. Also checks that the writer was
// held back by a full line buffer and that input and output overlapped.
module tb_swu;
  import qnn_pkg::*;
  localparam int N = 7, C = 4, K = 3, S = 2, PAD = 1, A = 3, M = 2, SIMD = 2, IN_PAR = 1;
  localparam int OD = out_dim(N, K, S, PAD), CF = C / SIMD, FR = 3;

  int checks = 0, failures = 0, blocked = 0, overlap = 0, padded = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [M*IN_PAR*A-1:0] in_data = '0;
  logic [M*SIMD*A-1:0]   out_data;

  swu #(.N(N), .C(C), .K(K), .S(S), .PAD(PAD), .A(A), .M(M), .SIMD(SIMD), .IN_PAR(IN_PAR))
    dut (.*);

  int img [FR][M][N][N][C];
  int exp_q [$];
  int nbeats = 0;

  initial begin
    #1000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) out_ready <= ($urandom % 3 != 0);
  always @(posedge clk) if (rst_n) begin
    if (in_valid && !in_ready) blocked++;
    if (in_valid && in_ready && out_valid) overlap++;
    if (out_valid && out_ready) begin
      for (int i = 0; i < M * SIMD; i++) begin
        int e;
        e = exp_q.pop_front();
        checks++;
        if (int'(out_data[i*A +: A]) != e) begin
          failures++;
          $display("beat %0d lane %0d: %0d expected %0d", nbeats, i, out_data[i*A +: A], e);
        end
      end
      nbeats++;
    end
  end

  initial begin
    for (int f = 0; f < FR; f++)
      for (int m = 0; m < M; m++)
        for (int y = 0; y < N; y++)
          for (int x = 0; x < N; x++)
            for (int c = 0; c < C; c++) img[f][m][y][x][c] = 1 + int'($urandom % 7);
    // expected window stream: (oy, ox, ky, kx, chunk, m, lane)
    for (int f = 0; f < FR; f++)
      for (int oy = 0; oy < OD; oy++)
        for (int ox = 0; ox < OD; ox++)
          for (int ky = 0; ky < K; ky++)
            for (int kx = 0; kx < K; kx++)
              for (int cf = 0; cf < CF; cf++)
                for (int m = 0; m < M; m++)
                  for (int i = 0; i < SIMD; i++) begin
                    int iy, ix;
                    iy = oy * S - PAD + ky; ix = ox * S - PAD + kx;
                    if (iy < 0 || iy >= N || ix < 0 || ix >= N) begin
                      exp_q.push_back(0); padded++;
                    end else exp_q.push_back(img[f][m][iy][ix][cf * SIMD + i]);
                  end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int f = 0; f < FR; f++)
      for (int y = 0; y < N; y++)
        for (int x = 0; x < N; x++)
          for (int b = 0; b < C / IN_PAR; b++) begin
            while ($urandom % 4 == 0) begin in_valid = 0; @(negedge clk); end
            in_valid = 1;
            for (int m = 0; m < M; m++)
              for (int i = 0; i < IN_PAR; i++)
                in_data[(m * IN_PAR + i) * A +: A] = A'(img[f][m][y][x][b * IN_PAR + i]);
            @(posedge clk);
            while (!in_ready) @(posedge clk);
            @(negedge clk);
          end
    in_valid = 0;
    while (nbeats < FR * OD * OD * K * K * CF) @(negedge clk);
    repeat (20) @(negedge clk);
    checks++;
    if (out_valid) begin failures++; $display("extra output beats"); end
    checks++;
    if (blocked == 0) begin failures++; $display("line buffer never full"); end
    checks++;
    if (overlap == 0) begin failures++; $display("input never overlapped output"); end
    $display("blocked=%0d overlap=%0d padded=%0d", blocked, overlap, padded);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
