// tb_pool_unit: two random frames of 6x6 pixels, 4 channels, two images,
// through a 3x3 stride 2 max pooling unit with padding 1, random handshakes;
// each output channel is compared with the window maximum computed here.
module tb_pool_unit;
  import qnn_pkg::*;
  localparam int N = 6, C = 4, PK = 3, PS = 2, PAD = 1, A = 2, M = 2, PAR = 2;
  localparam int OD = out_dim(N, PK, PS, PAD), FR = 2;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [M*PAR*A-1:0] in_data = '0, out_data;

  pool_unit #(.N(N), .C(C), .PK(PK), .PS(PS), .PAD(PAD), .A(A), .M(M), .PAR(PAR)) dut (.*);

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
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    for (int i = 0; i < M * PAR; i++) begin
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

  initial begin
    for (int f = 0; f < FR; f++)
      for (int m = 0; m < M; m++)
        for (int y = 0; y < N; y++)
          for (int x = 0; x < N; x++)
            for (int c = 0; c < C; c++) img[f][m][y][x][c] = int'($urandom % 4);
    // expected: pixel by pixel, C/PAR beats of (m, lane)
    for (int f = 0; f < FR; f++)
      for (int py = 0; py < OD; py++)
        for (int px = 0; px < OD; px++)
          for (int b = 0; b < C / PAR; b++)
            for (int m = 0; m < M; m++)
              for (int i = 0; i < PAR; i++) begin
                int best;
                best = 0;
                for (int ky = 0; ky < PK; ky++)
                  for (int kx = 0; kx < PK; kx++) begin
                    int iy, ix;
                    iy = py * PS - PAD + ky; ix = px * PS - PAD + kx;
                    if (iy >= 0 && iy < N && ix >= 0 && ix < N) begin
                      if (img[f][m][iy][ix][b * PAR + i] > best) best = img[f][m][iy][ix][b * PAR + i];
                    end
                  end
                exp_q.push_back(best);
              end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int f = 0; f < FR; f++)
      for (int y = 0; y < N; y++)
        for (int x = 0; x < N; x++)
          for (int b = 0; b < C / PAR; b++) begin
            while ($urandom % 4 == 0) begin in_valid = 0; @(negedge clk); end
            in_valid = 1;
            for (int m = 0; m < M; m++)
              for (int i = 0; i < PAR; i++)
                in_data[(m * PAR + i) * A +: A] = A'(img[f][m][y][x][b * PAR + i]);
            @(posedge clk);
            while (!in_ready) @(posedge clk);
            @(negedge clk);
          end
    in_valid = 0;
    while (nbeats < FR * OD * OD * C / PAR) @(negedge clk);
    repeat (20) @(negedge clk);
    checks++;
    if (out_valid) begin failures++; $display("extra output beats"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
