// tb_qnn_top: end-to-end test of the streaming accelerator on a small
// three-layer network that uses every layer feature of the full design:
// an 8-bit-weight, 8-bit-input first convolution with padding and 2x2 max
// pooling, a bipolar-weight convolution with stride 2, and a fully
// connected 8-bit-weight layer with raw scores out; two images per lane set
// (M = 2), three frames back to back, random output backpressure.
module tb_qnn_top;
  import qnn_pkg::*;
  import qnn_ref_pkg::*;
  localparam int NL = 3, M = 2, FR = 3, RND = 1;
  localparam layer_cfg_t CFG [NL] = '{
    '{N: 8, C: 3, K: 3, S: 1, PAD: 1, CO: 8, A: 8, W: 8, AO: 2, SIMD: 3, PE: 4, IN_PAR: 3,
      THRESH: 1, POOL_K: 2, POOL_S: 2, POOL_PAD: 0},
    '{N: 4, C: 8, K: 3, S: 2, PAD: 1, CO: 8, A: 2, W: 1, AO: 2, SIMD: 4, PE: 2, IN_PAR: 4,
      THRESH: 1, POOL_K: 0, POOL_S: 1, POOL_PAD: 0},
    '{N: 2, C: 8, K: 2, S: 1, PAD: 0, CO: 10, A: 2, W: 8, AO: 8, SIMD: 2, PE: 2, IN_PAR: 2,
      THRESH: 0, POOL_K: 0, POOL_S: 1, POOL_PAD: 0}
  };

  initial begin
    #50000000;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

`include "tb_qnn_top_body.svh"

  qnn_top #(.NL(NL), .M(M), .CFG(CFG)) dut (.*);
endmodule
