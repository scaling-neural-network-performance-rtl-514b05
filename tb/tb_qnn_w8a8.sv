// tb_qnn_w8a8: the accelerator with W8A8 hidden layers (8-bit weights,
// 8-bit activations), one of the precisions of the paper's DoReFa-Net
// study, on a small three-layer network: 8-bit first convolution with 2x2
// max pooling, a W8A8 3x3 convolution, and an 8-bit-weight fully connected
// layer with raw scores out. Two frames, random backpressure, every score
// compared with the reference model.
module tb_qnn_w8a8;
  import qnn_pkg::*;
  import qnn_ref_pkg::*;
  localparam int NL = 3, M = 1, FR = 2, RND = 1;
  localparam layer_cfg_t CFG [NL] = '{
    '{N: 6, C: 3, K: 3, S: 1, PAD: 1, CO: 4, A: 8, W: 8, AO: 8, SIMD: 3, PE: 2, IN_PAR: 3,
      THRESH: 1, POOL_K: 2, POOL_S: 2, POOL_PAD: 0},
    '{N: 3, C: 4, K: 3, S: 1, PAD: 1, CO: 4, A: 8, W: 8, AO: 8, SIMD: 2, PE: 2, IN_PAR: 2,
      THRESH: 1, POOL_K: 0, POOL_S: 1, POOL_PAD: 0},
    '{N: 3, C: 4, K: 3, S: 1, PAD: 0, CO: 6, A: 8, W: 8, AO: 8, SIMD: 2, PE: 2, IN_PAR: 2,
      THRESH: 0, POOL_K: 0, POOL_S: 1, POOL_PAD: 0}
  };

  initial begin
    #20000000;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

`include "tb_qnn_top_body.svh"

  qnn_top #(.NL(NL), .M(M), .CFG(CFG)) dut (.*);
endmodule
