// tb_qnn_top_full: two complete frames through the accelerator at its default
// configuration, the full DoReFa-Net (224x224 RGB image in, 1000 class
// scores out), with every weight and threshold loaded through the cfg port
// and every score compared with the reference model. The time between
// the two frames' last results is the steady-state frame interval.
module tb_qnn_top_full;
  import qnn_pkg::*;
  import qnn_ref_pkg::*;
  localparam int NL = DOREFA_NL, M = 1, FR = 2, RND = 0;
  localparam layer_cfg_t CFG [NL] = DOREFA_NET;

  initial begin
    #400000000;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

`include "tb_qnn_top_body.svh"

  qnn_top dut (.*);
endmodule
