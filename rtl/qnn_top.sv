// qnn_top: heterogeneous streaming QNN accelerator: one dedicated hardware
// layer per network layer, chained by valid/ready streams, image pixels in,
// class scores out.
//
// This is the dataflow organisation the paper adopts from FINN: instead of
// time-multiplexing one datapath over all layers, every layer gets its own
// conv_layer instance whose compute (SIMD x PE x M) is sized to that layer's
// share of the work, and all layers run concurrently on successive rows and
// frames. The layer chain is given by the CFG table; its default is the
// paper's DoReFa-Net (qnn_pkg::DOREFA_NET), M = 1 image per lane set.
//
// Interface:
//  * in_*  : image stream, M images in lockstep, CFG[0].IN_PAR channels of
//            CFG[0].A bits per image and beat, pixels in raster order.
//  * out_* : result stream of the last layer, M x CFG[NL-1].PE values of
//            cfg_ob(CFG[NL-1]) bits per beat (raw signed scores when the
//            last layer is not thresholded).
//  * cfg_* : weight/threshold load port; cfg_layer picks the layer, cfg_sel
//            the memory, cfg_pe the PE, cfg_addr the word; the low bits of
//            cfg_data are used. Loading while frames stream is not blocked,
//            it is up to the host to load before sending images.
// The host side (PCIe transfers, DDR) of the paper's platform is not part
// of this module; its streams are the ports above.
module qnn_top import qnn_pkg::*; #(
  parameter int unsigned NL = DOREFA_NL,
  parameter int unsigned M  = 1,
  parameter layer_cfg_t  CFG [NL] = DOREFA_NET,
  localparam int unsigned IW = M * CFG[0].IN_PAR * CFG[0].A,
  localparam int unsigned OW = M * CFG[NL-1].PE * cfg_ob(CFG[NL-1])
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  output logic                in_ready,
  input  logic [IW-1:0]       in_data,
  output logic                out_valid,
  input  logic                out_ready,
  output logic [OW-1:0]       out_data,
  input  logic                cfg_we,
  input  logic [7:0]          cfg_layer,
  input  mem_sel_e            cfg_sel,
  input  logic [15:0]         cfg_pe,
  input  logic [31:0]         cfg_addr,
  input  logic [cfg_dw()-1:0] cfg_data
);
  // widest configuration word and widest inter-layer stream
  function automatic int unsigned cfg_dw();
    int unsigned r = 1;
    for (int i = 0; i < NL; i++) r = max2(r, cfg_wr_bits(CFG[i]));
    return r;
  endfunction
  function automatic int unsigned stream_w();
    int unsigned r = M * CFG[0].IN_PAR * CFG[0].A;
    for (int i = 0; i < NL; i++) r = max2(r, M * CFG[i].PE * cfg_ob(CFG[i]));
    return r;
  endfunction
  localparam int unsigned SW = stream_w();

  logic          s_valid [NL+1];
  logic          s_ready [NL+1];
  logic [SW-1:0] s_data  [NL+1];

  assign s_valid[0] = in_valid;
  assign in_ready   = s_ready[0];
  assign s_data[0]  = SW'(in_data);
  assign out_valid  = s_valid[NL];
  assign s_ready[NL] = out_ready;
  assign out_data   = s_data[NL][OW-1:0];

  for (genvar i = 0; i < NL; i++) begin : g_layer
    localparam layer_cfg_t  LC  = CFG[i];
    localparam int unsigned LIW = M * LC.IN_PAR * LC.A;
    localparam int unsigned LOW = M * LC.PE * cfg_ob(LC);
    localparam int unsigned WRB = cfg_wr_bits(LC);
    localparam int unsigned PEW = (LC.PE > 1) ? $clog2(LC.PE) : 1;

    if (i > 0) begin : g_chk
      if (M * CFG[i-1].PE * cfg_ob(CFG[i-1]) != LIW || CFG[i-1].CO != LC.C ||
          cfg_od(CFG[i-1]) != LC.N) begin : g_bad
        $error("qnn_top: layer %0d does not match the output of the layer before", i);
      end
    end

    logic [LOW-1:0] od;

    conv_layer #(.M(M), .CFG(LC)) u_layer (
      .clk       (clk),
      .rst_n     (rst_n),
      .in_valid  (s_valid[i]),
      .in_ready  (s_ready[i]),
      .in_data   (s_data[i][LIW-1:0]),
      .out_valid (s_valid[i+1]),
      .out_ready (s_ready[i+1]),
      .out_data  (od),
      .wr_en     (cfg_we && cfg_layer == 8'(i)),
      .wr_sel    (cfg_sel),
      .wr_pe     (PEW'(cfg_pe)),
      .wr_addr   (cfg_addr),
      .wr_data   (cfg_data[WRB-1:0])
    );

    assign s_data[i+1] = SW'(od);
  end

endmodule
