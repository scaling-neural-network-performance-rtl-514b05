// conv_layer: one hardware layer of the streaming architecture: a sliding
// window unit feeding an MMVTU, followed by a max pooling unit when the
// layer configuration asks for one.
//
// As in the paper, every network layer gets its own layer instance, sized
// by its layer_cfg_t record (see qnn_pkg): the SWU turns the incoming
// N x N x C activation map into K*K*C-element windows delivered SIMD
// channels per beat, the MMVTU multiplies them with the CO x K*K*C weight
// matrix PE rows at a time and thresholds the results, and the optional
// pool_unit reduces the OD x OD x CO result map. A fully connected layer is
// the case K = N (one window covering the whole map), which is how this
// design maps the paper's FC layers onto the same hardware.
//
// Interface: input stream M x IN_PAR channels of A bits per beat, output
// stream M x PE channels of cfg_ob(CFG) bits per beat (pixel by pixel,
// CO/PE beats per pixel). Weight/threshold load port as in mmvtu.
// Requirements (checked at elaboration): IN_PAR and SIMD divide C, PE
// divides CO, pooling only on thresholded layers.
module conv_layer import qnn_pkg::*; #(
  parameter int unsigned M = 1,
  parameter layer_cfg_t CFG = '{N: 6, C: 4, K: 3, S: 1, PAD: 1, CO: 4, A: 2, W: 1,
                                AO: 2, SIMD: 2, PE: 2, IN_PAR: 2, THRESH: 1,
                                POOL_K: 2, POOL_S: 2, POOL_PAD: 0},
  localparam int unsigned IW  = M * CFG.IN_PAR * CFG.A,
  localparam int unsigned OB  = cfg_ob(CFG),
  localparam int unsigned OW  = M * CFG.PE * OB,
  localparam int unsigned WRB = cfg_wr_bits(CFG),
  localparam int unsigned PEW = (CFG.PE > 1) ? $clog2(CFG.PE) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           in_valid,
  output logic           in_ready,
  input  logic [IW-1:0]  in_data,
  output logic           out_valid,
  input  logic           out_ready,
  output logic [OW-1:0]  out_data,
  input  logic           wr_en,
  input  mem_sel_e       wr_sel,
  input  logic [PEW-1:0] wr_pe,
  input  logic [31:0]    wr_addr,
  input  logic [WRB-1:0] wr_data
);
  localparam int unsigned OD = out_dim(CFG.N, CFG.K, CFG.S, CFG.PAD);
  localparam int unsigned XW = M * CFG.SIMD * CFG.A;

  if (CFG.C % CFG.SIMD != 0 || CFG.C % CFG.IN_PAR != 0 || CFG.CO % CFG.PE != 0 ||
      (CFG.POOL_K != 0 && CFG.THRESH == 0)) begin : g_bad_cfg
    $error("conv_layer: unsupported folding or pooling configuration");
  end

  logic          x_valid, x_ready;
  logic [XW-1:0] x_data;
  logic          y_valid, y_ready;
  logic [OW-1:0] y_data;

  swu #(.N(CFG.N), .C(CFG.C), .K(CFG.K), .S(CFG.S), .PAD(CFG.PAD), .A(CFG.A), .M(M),
        .SIMD(CFG.SIMD), .IN_PAR(CFG.IN_PAR), .CHUNK_OUTER(1'b0)) u_swu (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (in_valid),
    .in_ready  (in_ready),
    .in_data   (in_data),
    .out_valid (x_valid),
    .out_ready (x_ready),
    .out_data  (x_data)
  );

  mmvtu #(.M(M), .SIMD(CFG.SIMD), .PE(CFG.PE), .MW(cfg_mw(CFG)), .MH(CFG.CO), .W(CFG.W),
          .A(CFG.A), .AO(CFG.AO), .THRESH(CFG.THRESH), .ACC(cfg_acc(CFG))) u_mvtu (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (x_valid),
    .in_ready  (x_ready),
    .in_data   (x_data),
    .out_valid (y_valid),
    .out_ready (y_ready),
    .out_data  (y_data),
    .wr_en     (wr_en),
    .wr_sel    (wr_sel),
    .wr_pe     (wr_pe),
    .wr_addr   (wr_addr),
    .wr_data   (wr_data)
  );

  if (CFG.POOL_K != 0) begin : g_pool
    pool_unit #(.N(OD), .C(CFG.CO), .PK(CFG.POOL_K), .PS(CFG.POOL_S), .PAD(CFG.POOL_PAD),
                .A(CFG.AO), .M(M), .PAR(CFG.PE)) u_pool (
      .clk       (clk),
      .rst_n     (rst_n),
      .in_valid  (y_valid),
      .in_ready  (y_ready),
      .in_data   (y_data),
      .out_valid (out_valid),
      .out_ready (out_ready),
      .out_data  (out_data)
    );
  end else begin : g_nopool
    assign out_valid = y_valid;
    assign y_ready   = out_ready;
    assign out_data  = y_data;
  end

endmodule
