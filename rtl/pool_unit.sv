// pool_unit: max pooling on an activation stream (the "MaxPool" that
// follows some convolutions of the DoReFa-Net topology).
//
// The paper names pooling only; this unit reuses the sliding window unit:
// an swu instance scans PK x PK windows with stride PS over the N x N x C
// map and delivers, for each output pixel and each chunk of PAR channels,
// the PK*PK window elements one after the other (chunk-outer order). A
// reducer keeps the running per-channel maximum and emits one beat of PAR
// channels per chunk. Padding positions read as 0, which cannot exceed any
// activation because activations are unsigned.
//
// Interface: valid/ready streams of M images x PAR channels x A bits per
// beat, both sides in the same channel order as the MMVTU output (C/PAR
// beats per pixel). Throughput: one output beat every PK*PK cycles.
module pool_unit import qnn_pkg::*; #(
  parameter int unsigned N   = 8,
  parameter int unsigned C   = 4,
  parameter int unsigned PK  = 2,
  parameter int unsigned PS  = 2,
  parameter int unsigned PAD = 0,
  parameter int unsigned A   = 2,
  parameter int unsigned M   = 1,
  parameter int unsigned PAR = 2
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  output logic               in_ready,
  input  logic [M*PAR*A-1:0] in_data,
  output logic               out_valid,
  input  logic               out_ready,
  output logic [M*PAR*A-1:0] out_data
);
  logic               w_valid, w_ready;
  logic [M*PAR*A-1:0] w_data, run, run_next;
  int unsigned        k;

  swu #(.N(N), .C(C), .K(PK), .S(PS), .PAD(PAD), .A(A), .M(M), .SIMD(PAR),
        .IN_PAR(PAR), .CHUNK_OUTER(1'b1)) u_win (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (in_valid),
    .in_ready  (in_ready),
    .in_data   (in_data),
    .out_valid (w_valid),
    .out_ready (w_ready),
    .out_data  (w_data)
  );

  assign w_ready = !out_valid || out_ready;

  always_comb begin
    for (int i = 0; i < M * PAR; i++) begin
      if (k == 0 || w_data[i*A +: A] > run[i*A +: A]) run_next[i*A +: A] = w_data[i*A +: A];
      else                                           run_next[i*A +: A] = run[i*A +: A];
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      k         <= 0;
      run       <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      if (out_ready) out_valid <= 1'b0;
      if (w_valid && w_ready) begin
        run <= run_next;
        if (k == PK * PK - 1) begin
          k         <= 0;
          out_valid <= 1'b1;
          out_data  <= run_next;
        end else begin
          k <= k + 1;
        end
      end
    end
  end

  a_out_hold: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_data));

endmodule
