// vector_mul: SIMD parallel weight x activation products (the "vector
// multiply" box of the MMVTU datapath).
//
// Each lane multiplies one W-bit weight by one unsigned A-bit activation and
// yields a signed product of prod_bits(W,A) bits. A 1-bit weight is bipolar,
// as the paper describes: bit 1 stands for +1 and bit 0 for -1, so the lane
// passes the activation or its negation and needs no multiplier. Wider
// weights are two's complement integers. Purely combinational.
//
// Ports: w packs SIMD weights (lane i in bits [i*W +: W]), a packs SIMD
// activations the same way, p packs the SIMD signed products.
module vector_mul import qnn_pkg::*; #(
  parameter int unsigned SIMD = 4,
  parameter int unsigned W    = 1,
  parameter int unsigned A    = 2,
  localparam int unsigned PW  = prod_bits(W, A)
) (
  input  logic [SIMD*W-1:0]  w,
  input  logic [SIMD*A-1:0]  a,
  output logic [SIMD*PW-1:0] p
);
  always_comb begin
    for (int i = 0; i < SIMD; i++) begin
      logic signed [PW-1:0] act;
      act = PW'(signed'({1'b0, a[i*A +: A]}));
      if (W == 1) begin
        p[i*PW +: PW] = w[i*W] ? act : -act;
      end else begin
        logic signed [W-1:0] wt;
        wt = signed'(w[i*W +: W]);
        p[i*PW +: PW] = PW'(PW'(wt) * act);
      end
    end
  end
endmodule
