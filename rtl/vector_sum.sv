// vector_sum: adds the SIMD signed products of one vector (the "vector sum"
// box of the MMVTU datapath).
//
// The paper names the block only; this version is a plain combinational
// sum that synthesis maps to an adder tree. Inputs are SIMD signed values of
// IW bits packed lane by lane, the output is their signed sum, sign-extended
// to OW bits (OW must be at least IW + clog2(SIMD) to be exact).
module vector_sum #(
  parameter int unsigned SIMD = 4,
  parameter int unsigned IW   = 3,
  parameter int unsigned OW   = IW + $clog2(SIMD) + 1
) (
  input  logic [SIMD*IW-1:0] x,
  output logic [OW-1:0]      s
);
  always_comb begin
    logic signed [OW-1:0] acc;
    acc = '0;
    for (int i = 0; i < SIMD; i++) begin
      acc = acc + OW'(signed'(x[i*IW +: IW]));
    end
    s = acc;
  end
endmodule
