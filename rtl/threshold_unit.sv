// threshold_unit: the ">=" stage of the MMVTU, which turns a dot product
// into a quantized activation.
//
// The quantized activation function of the paper (a clipped ReLU mapped to
// 2^AO equally spaced levels) is monotone, so together with the folded
// batch normalisation it reduces to comparing the accumulator with
// NT = 2^AO - 1 thresholds: the output is the number of thresholds that the
// accumulator reaches (acc >= T). With ascending thresholds this is the index
// of the quantization level. Combinational.
//
// Ports: acc is a signed ACC-bit value, thr packs NT signed ACC-bit
// thresholds (threshold j in bits [j*ACC +: ACC]), q is the AO-bit result.
module threshold_unit #(
  parameter int unsigned ACC = 16,
  parameter int unsigned AO  = 2,
  localparam int unsigned NT = (1 << AO) - 1
) (
  input  logic [ACC-1:0]    acc,
  input  logic [NT*ACC-1:0] thr,
  output logic [AO-1:0]     q
);
  always_comb begin
    logic [AO:0] cnt;
    cnt = '0;
    for (int j = 0; j < NT; j++) begin
      if (signed'(acc) >= signed'(thr[j*ACC +: ACC])) cnt = cnt + 1'b1;
    end
    q = cnt[AO-1:0];
  end
endmodule
