// weight_mem: weight store of one processing element of an MMVTU.
//
// Follows the memory layout behind the paper's Eq. 2: the K*K*C x C' weight
// matrix of a layer is split into one memory per PE, each DEPTH =
// K*K*C*C'/(SIMD*PE) words deep and SIMD*W bits wide, so that one read
// delivers the SIMD weights that the PE needs in a cycle. Word nf*SF + sf
// holds the weights of neuron fold nf and synapse fold sf.
//
// One write port (used to load the weights; the paper does not say how
// weights get in, on an FPGA they are usually part of the bitstream) and one
// synchronous read port: rdata shows word raddr one clock after a cycle with
// re high and holds its value while re is low.
module weight_mem #(
  parameter int unsigned DW    = 4,
  parameter int unsigned DEPTH = 64,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [DW-1:0] wdata,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output logic [DW-1:0] rdata
);
  logic [DW-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
