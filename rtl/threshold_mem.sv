// threshold_mem: threshold store of one processing element of an MMVTU.
//
// Holds, for every neuron fold nf of the PE (one output channel each), the
// NT = 2^AO - 1 signed ACC-bit thresholds of that channel in one word, so one
// read returns all comparison levels at once. Indexed by the same fold index
// as the weight memory (the paper's figure routes the index to both).
// One write port for loading and a synchronous read port: rdata is the word
// at raddr one clock after a cycle with re high, held while re is low.
module threshold_mem #(
  parameter int unsigned ACC   = 16,
  parameter int unsigned AO    = 2,
  parameter int unsigned DEPTH = 4,
  localparam int unsigned NT   = (1 << AO) - 1,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic              clk,
  input  logic              we,
  input  logic [AW-1:0]     waddr,
  input  logic [NT*ACC-1:0] wdata,
  input  logic              re,
  input  logic [AW-1:0]     raddr,
  output logic [NT*ACC-1:0] rdata
);
  logic [NT*ACC-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
