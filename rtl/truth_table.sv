// truth_table -- the lookup table that every PolyLUT-Add neuron is made of.
//
// An IN_BITS-wide input word selects one of 2^IN_BITS entries, each
// OUT_BITS wide, of the table TABLE. Entry e occupies bits
// [e*OUT_BITS +: OUT_BITS]. The table is a parameter, so after synthesis the
// module is pure combinational logic (LUTs on an FPGA): it has no clock, no
// state and no latency. Following the paper, a neuron's whole transfer
// function is enumerated into such a table; the packed-vector encoding of
// the table is this design's own choice.
module truth_table #(
  parameter int unsigned IN_BITS  = 6,
  parameter int unsigned OUT_BITS = 4,
  parameter logic [(2**IN_BITS)*OUT_BITS-1:0] TABLE = '0
) (
  input  logic [IN_BITS-1:0]  addr,
  output logic [OUT_BITS-1:0] data
);

  always_comb data = TABLE[addr*OUT_BITS +: OUT_BITS];

endmodule
