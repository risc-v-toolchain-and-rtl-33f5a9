// ltp_unit: long-term potentiation of binary synapses.
//
// When the neuron has fired (`post`), every synapse whose input spiked in the
// same step is switched on: w_ltp = weights | (pre & {XLEN{post}}).
// The paper states that the neuron spike decides whether a weight becomes 1;
// restricting it to synapses with an input spike is this design's reading of
// binary STDP. Purely combinational.
module ltp_unit #(
  parameter int unsigned XLEN = snn_pkg::XLEN
) (
  input  logic [XLEN-1:0] weights,
  input  logic [XLEN-1:0] pre,
  input  logic            post,
  output logic [XLEN-1:0] w_ltp
);
  assign w_ltp = weights | (pre & {XLEN{post}});
endmodule
