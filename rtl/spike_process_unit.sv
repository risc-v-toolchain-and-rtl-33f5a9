// spike_process_unit (SPU): first stage of the SNN workflow.
//
// ANDs a word of input spikes with the matching word of binary synaptic
// weights and counts the ones, i.e. the number of input spikes that reach the
// neuron through an enabled synapse. Both steps follow the paper; processing
// one XLEN-bit register per operation is this design's choice (a neuron with
// 784 synapses takes 13 operations, accumulated by software).
// Purely combinational; the SNN unit registers the result.
module spike_process_unit #(
  parameter int unsigned XLEN = snn_pkg::XLEN,
  parameter int unsigned CW   = $clog2(XLEN + 1)
) (
  input  logic [XLEN-1:0] spikes,
  input  logic [XLEN-1:0] weights,
  output logic [CW-1:0]   count
);
  logic [XLEN-1:0] valid_spikes;
  assign valid_spikes = spikes & weights;

  always_comb begin
    count = '0;
    for (int unsigned i = 0; i < XLEN; i++)
      count = count + CW'(valid_spikes[i]);
  end
endmodule
