// synapse_unit (SU): single-cycle binary stochastic STDP update of one
// register of synaptic weights, the last stage of the SNN workflow.
//
// The LTP unit switches on the synapses whose input spiked when the neuron
// fired; the LTD unit clears, with the programmed probability, the synapses
// whose input stayed silent. Both act on disjoint bits, so they are computed
// side by side and merged: w_next = (w_ltp & pre) | (w_ltd & ~pre).
// Without a neuron spike the weights pass unchanged. `step` advances the LTD
// random sources once per executed update.
module synapse_unit #(
  parameter int unsigned XLEN   = snn_pkg::XLEN,
  parameter int unsigned PW     = snn_pkg::PW,
  parameter int unsigned LFSR_W = snn_pkg::LFSR_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [XLEN-1:0]   weights,
  input  logic [XLEN-1:0]   pre,
  input  logic              post,
  input  logic [PW-1:0]     p_ltd,
  input  logic              step,
  input  logic              seed_load,
  input  logic [LFSR_W-1:0] seed,
  output logic [XLEN-1:0]   w_next
);
  logic [XLEN-1:0] w_ltp, w_ltd;

  ltp_unit #(.XLEN(XLEN)) u_ltp (
    .weights (weights),
    .pre     (pre),
    .post    (post),
    .w_ltp   (w_ltp)
  );

  ltd_unit #(.XLEN(XLEN), .PW(PW), .LFSR_W(LFSR_W)) u_ltd (
    .clk       (clk),
    .rst_n     (rst_n),
    .weights   (weights),
    .pre       (pre),
    .post      (post),
    .p_ltd     (p_ltd),
    .step      (step),
    .seed_load (seed_load),
    .seed      (seed),
    .w_ltd     (w_ltd)
  );

  assign w_next = (w_ltp & pre) | (w_ltd & ~pre);
endmodule
