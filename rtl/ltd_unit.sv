// ltd_unit: stochastic long-term depression of binary synapses.
//
// Following the paper, a 10-bit random number x is taken from a 16-bit LFSR
// and compared with the LTD probability; if x <= p_ltd the weight is cleared.
// To update all XLEN synapses of a register in one cycle, each synapse lane
// has its own LFSR (this design's choice); x is the low PW bits of that lane's
// state. Lane i is seeded with seed ^ lane_key(i) so that the lanes draw
// different sequences. Which synapses are candidates is not given in the
// paper; here, as in binary stochastic STDP, they are the synapses whose input
// did not spike, and only when the neuron fired (`post`).
// Timing: w_ltd is combinational from the current LFSR states; `step` (one
// pulse per synapse update) advances every LFSR at the clock edge, `seed_load`
// reloads them from `seed`.
module ltd_unit #(
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
  output logic [XLEN-1:0]   w_ltd
);
  // Per-lane seed offset: multiplicative hash of the lane index.
  function automatic logic [15:0] lane_key(int unsigned i);
    return 16'((i * 32'd40503) & 32'hFFFF);
  endfunction

  function automatic logic [15:0] lane_reset(int unsigned i);
    logic [15:0] v = 16'hACE1 ^ lane_key(i);
    return (v == 16'h0) ? 16'h0001 : v;
  endfunction

  logic [XLEN-1:0] depress;

  for (genvar i = 0; i < XLEN; i++) begin : g_lane
    logic [15:0] state;
    logic [PW-1:0] x;
    lfsr16 #(.RESET_STATE(lane_reset(i))) u_lfsr (
      .clk   (clk),
      .rst_n (rst_n),
      .load  (seed_load),
      .seed  (seed ^ lane_key(i)),
      .step  (step),
      .state (state)
    );
    assign x          = state[PW-1:0];
    assign depress[i] = post && !pre[i] && (x <= p_ltd);
  end

  assign w_ltd = weights & ~depress;
endmodule
