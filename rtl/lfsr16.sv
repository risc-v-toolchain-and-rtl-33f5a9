// lfsr16: 16-bit Fibonacci LFSR, the random source of the LTD unit.
//
// Taps 16,14,13,11 (x^16+x^14+x^13+x^11+1) give the maximal period of 65535
// states. The paper specifies a 16-bit LFSR; the polynomial, the reset state
// and the handling of a zero seed are this design's choices.
// Interface: `load` copies `seed` into the register (an all-zero seed, which
// would lock the LFSR, becomes 1); otherwise `step` shifts once per cycle.
// `state` is the register itself, so a new value is visible the cycle after
// load/step.
module lfsr16 #(
  parameter logic [15:0] RESET_STATE = 16'hACE1
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        load,
  input  logic [15:0] seed,
  input  logic        step,
  output logic [15:0] state
);
  logic fb;
  assign fb = state[15] ^ state[13] ^ state[12] ^ state[10];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    state <= RESET_STATE;
    else if (load) state <= (seed == 16'h0) ? 16'h0001 : seed;
    else if (step) state <= {state[14:0], fb};
  end
endmodule
