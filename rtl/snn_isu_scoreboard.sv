// snn_isu_scoreboard: data-hazard check on the SNN special registers, the SNN
// part of the issue unit.
//
// The issue stage must not start an SNN operation that reads (or writes) a
// special register still waiting to be written by an older operation, because
// special registers are written at writeback. One busy bit per register is
// set when an operation that writes it issues and cleared when that operation
// writes back. `hazard` is combinational from the busy bits and the masks of
// the operation at issue; the issue stage stalls while it is high. A result
// written back in the current cycle still counts as busy, since the register
// only takes the value at the clock edge (no bypass). The paper says the issue
// unit avoids data hazards; the busy-bit scheme is this design's choice.
module snn_isu_scoreboard
#(
  parameter int unsigned N = snn_pkg::NSREG
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         issue_fire,
  input  logic [N-1:0] issue_wmask,
  input  logic         wb_fire,
  input  logic [N-1:0] wb_wmask,
  input  logic [N-1:0] check_mask,
  output logic         hazard,
  output logic [N-1:0] busy
);
  logic [N-1:0] clr, set;
  assign clr = wb_fire    ? wb_wmask    : '0;
  assign set = issue_fire ? issue_wmask : '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) busy <= '0;
    else        busy <= (busy & ~clr) | set;
  end

  assign hazard = |(busy & check_mask);
endmodule
