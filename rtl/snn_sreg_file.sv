// snn_sreg_file: the SNN special register file that sits beside the general
// register file of the core.
//
// It keeps the values that SNN operations share but that are not operands:
// firing threshold VTH, leakage VLEAK, LTD probability PLTD, LFSR seed SEED and
// POST, the spike of the last neuron update (written by the neuron operation,
// or by software as the teacher signal in supervised learning). The paper
// names the register file; its contents, widths and reset values are this
// design's choices.
// Write port: one write per cycle from writeback (`we`, `waddr`, `wdata`,
// truncated to the register's width). Read: every register is a direct output,
// plus one addressed read port `rdata` (zero-extended). `seed_load` pulses in
// the cycle SEED is written, with the value being written on `seed_wdata`, so
// the LFSRs reload from the new seed at the same edge as the register.
module snn_sreg_file
  import snn_pkg::sreg_e, snn_pkg::SR_VTH, snn_pkg::SR_VLEAK, snn_pkg::SR_PLTD, snn_pkg::SR_SEED, snn_pkg::SR_POST;
#(
  parameter int unsigned XLEN       = snn_pkg::XLEN,
  parameter int unsigned NW         = snn_pkg::NW,
  parameter int unsigned PW         = snn_pkg::PW,
  parameter int unsigned LFSR_W     = snn_pkg::LFSR_W,
  parameter logic [15:0] VTH_RST    = 16'd16,
  parameter logic [15:0] VLEAK_RST  = 16'd1,
  parameter logic [15:0] SEED_RST   = 16'hACE1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              we,
  input  sreg_e             waddr,
  input  logic [XLEN-1:0]   wdata,
  input  sreg_e             raddr,
  output logic [XLEN-1:0]   rdata,
  output logic [NW-1:0]     vth,
  output logic [NW-1:0]     vleak,
  output logic [PW-1:0]     pltd,
  output logic [LFSR_W-1:0] seed,
  output logic              post,
  output logic              seed_load,
  output logic [LFSR_W-1:0] seed_wdata
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vth   <= NW'(VTH_RST);
      vleak <= NW'(VLEAK_RST);
      pltd  <= '0;
      seed  <= LFSR_W'(SEED_RST);
      post  <= 1'b0;
    end else if (we) begin
      unique case (waddr)
        SR_VTH:   vth   <= wdata[NW-1:0];
        SR_VLEAK: vleak <= wdata[NW-1:0];
        SR_PLTD:  pltd  <= wdata[PW-1:0];
        SR_SEED:  seed  <= wdata[LFSR_W-1:0];
        SR_POST:  post  <= wdata[0];
        default: ;
      endcase
    end
  end

  assign seed_load  = we && (waddr == SR_SEED);
  assign seed_wdata = wdata[LFSR_W-1:0];

  always_comb begin
    unique case (raddr)
      SR_VTH:   rdata = XLEN'(vth);
      SR_VLEAK: rdata = XLEN'(vleak);
      SR_PLTD:  rdata = XLEN'(pltd);
      SR_SEED:  rdata = XLEN'(seed);
      SR_POST:  rdata = XLEN'(post);
      default:  rdata = '0;
    endcase
  end
endmodule
