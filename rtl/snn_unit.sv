// snn_unit (SNNU): the SNN function unit in the execution stage of the core.
//
// It holds the three stages of the SNN workflow, the spike process unit
// (SPU), the neuron unit (NU) and the synapse unit (SU), and executes one SNN
// operation per cycle:
//   SPK  rd = popcount(rs1 & rs2)                 valid input spikes
//   NEU  rd = {spike, 0.., v_next}, POST <= spike LIF update, rs1 = potential,
//                                                 rs2 = spike count
//   SYN  rd = STDP-updated weights                rs1 = weights, rs2 = input
//                                                 spikes, POST = neuron spike
//   SRW  special register[sreg] <= rs1            rd = 0
//   SRR  rd = special register[sreg]
// The SPU/NU/SU functions come from the paper; the operation set, the operand
// assignment and the bit layout of rd are this design's choices, since the
// instruction encodings are not published.
// Timing: a request is taken when req_valid && req_ready; its response is
// registered and presented from the next cycle until rsp_ready (one-cycle
// latency, one operation in flight, full throughput when rsp_ready stays
// high). Special-register writes travel with the response and are performed
// at writeback, outside this unit. The LTD random sources advance once per SYN.
module snn_unit
  import snn_pkg::snn_req_t, snn_pkg::snn_rsp_t, snn_pkg::SNN_SPK, snn_pkg::SNN_NEU, snn_pkg::SNN_SYN, snn_pkg::SNN_SRW, snn_pkg::SNN_SRR, snn_pkg::SR_POST;
#(
  parameter int unsigned XLEN   = snn_pkg::XLEN,
  parameter int unsigned NW     = snn_pkg::NW,
  parameter int unsigned PW     = snn_pkg::PW,
  parameter int unsigned LFSR_W = snn_pkg::LFSR_W
) (
  input  logic              clk,
  input  logic              rst_n,
  // issue side
  input  logic              req_valid,
  output logic              req_ready,
  input  snn_req_t          req,
  // special-register values read at issue
  input  logic [NW-1:0]     vth,
  input  logic [NW-1:0]     vleak,
  input  logic [PW-1:0]     pltd,
  input  logic              post,
  input  logic [XLEN-1:0]   sr_rdata,
  input  logic              seed_load,
  input  logic [LFSR_W-1:0] seed,
  // writeback side
  output logic              rsp_valid,
  input  logic              rsp_ready,
  output snn_rsp_t          rsp
);
  localparam int unsigned CW = $clog2(XLEN + 1);

  logic            fire;
  logic [CW-1:0]   spu_count;
  logic [NW-1:0]   nu_count, nu_vnext;
  logic            nu_spike;
  logic [XLEN-1:0] su_wnext;
  snn_rsp_t        rsp_d;

  assign req_ready = !rsp_valid || rsp_ready;
  assign fire      = req_valid && req_ready;

  spike_process_unit #(.XLEN(XLEN)) u_spu (
    .spikes  (req.src1),
    .weights (req.src2),
    .count   (spu_count)
  );

  // Spike counts larger than the potential width saturate.
  assign nu_count = (|(req.src2 >> NW)) ? '1 : req.src2[NW-1:0];

  neuron_unit #(.NW(NW)) u_nu (
    .v_prev (req.src1[NW-1:0]),
    .count  (nu_count),
    .leak   (vleak),
    .vth    (vth),
    .v_next (nu_vnext),
    .spike  (nu_spike)
  );

  synapse_unit #(.XLEN(XLEN), .PW(PW), .LFSR_W(LFSR_W)) u_su (
    .clk       (clk),
    .rst_n     (rst_n),
    .weights   (req.src1),
    .pre       (req.src2),
    .post      (post),
    .p_ltd     (pltd),
    .step      (fire && req.op == SNN_SYN),
    .seed_load (seed_load),
    .seed      (seed),
    .w_next    (su_wnext)
  );

  always_comb begin
    rsp_d          = '0;
    rsp_d.sr_addr  = req.sreg;
    unique case (req.op)
      SNN_SPK: rsp_d.data = XLEN'(spu_count);
      SNN_NEU: begin
        rsp_d.data           = XLEN'(nu_vnext);
        rsp_d.data[XLEN-1]   = nu_spike;
        rsp_d.sr_we          = 1'b1;
        rsp_d.sr_addr        = SR_POST;
        rsp_d.sr_wdata       = XLEN'(nu_spike);
      end
      SNN_SYN: rsp_d.data = su_wnext;
      SNN_SRW: begin
        rsp_d.sr_we    = 1'b1;
        rsp_d.sr_wdata = req.src1;
      end
      SNN_SRR: rsp_d.data = sr_rdata;
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rsp_valid <= 1'b0;
      rsp       <= '0;
    end else begin
      if (fire) begin
        rsp_valid <= 1'b1;
        rsp       <= rsp_d;
      end else if (rsp_ready) begin
        rsp_valid <= 1'b0;
      end
    end
  end

  // A response that is not taken stays unchanged.
  a_rsp_hold: assert property (@(posedge clk) disable iff (!rst_n)
    rsp_valid && !rsp_ready |=> rsp_valid && $stable(rsp));
endmodule
