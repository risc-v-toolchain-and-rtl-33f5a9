// wq22a_snn_top: the SNN extension of the RV64 in-order core as one unit.
//
// An SNN operation leaves decode with its general-register operands already
// read. The SNN part of the issue unit (snn_isu_scoreboard) holds it while an
// older operation still has to write a special register it uses; otherwise it
// enters the SNN unit (SPU, NU, SU) in the execution stage, which reads the
// special registers at that moment. One cycle later the result is offered to
// writeback: `out_data` goes to the general register file outside, and a
// special-register write (POST from a neuron update, or an explicit SRW) is
// performed in the SNN special register file when the result is taken.
// The structure (issue -> SNNU -> writeback -> special registers -> issue)
// follows the block diagram of the processor; the handshake, the hazard rule
// and the operation set are this design's choices.
// Interface: in_valid/in_ready with in_req, out_valid/out_ready with out_data.
// Latency one cycle; an operation that depends on a special register written
// by the operation just before it waits one extra cycle.
module wq22a_snn_top
  import snn_pkg::snn_req_t, snn_pkg::snn_rsp_t, snn_pkg::sreg_mask_t, snn_pkg::NSREG, snn_pkg::op_reads, snn_pkg::op_writes, snn_pkg::sreg_bit;
#(
  parameter int unsigned XLEN   = snn_pkg::XLEN,
  parameter int unsigned NW     = snn_pkg::NW,
  parameter int unsigned PW     = snn_pkg::PW,
  parameter int unsigned LFSR_W = snn_pkg::LFSR_W
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            in_valid,
  output logic            in_ready,
  input  snn_req_t        in_req,
  output logic            out_valid,
  input  logic            out_ready,
  output logic [XLEN-1:0] out_data
);
  logic              hazard, snnu_ready, issue_fire, wb_fire;
  sreg_mask_t        chk_mask, iss_wmask, wb_wmask;
  logic [NW-1:0]     vth, vleak;
  logic [PW-1:0]     pltd;
  logic [LFSR_W-1:0] seed_wdata;
  logic              post, seed_load;
  logic [XLEN-1:0]   sr_rdata;
  snn_rsp_t          rsp;

  assign chk_mask   = op_reads(in_req.op, in_req.sreg) | op_writes(in_req.op, in_req.sreg);
  assign iss_wmask  = op_writes(in_req.op, in_req.sreg);
  assign in_ready   = snnu_ready && !hazard;
  assign issue_fire = in_valid && in_ready;
  assign wb_fire    = out_valid && out_ready;
  assign wb_wmask   = rsp.sr_we ? sreg_bit(rsp.sr_addr) : '0;
  assign out_data   = rsp.data;

  snn_isu_scoreboard #(.N(NSREG)) u_isu (
    .clk         (clk),
    .rst_n       (rst_n),
    .issue_fire  (issue_fire),
    .issue_wmask (iss_wmask),
    .wb_fire     (wb_fire),
    .wb_wmask    (wb_wmask),
    .check_mask  (chk_mask),
    .hazard      (hazard),
    .busy        ()
  );

  snn_sreg_file #(.XLEN(XLEN), .NW(NW), .PW(PW), .LFSR_W(LFSR_W)) u_sreg (
    .clk       (clk),
    .rst_n     (rst_n),
    .we        (wb_fire && rsp.sr_we),
    .waddr     (rsp.sr_addr),
    .wdata     (rsp.sr_wdata),
    .raddr     (in_req.sreg),
    .rdata     (sr_rdata),
    .vth       (vth),
    .vleak     (vleak),
    .pltd      (pltd),
    .seed      (),
    .post      (post),
    .seed_load (seed_load),
    .seed_wdata(seed_wdata)
  );

  snn_unit #(.XLEN(XLEN), .NW(NW), .PW(PW), .LFSR_W(LFSR_W)) u_snnu (
    .clk       (clk),
    .rst_n     (rst_n),
    .req_valid (in_valid && !hazard),
    .req_ready (snnu_ready),
    .req       (in_req),
    .vth       (vth),
    .vleak     (vleak),
    .pltd      (pltd),
    .post      (post),
    .sr_rdata  (sr_rdata),
    .seed_load (seed_load),
    .seed      (seed_wdata),
    .rsp_valid (out_valid),
    .rsp_ready (out_ready),
    .rsp       (rsp)
  );

  // Issue handshake rule: an offered operation is not withdrawn or changed.
  a_in_hold: assert property (@(posedge clk) disable iff (!rst_n)
    in_valid && !in_ready |=> in_valid && $stable(in_req));
endmodule
