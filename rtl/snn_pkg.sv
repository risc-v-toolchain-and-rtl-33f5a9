// snn_pkg: types and constants shared by the SNN extension of the core.
//
// The SNN unit works on one 64-bit general register at a time (the base core
// is RV64), so XLEN synapses are processed per operation. Synaptic weights are
// 1 bit, the LTD random number is 10 bits drawn from a 16-bit LFSR; these
// three sizes follow the paper. The membrane-potential width, the operation
// encoding and the special-register map are this design's own choices: the
// instruction encodings of the SNN extension are not published.
package snn_pkg;

  localparam int unsigned XLEN   = 64;  // register width of the RV64 base core
  localparam int unsigned NW     = 16;  // membrane potential / threshold / leak width
  localparam int unsigned PW     = 10;  // width of the LTD random number and probability
  localparam int unsigned LFSR_W = 16;  // LFSR width
  localparam int unsigned NSREG  = 5;   // number of SNN special registers

  // SNN operations (decoded form, as handed over by the issue stage).
  typedef enum logic [2:0] {
    SNN_SPK = 3'd0,  // rd = popcount(rs1 & rs2)                     (SPU)
    SNN_NEU = 3'd1,  // rd = {spike, 0.., v_next}; POST <= spike     (NU)
    SNN_SYN = 3'd2,  // rd = STDP-updated weights rs1, inputs rs2    (SU)
    SNN_SRW = 3'd3,  // special register[sreg] <= rs1
    SNN_SRR = 3'd4   // rd = special register[sreg]
  } snn_op_e;

  // SNN special registers.
  typedef enum logic [2:0] {
    SR_VTH   = 3'd0,  // firing threshold (NW bits)
    SR_VLEAK = 3'd1,  // leakage per update (NW bits)
    SR_PLTD  = 3'd2,  // LTD probability (PW bits)
    SR_SEED  = 3'd3,  // LFSR seed; a write reseeds the LFSRs
    SR_POST  = 3'd4   // last neuron spike, also the teacher signal
  } sreg_e;

  typedef logic [NSREG-1:0] sreg_mask_t;

  typedef struct packed {
    snn_op_e         op;
    sreg_e           sreg;   // special register for SRW / SRR
    logic [XLEN-1:0] src1;
    logic [XLEN-1:0] src2;
  } snn_req_t;

  typedef struct packed {
    logic [XLEN-1:0] data;     // value for the general register rd
    logic            sr_we;    // write a special register at writeback
    sreg_e           sr_addr;
    logic [XLEN-1:0] sr_wdata;
  } snn_rsp_t;

  // Special registers an operation reads (issue) and writes (writeback).
  function automatic sreg_mask_t sreg_bit(sreg_e r);
    sreg_mask_t m = '0;
    m[r] = 1'b1;
    return m;
  endfunction

  function automatic sreg_mask_t op_reads(snn_op_e op, sreg_e r);
    unique case (op)
      SNN_NEU: return sreg_bit(SR_VTH) | sreg_bit(SR_VLEAK);
      SNN_SYN: return sreg_bit(SR_PLTD) | sreg_bit(SR_POST) | sreg_bit(SR_SEED);
      SNN_SRR: return sreg_bit(r);
      default: return '0;
    endcase
  endfunction

  function automatic sreg_mask_t op_writes(snn_op_e op, sreg_e r);
    unique case (op)
      SNN_NEU: return sreg_bit(SR_POST);
      SNN_SRW: return sreg_bit(r);
      default: return '0;
    endcase
  endfunction

endpackage
