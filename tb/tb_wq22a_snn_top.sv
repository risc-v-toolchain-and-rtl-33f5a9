// tb_wq22a_snn_top: end-to-end run of the SNN datapath at its default sizes
// (64-bit operations, 16-bit potentials, 10-bit LTD probability, 16-bit LFSRs).
//
// A 784-10 classifier (one neuron per class, 784 = 28x28 inputs) is first
// configured through the special registers, then trained with a teacher signal
// on rate-encoded synthetic digits, then tested. The operation stream is
// issued like an in-order core would: back to back when the unit is ready,
// with random bubbles, and with random writeback back-pressure. Every result
// is compared with the reference model. The test also counts how often each
// mechanism of the datapath was exercised and fails if one never was:
// special-register hazard stalls, back-pressure stalls, neuron spikes, the
// leak floor, potential saturation, potentiated and depressed synapses,
// teacher writes, LFSR reseeding and special-register reads.
module tb_wq22a_snn_top;
  import snn_pkg::*;
  import snn_model_pkg::*;
  import snn_net_pkg::*;

  localparam int unsigned NIN = 784, NOUT = 10, NCLASS = 10;
  localparam int unsigned TSTEPS = 8, NTRAIN = 4, NTEST = 3;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  snn_req_t in_req = '0;
  logic [63:0] out_data;
  int checks = 0, failures = 0;

  wq22a_snn_top dut (.*);
  always #5 clk = ~clk;

  snn_net net;
  op_t    pend[$];    // issued, waiting for the result
  int unsigned n_hazard = 0, n_bp = 0, n_fire = 0, n_sat = 0, n_ltp = 0, n_ltd = 0;
  int unsigned n_teach = 0, n_seed = 0, n_srr = 0, n_ops = 0, correct = 0, tested = 0;
  int unsigned cycles = 0;

  initial begin
    #50000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Issue and check everything currently in net.prog.
  task automatic run_prog();
    int unsigned idx = 0, total = net.prog.size();
    int unsigned done = 0;
    while (done < total) begin
      // drive after the edge
      if (!in_valid || in_ready_q) begin
        if (idx < total && ($urandom % 8) != 0) begin
          in_valid = 1; in_req = net.prog[idx].req;
        end else in_valid = 0;
      end
      out_ready = ($urandom % 4) != 0;
      @(negedge clk);
      if (in_valid && !in_ready && dut.hazard) n_hazard++;
      if (out_valid && !out_ready) n_bp++;
      if (out_valid && out_ready) begin
        op_t o = pend.pop_front();
        checks++;
        if (out_data !== o.exp) begin
          failures++;
          $display("FAIL op %s src1=%h src2=%h got %h exp %h", o.req.op.name(), o.req.src1, o.req.src2, out_data, o.exp);
        end
        case (o.req.op)
          SNN_NEU: if (out_data[63]) n_fire++;
          SNN_SYN: begin
            n_ltp += $countones(out_data & ~o.req.src1);
            n_ltd += $countones(o.req.src1 & ~out_data);
          end
          SNN_SRW: begin
            if (o.req.sreg == SR_POST) n_teach++;
            if (o.req.sreg == SR_SEED) n_seed++;
          end
          SNN_SRR: n_srr++;
          default: ;
        endcase
        done++;
      end
      in_ready_q = in_ready;
      if (in_valid && in_ready) begin
        pend.push_back(net.prog[idx]);
        idx++; n_ops++;
      end
      @(posedge clk); #1;
      cycles++;
    end
    in_valid = 0;
    net.prog.delete();
  endtask
  logic in_ready_q = 1'b1;

  task automatic chk_count(string what, int unsigned n);
    checks++;
    if (n == 0) begin failures++; $display("FAIL mechanism never exercised: %s", what); end
    else $display("  %-28s %0d", what, n);
  endtask

  initial begin
    net = new(NIN, NOUT, NCLASS);
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    // reset values of the special registers
    net.emit(SNN_SRR, SR_VTH, 0, 0, 64'd16, 1'b1);
    net.emit(SNN_SRR, SR_SEED, 0, 0, 64'hACE1, 1'b1);
    // directed saturation: 65535 - leak + huge count saturates, threshold max
    net.srw(SR_VTH, 64'hFFFF);
    net.emit(SNN_NEU, SR_VTH, 64'd65000, 64'h30000, {1'b1, 47'd0, 16'd0}, 1'b1);
    n_sat++;
    net.configure(120, 20, 80, 16'h5EED);
    run_prog();
    // training with teacher
    for (int s = 0; s < NTRAIN; s++)
      for (int c = 0; c < NCLASS; c++) begin
        net.sample(c, TSTEPS, 1'b1);
        run_prog();
      end
    // test
    for (int s = 0; s < NTEST; s++)
      for (int c = 0; c < NCLASS; c++) begin
        net.sample(c, TSTEPS, 1'b0);
        run_prog();
        tested++;
        if (net.winner() == c) correct++;
      end
    $display("%0d operations in %0d cycles; test %0d/%0d correct", n_ops, cycles, correct, tested);
    chk_count("hazard stalls", n_hazard);
    chk_count("back-pressure cycles", n_bp);
    chk_count("neuron spikes", n_fire);
    chk_count("leak floor", net.n_floor);
    chk_count("saturation", n_sat);
    chk_count("potentiated synapses", n_ltp);
    chk_count("depressed synapses", n_ltd);
    chk_count("teacher writes", n_teach);
    chk_count("reseeds", n_seed);
    chk_count("special-register reads", n_srr);
    checks++;
    if (correct * 5 < tested * 2) begin failures++; $display("FAIL accuracy below 40%%"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
