// tb_snn_workloads: the network sizes evaluated for this processor, run on
// the SNN datapath at its default sizes with synthetic rate-encoded digits:
// 256-10 (16x16 inputs, the size used for the power comparison), and 784-10,
// 784-20 and 784-40 (28x28 inputs, one output neuron per class for the first
// ten neurons, neuron n standing for class n mod 10).
// The 784-10 and 256-10 networks learn with a teacher signal. The larger ones
// use active learning: the first ten neurons are trained, further training
// samples are then classified by those ten, and only the misclassified ones
// are used, with the teacher, to train the additional neurons. Every result of
// the hardware is checked against the reference model; the accuracy is
// reported (synthetic data, not MNIST) and must beat chance.
module tb_snn_workloads;
  import snn_pkg::*;
  import snn_model_pkg::*;
  import snn_net_pkg::*;

  localparam int unsigned NCLASS = 10, TSTEPS = 8, NTRAIN = 6, NACTIVE = 4, NTEST = 5;

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
    #500000000;
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

  task automatic workload(int unsigned nin, int unsigned nout);
    int unsigned ok = 0, tot = 0, errs = 0;
    net = new(nin, nout, NCLASS);
    // threshold and leak scaled with the number of inputs
    net.configure(120 * nin / 784, 20 * nin / 784, 80, 16'h5EED);
    run_prog();
    for (int s = 0; s < NTRAIN; s++)
      for (int c = 0; c < NCLASS; c++) begin
        net.sample(c, TSTEPS, 1'b1, 0, NCLASS - 1);
        run_prog();
      end
    if (nout > NCLASS) begin
      int unsigned next = NCLASS;
      for (int s = 0; s < NACTIVE; s++)
        for (int c = 0; c < NCLASS; c++) begin
          net.sample(c, TSTEPS, 1'b0);
          run_prog();
          if (net.winner(NCLASS - 1) != c) begin
            // error sample: train the next spare neuron of class c
            int unsigned n = c + NCLASS * (1 + (s % ((nout / NCLASS) - 1)));
            net.sample(c, TSTEPS, 1'b1, n, n);
            run_prog();
            errs++;
          end
        end
      $display("  active learning: %0d error samples trained into extra neurons", errs);
    end
    for (int s = 0; s < NTEST; s++)
      for (int c = 0; c < NCLASS; c++) begin
        net.sample(c, TSTEPS, 1'b0);
        run_prog();
        tot++;
        if (net.winner() == c) ok++;
      end
    $display("%0d-%0d: test %0d/%0d correct (synthetic data)", nin, nout, ok, tot);
    checks++;
    if (ok * 10 <= tot * 2) begin failures++; $display("FAIL %0d-%0d at chance level", nin, nout); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    workload(256, 10);
    workload(784, 10);
    workload(784, 20);
    workload(784, 40);
    $display("%0d operations in %0d cycles", n_ops, cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
