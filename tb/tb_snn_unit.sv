// tb_snn_unit: random SNN operations with random issue gaps and random
// writeback back-pressure. Every response is predicted at issue from the
// reference model (including the LTD random lanes) and compared when it is
// taken. Also checks the one-cycle latency and, in a stretch with no
// back-pressure, a throughput of one operation per cycle.
module tb_snn_unit;
  import snn_pkg::*;
  import snn_model_pkg::*;
  logic clk = 0, rst_n = 0;
  logic req_valid = 0, req_ready, rsp_valid, rsp_ready = 0;
  snn_req_t req = '0;
  snn_rsp_t rsp;
  logic [15:0] vth = 16'd40, vleak = 16'd2, seed = 16'h1111;
  logic [9:0] pltd = 10'd300;
  logic post = 0, seed_load = 0;
  logic [63:0] sr_rdata = 0;
  int checks = 0, failures = 0;
  snn_rsp_t expq[$];
  ltd_model m;
  int unsigned n_fire = 0, n_stall = 0;

  snn_unit dut (.*);
  always #5 clk = ~clk;

  function automatic snn_rsp_t predict(snn_req_t r);
    snn_rsp_t e = '0;
    logic [16:0] l;
    longint unsigned cnt;
    e.sr_addr = r.sreg;
    case (r.op)
      SNN_SPK: e.data = 64'(m_popcount(r.src1 & r.src2, 64));
      SNN_NEU: begin
        cnt = (r.src2 > 64'hFFFF) ? 64'hFFFF : r.src2;
        l = m_lif(16, longint'(r.src1[15:0]), cnt, longint'(vleak), longint'(vth));
        e.data = {l[16], 47'd0, l[15:0]};
        e.sr_we = 1; e.sr_addr = SR_POST; e.sr_wdata = 64'(l[16]);
      end
      SNN_SYN: e.data = m.stdp(r.src1, r.src2, post, pltd);
      SNN_SRW: begin e.sr_we = 1; e.sr_wdata = r.src1; end
      SNN_SRR: e.data = sr_rdata;
      default: ;
    endcase
    return e;
  endfunction

  initial begin
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int unsigned acc, cyc;
    m = new(64);
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int i = 0; i < 4000; i++) begin
      // drive (after the edge)
      if (!req_valid || req_ready_q) begin
        req_valid = ($urandom % 4) != 0;
        req.op    = snn_op_e'($urandom % 5);
        req.sreg  = sreg_e'($urandom % 5);
        req.src1  = {$urandom, $urandom};
        req.src2  = (req.op == SNN_NEU) ? 64'($urandom % ((i % 5 == 0) ? 32'h20000 : 32'd60))
                                        : {$urandom, $urandom};
      end
      rsp_ready = (i > 3000) ? 1'b1 : (($urandom % 3) != 0);
      post = $urandom % 2; pltd = 10'($urandom); vth = 16'($urandom % 64); vleak = 16'($urandom % 4);
      sr_rdata = {$urandom, $urandom};
      seed_load = (i % 97) == 0; seed = 16'($urandom);
      // sample before the edge
      @(negedge clk);
      if (rsp_valid && rsp_ready) begin
        checks++;
        if (expq.size() == 0 || rsp !== expq[0]) begin
          failures++;
          $display("FAIL cycle %0d: got %p", i, rsp);
          if (expq.size() != 0) $display("           exp %p", expq[0]);
        end
        if (expq.size() != 0) void'(expq.pop_front());
      end
      if (rsp_valid && !rsp_ready) n_stall++;
      req_ready_q = req_ready;
      if (req_valid && req_ready) begin
        expq.push_back(predict(req));
        n_fire++;
      end
      @(posedge clk);
      if (seed_load) m.reseed(seed);
      else if (req_valid && req_ready_q && req.op == SNN_SYN) m.step();
      #1;
      // latency: an operation accepted at this edge is valid now
      if (req_valid && req_ready_q) begin
        checks++;
        if (!rsp_valid) begin failures++; $display("FAIL latency"); end
      end
    end
    // throughput: back-to-back SPK with rsp_ready high
    req_valid = 1; req.op = SNN_SPK; rsp_ready = 1; acc = 0;
    for (cyc = 0; cyc < 20; cyc++) begin
      @(negedge clk);
      if (req_ready) acc++;
      @(posedge clk); #1;
    end
    req_valid = 0;
    checks++;
    if (acc != 20) begin failures++; $display("FAIL throughput %0d/20", acc); end
    checks++;
    if (n_stall == 0) begin failures++; $display("FAIL no back-pressure seen"); end
    $display("ops %0d, back-pressure cycles %0d", n_fire, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  logic req_ready_q = 1'b1;
endmodule
