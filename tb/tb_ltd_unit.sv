// tb_ltd_unit: stochastic depression checked bit-exactly against a model
// that keeps its own copy of every lane's LFSR, plus the probability
// extremes (p = 1023 clears every candidate) and the measured depression
// rate at p = 255 (expected 256/1024 = 25 %).
module tb_ltd_unit;
  import snn_model_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [63:0] weights, pre, w_ltd;
  logic post = 0, step = 0, seed_load = 0;
  logic [9:0] p_ltd = 0;
  logic [15:0] seed = 0;
  int checks = 0, failures = 0;
  ltd_model m;

  ltd_unit dut (.*);
  always #5 clk = ~clk;

  task automatic cmp(string what);
    logic [63:0] e;
    e = m.ltd_only(weights, pre, post, p_ltd);
    checks++;
    if (w_ltd !== e) begin
      failures++;
      $display("FAIL %s: got %h exp %h", what, w_ltd, e);
    end
  endtask

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int unsigned cand, dep;
    m = new(64);
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    // random operation mix with model comparison
    for (int i = 0; i < 1500; i++) begin
      weights = {$urandom, $urandom};
      pre     = {$urandom, $urandom} & {$urandom, $urandom};
      post    = ($urandom % 4) != 0;
      p_ltd   = 10'($urandom);
      step    = ($urandom % 3) != 0;
      seed_load = (i % 200) == 199;
      seed    = 16'($urandom);
      #1 cmp($sformatf("random %0d", i));
      @(posedge clk);
      if (seed_load) m.reseed(seed);
      else if (step) m.step();
      #1;
    end
    seed_load = 0;
    // p = 1023: every candidate cleared, others unchanged
    weights = '1; pre = 64'h00FF_00FF_00FF_00FF; post = 1; p_ltd = 10'd1023; #1;
    checks++;
    if (w_ltd !== pre) begin failures++; $display("FAIL p=max got %h", w_ltd); end
    // no neuron spike: nothing changes
    post = 0; #1;
    checks++;
    if (w_ltd !== weights) begin failures++; $display("FAIL post=0"); end
    // depression rate at p = 255
    cand = 0; dep = 0; post = 1; p_ltd = 10'd255; step = 1; weights = '1; pre = '0;
    for (int i = 0; i < 400; i++) begin
      #1;
      cand += 64; dep += 64 - $countones(w_ltd);
      @(posedge clk);
    end
    checks++;
    if (dep * 100 < cand * 22 || dep * 100 > cand * 28) begin
      failures++; $display("FAIL rate %0d/%0d", dep, cand);
    end else $display("depression rate %0d/%0d", dep, cand);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
