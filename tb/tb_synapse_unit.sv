// tb_synapse_unit: the merged LTP/LTD update against the STDP model, one step
// per update, with reseeding.
module tb_synapse_unit;
  import snn_model_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [63:0] weights, pre, w_next;
  logic post = 0, step = 0, seed_load = 0;
  logic [9:0] p_ltd = 0;
  logic [15:0] seed = 0;
  int checks = 0, failures = 0;
  int unsigned n_ltp = 0, n_ltd = 0;
  ltd_model m;

  synapse_unit dut (.*);
  always #5 clk = ~clk;

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    m = new(64);
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      logic [63:0] e;
      weights   = {$urandom, $urandom};
      pre       = {$urandom, $urandom};
      post      = ($urandom % 3) != 0;
      p_ltd     = 10'($urandom);
      step      = 1;
      seed_load = (i % 500) == 250;
      seed      = 16'($urandom);
      #1;
      e = m.stdp(weights, pre, post, p_ltd);
      n_ltp += $countones(e & ~weights);
      n_ltd += $countones(~e & weights);
      checks++;
      if (w_next !== e) begin
        failures++;
        $display("FAIL w=%h pre=%h post=%b got %h exp %h", weights, pre, post, w_next, e);
      end
      @(posedge clk);
      if (seed_load) m.reseed(seed); else m.step();
      #1;
    end
    checks++;
    if (n_ltp == 0 || n_ltd == 0) begin failures++; $display("FAIL no LTP or LTD seen"); end
    $display("potentiated %0d depressed %0d", n_ltp, n_ltd);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
