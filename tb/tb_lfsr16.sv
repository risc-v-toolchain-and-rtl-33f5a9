// tb_lfsr16: checks reset value, load (including the zero-seed rule), hold
// without step, every step against the reference polynomial, and that the
// sequence has the full period of 65535 states.
module tb_lfsr16;
  import snn_model_pkg::*;
  logic clk = 0, rst_n = 0, load = 0, step = 0;
  logic [15:0] seed = 0, state, ref_s;
  int checks = 0, failures = 0;

  lfsr16 dut (.*);
  always #5 clk = ~clk;

  task automatic chk(logic [15:0] exp, string what);
    checks++;
    if (state !== exp) begin
      failures++;
      $display("FAIL %s: got %h exp %h", what, state, exp);
    end
  endtask

  initial begin
    #1000000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int unsigned period;
    repeat (2) @(posedge clk);
    #1 chk(16'hACE1, "reset");
    #1 rst_n = 1;
    @(posedge clk); #1 chk(16'hACE1, "hold");
    load = 1; seed = 16'h0000; @(posedge clk); #1 load = 0;
    chk(16'h0001, "zero seed");
    load = 1; seed = 16'h1234; @(posedge clk); #1 load = 0;
    chk(16'h1234, "load");
    ref_s = 16'h1234;
    for (int i = 0; i < 300; i++) begin
      step = ($urandom % 4) != 0;
      @(posedge clk); #1;
      if (step) ref_s = m_lfsr_next(ref_s);
      chk(ref_s, "step");
    end
    // load has priority over step
    load = 1; step = 1; seed = 16'hBEEF; @(posedge clk); #1 load = 0;
    chk(16'hBEEF, "load over step");
    period = 0;
    do begin
      @(posedge clk); #1; period++;
    end while (state != 16'hBEEF && period < 70000);
    step = 0;
    checks++;
    if (period != 65535) begin failures++; $display("FAIL period %0d", period); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
