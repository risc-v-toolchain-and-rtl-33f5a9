// tb_spike_process_unit: AND-and-count of 64-bit spike and weight words,
// directed corner cases and random words, against $countones.
module tb_spike_process_unit;
  logic [63:0] spikes, weights;
  logic [6:0]  count;
  int checks = 0, failures = 0;

  spike_process_unit dut (.*);

  task automatic run(logic [63:0] s, logic [63:0] w);
    spikes = s; weights = w; #1;
    checks++;
    if (count !== 7'($countones(s & w))) begin
      failures++;
      $display("FAIL s=%h w=%h count=%0d", s, w, count);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    run('0, '0); run('1, '1); run('1, '0); run('0, '1);
    run(64'h5555_5555_5555_5555, 64'hFFFF_FFFF_FFFF_FFFF);
    run(64'h8000_0000_0000_0001, 64'h8000_0000_0000_0001);
    for (int i = 0; i < 2000; i++) run({$urandom, $urandom}, {$urandom, $urandom});
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
