// tb_neuron_unit: LIF update against the reference model, with directed
// cases for the leak floor, saturation and a potential exactly at threshold.
module tb_neuron_unit;
  import snn_model_pkg::*;
  logic [15:0] v_prev, count, leak, vth, v_next;
  logic spike;
  int checks = 0, failures = 0;

  neuron_unit dut (.*);

  task automatic run(int unsigned v, int unsigned c, int unsigned l, int unsigned t);
    logic [16:0] e;
    v_prev = 16'(v); count = 16'(c); leak = 16'(l); vth = 16'(t); #1;
    e = m_lif(16, v, c, l, t);
    checks++;
    if ({spike, v_next} !== e) begin
      failures++;
      $display("FAIL v=%0d c=%0d l=%0d t=%0d -> %b %0d exp %b %0d", v, c, l, t, spike, v_next, e[16], e[15:0]);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    run(10, 0, 3, 100);        // plain leak
    run(2, 0, 5, 100);         // floor at 0
    run(2, 4, 5, 100);         // floor then integrate
    run(90, 13, 3, 100);       // exactly threshold -> fire
    run(90, 12, 3, 100);       // just below
    run(65535, 65535, 0, 65535); // saturation, fires at max
    run(65000, 2000, 0, 0);    // threshold 0 always fires
    run(60000, 9000, 1, 65535); // saturate to 65535 >= 65535
    for (int i = 0; i < 3000; i++)
      run($urandom % 65536, $urandom % 1024, $urandom % 64, $urandom % 65536);
    for (int i = 0; i < 3000; i++)
      run($urandom % 200, $urandom % 65, $urandom % 8, $urandom % 200);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
