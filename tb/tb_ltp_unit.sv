// tb_ltp_unit: potentiation sets exactly the synapses with an input spike,
// and only when the neuron fired.
module tb_ltp_unit;
  logic [63:0] weights, pre, w_ltp;
  logic post;
  int checks = 0, failures = 0;

  ltp_unit dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 2000; i++) begin
      logic [63:0] e;
      weights = {$urandom, $urandom};
      pre     = {$urandom, $urandom};
      post    = (i % 3) != 0;
      #1;
      for (int b = 0; b < 64; b++) e[b] = (post && pre[b]) ? 1'b1 : weights[b];
      checks++;
      if (w_ltp !== e) begin
        failures++;
        $display("FAIL w=%h pre=%h post=%b got %h exp %h", weights, pre, post, w_ltp, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
