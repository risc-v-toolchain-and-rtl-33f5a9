// tb_snn_sreg_file: reset values, writes truncated to each register's width,
// the addressed read port and the seed_load pulse.
module tb_snn_sreg_file;
  import snn_pkg::*;
  logic clk = 0, rst_n = 0, we = 0;
  sreg_e waddr = SR_VTH, raddr = SR_VTH;
  logic [63:0] wdata = 0, rdata;
  logic [15:0] vth, vleak, seed;
  logic [9:0] pltd;
  logic post, seed_load;
  logic [15:0] seed_wdata;
  int checks = 0, failures = 0;
  logic [63:0] mdl [5];
  logic [63:0] mask [5];

  snn_sreg_file dut (.*);
  always #5 clk = ~clk;

  task automatic chk(logic [63:0] got, logic [63:0] exp, string what);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %h exp %h", what, got, exp); end
  endtask

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    mask[0] = 64'hFFFF; mask[1] = 64'hFFFF; mask[2] = 64'h3FF; mask[3] = 64'hFFFF; mask[4] = 64'h1;
    mdl[0] = 16; mdl[1] = 1; mdl[2] = 0; mdl[3] = 16'hACE1; mdl[4] = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int r = 0; r < 5; r++) begin
      raddr = sreg_e'(r); #1 chk(rdata, mdl[r], "reset");
    end
    for (int i = 0; i < 500; i++) begin
      int r;
      r = $urandom % 5;
      we = ($urandom % 2) == 0; waddr = sreg_e'(r); wdata = {$urandom, $urandom};
      #1 chk(64'(seed_load), 64'(we && r == 3), "seed_load");
      if (seed_load) chk(64'(seed_wdata), wdata & 64'hFFFF, "seed_wdata");
      @(posedge clk); #1;
      if (we) mdl[r] = wdata & mask[r];
      we = 0;
      raddr = sreg_e'($urandom % 5); #1;
      chk(rdata, mdl[raddr], "read port");
      chk(64'(vth), mdl[0], "vth"); chk(64'(vleak), mdl[1], "vleak");
      chk(64'(pltd), mdl[2], "pltd"); chk(64'(seed), mdl[3], "seed"); chk(64'(post), mdl[4], "post");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
