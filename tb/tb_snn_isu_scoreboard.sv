// tb_snn_isu_scoreboard: busy bits set at issue, cleared at writeback, and
// a hazard reported while a checked register is busy, including in the cycle
// of its writeback.
module tb_snn_isu_scoreboard;
  logic clk = 0, rst_n = 0, issue_fire = 0, wb_fire = 0, hazard;
  logic [4:0] issue_wmask = 0, wb_wmask = 0, check_mask = 0, busy, mb = 0;
  int checks = 0, failures = 0;

  snn_isu_scoreboard dut (.*);
  always #5 clk = ~clk;

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      issue_fire = $urandom % 2; issue_wmask = 5'($urandom);
      wb_fire = $urandom % 2; wb_wmask = 5'($urandom) & mb;
      check_mask = 5'($urandom);
      if (i % 7 == 0) begin wb_fire = 1; wb_wmask = mb; check_mask = mb; end
      #1;
      checks++;
      if (hazard !== |(mb & check_mask) || busy !== mb) begin
        failures++;
        $display("FAIL busy=%b exp %b chk=%b hazard=%b", busy, mb, check_mask, hazard);
      end
      @(posedge clk);
      mb = (mb & ~(wb_fire ? wb_wmask : 5'b0)) | (issue_fire ? issue_wmask : 5'b0);
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
