// tb_small_tensor_rf: fills all 4 slots x 16 rows with random lines, then
// reads each through both read ports and compares with a reference copy;
// checks reset clears the file and that a write is visible the next cycle.
module tb_small_tensor_rf;
  import cello_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic wr_en = 0; logic [1:0] wr_slot = '0, rd_slot = '0, mon_slot = '0;
  logic [3:0] wr_row = '0, rd_row = '0, mon_row = '0;
  line_t wr_data = '0, rd_data, mon_data;
  line_t ref_rf [4][16];

  small_tensor_rf #(.SLOTS(4), .ROWS(16)) dut (.*);

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    @(negedge clk); rd_slot = 2; rd_row = 7; #1 check("reset clears", rd_data == '0);
    for (int s = 0; s < 4; s++) for (int r = 0; r < 16; r++) begin
      line_t l;
      for (int w = 0; w < LINE_WORDS; w++) l[w*WORD_W +: WORD_W] = $urandom;
      ref_rf[s][r] = l;
      @(negedge clk); wr_en = 1; wr_slot = 2'(s); wr_row = 4'(r); wr_data = l;
    end
    @(negedge clk); wr_en = 0;
    for (int s = 0; s < 4; s++) for (int r = 0; r < 16; r++) begin
      rd_slot = 2'(s); rd_row = 4'(r); mon_slot = 2'(3 - s); mon_row = 4'(15 - r); #1;
      check("rd port", rd_data == ref_rf[s][r]);
      check("mon port", mon_data == ref_rf[3-s][15-r]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
