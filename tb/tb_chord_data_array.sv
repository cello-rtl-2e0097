// tb_chord_data_array: writes random lines to random addresses of the CHORD
// data SRAM (full 65536-line size), keeps a reference copy, and checks every
// read returns the last written line exactly one cycle after the request.
module tb_chord_data_array;
  import cello_pkg::*;
  localparam int DEPTH = 65536;
  logic clk = 0, en = 0, we = 0;
  logic [15:0] addr = '0;
  line_t wdata = '0, rdata;
  int checks = 0, failures = 0;
  line_t ref_mem [int];
  int cyc = 0;

  chord_data_array #(.DEPTH(DEPTH), .LINE_W(LINE_W)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  function automatic line_t rnd_line();
    line_t l;
    for (int w = 0; w < LINE_WORDS; w++) l[w*WORD_W +: WORD_W] = $urandom;
    return l;
  endfunction

  initial begin
    int a;
    repeat (2) @(posedge clk);
    for (int i = 0; i < 400; i++) begin
      a = (i < 4) ? (i == 0 ? 0 : DEPTH - i) : int'($urandom_range(0, DEPTH-1));
      @(negedge clk); en = 1; we = 1; addr = 16'(a); wdata = rnd_line();
      ref_mem[a] = wdata;
    end
    @(negedge clk); en = 0; we = 0;
    foreach (ref_mem[key]) begin
      @(negedge clk); en = 1; we = 0; addr = 16'(key);
      @(negedge clk); en = 0;
      checks++;
      if (rdata !== ref_mem[key]) begin failures++; $display("mismatch at %0d", key); end
      // rdata must hold while en is low
      @(negedge clk);
      checks++;
      if (rdata !== ref_mem[key]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
