// tb_input_buffer: issues three DMA loads (different DRAM bases, local bases
// and lengths, one wrapping past the last line) into the 2048-line input
// buffer, reading from the behavioural DRAM, then reads every loaded line
// back and compares it with the DRAM model's known contents. Checks that a
// load of n lines finishes within n + latency + 4 cycles (one line per cycle).
module tb_input_buffer;
  import cello_pkg::*;
  localparam int DEPTH = 2048;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  logic load_valid = 0, load_ready, load_busy;
  addr_t load_dram_base = '0;
  logic [10:0] load_local_base = '0;
  logic [11:0] load_count = '0;
  logic dram_req_valid, dram_req_ready, dram_rsp_valid;
  addr_t dram_req_addr; line_t dram_rsp_rdata;
  logic rd_en = 0; logic [10:0] rd_addr = '0; line_t rd_data;
  int n_rd, n_wr;
  int checks = 0, failures = 0;

  input_buffer #(.DEPTH(DEPTH)) dut (.*);
  dram_model #(.LATENCY(4)) u_dram (.clk, .rst_n, .req_valid(dram_req_valid), .req_ready(dram_req_ready),
    .req_write(1'b0), .req_addr(dram_req_addr), .req_wdata('0),
    .rsp_valid(dram_rsp_valid), .rsp_rdata(dram_rsp_rdata), .n_reads(n_rd), .n_writes(n_wr));

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic load(int dbase, int lbase, int n);
    int t0;
    @(negedge clk); load_valid = 1; load_dram_base = dbase; load_local_base = 11'(lbase); load_count = 12'(n);
    t0 = cyc;
    @(negedge clk); load_valid = 0;
    while (load_busy) @(negedge clk);
    check($sformatf("load of %0d lines in time (%0d cycles)", n, cyc - t0), cyc - t0 <= n + 4 + 4);
  endtask

  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    load(5000, 0, 300);
    load(90000, 300, 1000);
    load(123, 1900, 200);   // wraps: lines 1900..2047 then 0..51
    check("DRAM reads", n_rd == 1500);
    for (int i = 0; i < 1300; i++) begin
      int la, da;
      la = i;
      da = (i < 300) ? 5000 + i : 90000 + i - 300;
      if (i < 52) da = 123 + 148 + i;   // overwritten by the wrapping load
      @(negedge clk); rd_en = 1; rd_addr = 11'(la);
      @(negedge clk); rd_en = 0;
      check($sformatf("line %0d", la), rd_data == u_dram.init_line(da));
    end
    for (int i = 1900; i < 2048; i++) begin
      @(negedge clk); rd_en = 1; rd_addr = 11'(i);
      @(negedge clk); rd_en = 0;
      check($sformatf("line %0d", i), rd_data == u_dram.init_line(123 + i - 1900));
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
