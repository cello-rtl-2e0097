// tb_pipeline_buffer: streams tiles through the pipeline buffer.
//  Phase 1 (pipelineable edge): one consumer; producer and consumer run with
//  random stalls; every line must arrive once, in order.
//  Phase 2 (delayed_hold edge): two consumers; consumer 1 starts only after
//  consumer 0 has read 300 lines, so the buffer must hold those lines; the
//  occupancy must reach 300 and never exceed DEPTH; both see the full stream.
//  Phase 3: a small buffer fills up and back-pressures the producer.
module tb_pipeline_buffer;
  import cello_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [1:0] cons_en = '0;
  logic wr_valid = 0, wr_ready; line_t wr_data = '0;
  logic [1:0] rd_valid, rd_ready = '0; line_t rd_data [2];
  logic [11:0] occupancy;

  pipeline_buffer #(.DEPTH(2048), .NCONS(2)) dut (.*);

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic line_t pat(int i);
    line_t l;
    for (int w = 0; w < LINE_WORDS; w++) l[w*WORD_W +: WORD_W] = 32'(i * 16 + w + 12345);
    return l;
  endfunction

  int n_prod, n_c0, n_c1, max_occ, c1_start, total, bad0, bad1;
  logic hold_phase;
  always @(posedge clk) if (rst_n) begin
    if (wr_valid && wr_ready) n_prod <= n_prod + 1;
    if (rd_valid[0] && rd_ready[0]) begin if (rd_data[0] != pat(n_c0)) bad0 <= bad0 + 1; n_c0 <= n_c0 + 1; end
    if (rd_valid[1] && rd_ready[1]) begin if (rd_data[1] != pat(n_c1)) bad1 <= bad1 + 1; n_c1 <= n_c1 + 1; end
    if (int'(occupancy) > max_occ) max_occ <= int'(occupancy);
  end
  // producer and consumers, driven on the falling edge
  always @(negedge clk) begin
    wr_valid = (n_prod < total) && ($urandom_range(0, 3) != 0 || wr_valid);
    wr_data  = pat(n_prod);
    rd_ready[0] = $urandom_range(0, 3) != 0;
    rd_ready[1] = hold_phase ? (n_c0 >= c1_start) && ($urandom_range(0, 3) != 0) : 1'b0;
  end

  initial begin
    n_prod = 0; n_c0 = 0; n_c1 = 0; max_occ = 0; bad0 = 0; bad1 = 0; total = 0; hold_phase = 0; c1_start = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    // phase 1
    cons_en = 2'b01; repeat (2) @(posedge clk);
    total = 1500;
    wait (n_c0 == 1500); repeat (3) @(posedge clk);
    check("phase 1 all lines in order", bad0 == 0 && n_c0 == 1500);
    check("phase 1 empty", occupancy == 0);
    // phase 2
    @(negedge clk); cons_en = 2'b11; hold_phase = 1; c1_start = 300; max_occ = 0;
    n_prod = 0; n_c0 = 0; n_c1 = 0; total = 0;
    repeat (3) @(posedge clk);
    @(negedge clk); total = 1200;
    wait (n_c1 == 1200 && n_c0 == 1200); repeat (3) @(posedge clk);
    check("phase 2 stream 0", bad0 == 0);
    check("phase 2 stream 1 (held)", bad1 == 0);
    check("phase 2 held at least 300 lines", max_occ >= 300);
    check("phase 2 within depth", max_occ <= 2048);
    check("phase 2 drained", occupancy == 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
