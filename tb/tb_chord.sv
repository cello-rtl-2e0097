// tb_chord: directed test of the CHORD buffer with a 16-line SRAM.
//
// Walks through the two policies as in the toy example of the design:
//  1. tensor X (20 lines, one future reuse) is written: Prelude fills the 16
//     free lines in order and sends lines 16..19 to DRAM (spill).
//  2. tensor R (10 lines, three future reuses, nearer) is written: Riff pushes
//     out X's tail (lines 15 down to 6) to DRAM one line per R line.
//  3. every line of X and R reads back correctly, from the SRAM when the
//     metadata says it is resident and from DRAM otherwise.
//  4. a tensor with no future reuse finds no victim and goes to DRAM.
//  5. in-place overwrite hits; a first-line read counts a reuse; freeing R's
//     entry returns its space, and a new tensor is placed there.
//  6. a tensor that does not fit fills the empty space from the top down and
//     then pushes out the tail of the lower-priority tensor below it.
// Expected values come from a per-(tensor, line) data pattern and from the
// policy rules, not from the design. Read-hit latency (2 cycles from the
// accepting edge) and DRAM traffic counts are checked too.
module tb_chord;
  import cello_pkg::*;
  localparam int DEPTH = 16;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic cfg_we = 0; tid_t cfg_id = '0; riff_entry_t cfg_entry = '0;
  tid_t mon_id = '0; riff_entry_t mon_entry;
  logic req_valid = 0, req_ready, req_write = 0; tid_t req_tid = '0; addr_t req_addr = '0; line_t req_wdata = '0;
  logic rsp_valid, rsp_hit; line_t rsp_rdata;
  logic dram_req_valid, dram_req_ready, dram_req_write, dram_rsp_valid; addr_t dram_req_addr;
  line_t dram_req_wdata, dram_rsp_rdata;
  logic ev_hit, ev_miss, ev_place, ev_evict, ev_spill;
  int n_rd, n_wr;
  int c_hit = 0, c_miss = 0, c_place = 0, c_evict = 0, c_spill = 0;
  int checks = 0, failures = 0;

  chord #(.DEPTH(DEPTH), .ENTRIES(64)) dut (.*);
  dram_model #(.LATENCY(3)) u_dram (.clk, .rst_n, .req_valid(dram_req_valid), .req_ready(dram_req_ready),
    .req_write(dram_req_write), .req_addr(dram_req_addr), .req_wdata(dram_req_wdata),
    .rsp_valid(dram_rsp_valid), .rsp_rdata(dram_rsp_rdata), .n_reads(n_rd), .n_writes(n_wr));

  always @(posedge clk) begin
    c_hit <= c_hit + int'(ev_hit); c_miss <= c_miss + int'(ev_miss); c_place <= c_place + int'(ev_place);
    c_evict <= c_evict + int'(ev_evict); c_spill <= c_spill + int'(ev_spill);
  end

  function automatic line_t pat(int tid, int line, int ver);
    line_t l;
    for (int w = 0; w < LINE_WORDS; w++) l[w*WORD_W +: WORD_W] = 32'(tid * 1000000 + line * 100 + w + ver * 7777);
    return l;
  endfunction

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic cfg(int tid, int sa, int len, int freq, int rdist, logic valid);
    riff_entry_t e = '0;
    e.valid = valid; e.open = 1'b1; e.tid = tid_t'(tid);
    e.start_addr = sa; e.end_addr = sa + len; e.end_chord_addr = sa;
    e.reuse_freq = 16'(freq); e.reuse_dist = 16'(rdist);
    @(negedge clk); cfg_we = 1; cfg_id = tid_t'(tid); cfg_entry = e;
    @(negedge clk); cfg_we = 0;
  endtask

  task automatic wr(int tid, int a, line_t d);
    @(negedge clk); req_valid = 1; req_write = 1; req_tid = tid_t'(tid); req_addr = a; req_wdata = d;
    while (!req_ready) @(negedge clk);
    @(negedge clk); req_valid = 0;
    while (!req_ready) @(negedge clk);
  endtask

  task automatic rd(int tid, int a, output line_t d, output logic hit, output int lat);
    int t0;
    @(negedge clk); req_valid = 1; req_write = 0; req_tid = tid_t'(tid); req_addr = a;
    while (!req_ready) @(negedge clk);
    t0 = cyc;
    @(negedge clk); req_valid = 0;
    while (!rsp_valid) @(negedge clk);
    d = rsp_rdata; hit = rsp_hit; lat = cyc - t0;
    @(negedge clk);
  endtask

  line_t d; logic hit; int lat; int w0, e0;

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    cfg(1, 1000, 20, 1, 5, 1);   // X
    cfg(2, 2000, 10, 3, 1, 1);   // R
    cfg(3, 3000, 4, 0, 9, 1);    // T, no future reuse

    // 1. Prelude: X fills the buffer, the rest goes to DRAM
    for (int i = 0; i < 20; i++) wr(1, 1000 + i, pat(1, i, 0));
    check("X placed 16 lines", c_place == 16);
    check("X spill event once", c_spill == 1);
    check("X tail lines in DRAM", n_wr == 4);
    mon_id = 1; #1;
    check("X slice end", mon_entry.end_chord_addr == 1016 && mon_entry.end_idx == 16 && !mon_entry.open);

    // 2. Riff: R replaces X's tail
    for (int i = 0; i < 10; i++) wr(2, 2000 + i, pat(2, i, 0));
    check("R evicted 10 lines of X", c_evict == 10);
    check("evicted lines written back", n_wr == 14);
    mon_id = 1; #1;
    check("X shrank to 6 lines", mon_entry.end_chord_addr == 1006 && mon_entry.end_idx == 6);
    mon_id = 2; #1;
    check("R slice descending", mon_entry.dir && mon_entry.start_idx == 15 && mon_entry.end_idx == 5
          && mon_entry.end_chord_addr == 2010);

    // 3. read everything back
    for (int i = 0; i < 20; i++) begin
      rd(1, 1000 + i, d, hit, lat);
      check($sformatf("X line %0d data", i), d == pat(1, i, 0));
      check($sformatf("X line %0d hit", i), hit == (i < 6));
      if (i < 6) check("read-hit latency 2", lat == 2);
    end
    for (int i = 0; i < 10; i++) begin
      rd(2, 2000 + i, d, hit, lat);
      check($sformatf("R line %0d", i), d == pat(2, i, 0) && hit);
    end
    mon_id = 2; #1;
    check("R reuse counted", mon_entry.reuse_hist == 1 && mon_entry.reuse_freq == 2);
    mon_id = 1; #1;
    check("X reuse counted", mon_entry.reuse_hist == 1 && mon_entry.reuse_freq == 0);

    // 4. the scheduler raises X's remaining reuses again, keeping its slice;
    //    T (no reuse, far) then has the lowest priority and no victim
    w0 = n_wr; e0 = c_evict;
    begin
      riff_entry_t e = '0;
      e.valid = 1; e.tid = 1; e.start_addr = 1000; e.end_addr = 1020; e.end_chord_addr = 1006;
      e.start_idx = 0; e.end_idx = 6; e.reuse_freq = 2; e.reuse_dist = 5;
      @(negedge clk); cfg_we = 1; cfg_id = 1; cfg_entry = e; @(negedge clk); cfg_we = 0;
    end
    for (int i = 0; i < 4; i++) wr(3, 3000 + i, pat(3, i, 0));
    check("T found no victim", c_evict == e0 && n_wr == w0 + 4);
    rd(3, 3002, d, hit, lat);
    check("T line from DRAM", d == pat(3, 2, 0) && !hit);

    // 5. in-place overwrite of a resident line
    wr(1, 1003, pat(1, 3, 1));
    rd(1, 1003, d, hit, lat);
    check("X overwrite hit", d == pat(1, 3, 1) && hit);
    wr(1, 1010, pat(1, 10, 1));   // non-resident line: write miss to DRAM
    rd(1, 1010, d, hit, lat);
    check("X overwrite miss", d == pat(1, 10, 1) && !hit);

    // free R, place a new tensor U above X
    cfg(2, 2000, 10, 0, 0, 0);
    cfg(4, 4000, 12, 1, 1, 1);
    w0 = n_wr;
    for (int i = 0; i < 12; i++) wr(4, 4000 + i, pat(4, i, 0));
    mon_id = 4; #1;
    check("U placed in freed space", !mon_entry.dir && mon_entry.start_idx == 6 && mon_entry.end_idx == 16
          && mon_entry.end_chord_addr == 4010);
    check("U tail spilled", n_wr == w0 + 2);
    for (int i = 0; i < 12; i++) begin
      rd(4, 4000 + i, d, hit, lat);
      check($sformatf("U line %0d", i), d == pat(4, i, 0) && hit == (i < 10));
    end
    for (int i = 0; i < 6; i++) begin
      rd(1, 1000 + i, d, hit, lat);
      check($sformatf("X line %0d kept", i), d == pat(1, i, i == 3 ? 1 : 0) && hit);
    end
    // 6. fill downwards then push out: V fits, W does not and outranks V
    for (int t = 1; t <= 4; t++) cfg(t, 0, 0, 0, 0, 0);
    cfg(5, 5000, 10, 1, 4, 1);
    cfg(6, 6000, 12, 5, 1, 1);
    for (int i = 0; i < 10; i++) wr(5, 5000 + i, pat(5, i, 0));
    e0 = c_evict; w0 = n_wr;
    for (int i = 0; i < 12; i++) wr(6, 6000 + i, pat(6, i, 0));
    check("W pushed out 6 lines of V", c_evict == e0 + 6 && n_wr == w0 + 6);
    mon_id = 6; #1;
    check("W fills from the top", mon_entry.dir && mon_entry.start_idx == 15 && mon_entry.end_chord_addr == 6012);
    mon_id = 5; #1;
    check("V keeps its head", !mon_entry.dir && mon_entry.end_idx == 4 && mon_entry.end_chord_addr == 5004);
    for (int i = 0; i < 12; i++) begin
      rd(6, 6000 + i, d, hit, lat);
      check($sformatf("W line %0d", i), d == pat(6, i, 0) && hit);
    end
    for (int i = 0; i < 10; i++) begin
      rd(5, 5000 + i, d, hit, lat);
      check($sformatf("V line %0d", i), d == pat(5, i, 0) && hit == (i < 4));
    end
    $display("events: hit=%0d miss=%0d place=%0d evict=%0d spill=%0d", c_hit, c_miss, c_place, c_evict, c_spill);
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
