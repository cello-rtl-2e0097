// tb_cello_top: two iterations of the block conjugate-gradient loop on the
// whole accelerator, at reduced size (16 PE rows, 64-line CHORD) so that the
// 48-line tensors P, X and R compete for CHORD space.
//
// One iteration, as the host and the scheduler would issue it:
//   op1  Delta = P^T S         contracted, P from CHORD, S from the input buffer
//   host Lambda = f(Delta, Gamma)          written into the RF
//   op2  X = X + P Lambda      X rewritten in place through CHORD
//   op3  R = R - S Lambda      R to CHORD and to the pipeline buffer (2 streams)
//   op4  Gamma = R^T R         R from pipeline stream 0 and from CHORD
//   host Phi = f(Gamma_prev, Gamma)        written into the RF
//   op5  P = R + P Phi         R from pipeline stream 1 (delayed hold)
// S = A*P (the SpMM) is supplied by the host through DRAM and the input
// buffer. The small inverses are replaced by f(a, b) = a ^ b on the integer
// data, computed identically by the host model and the reference.
// The reference model recomputes every tensor in the testbench; at the end
// X, R and P are read from wherever CHORD's metadata says each line lives
// (SRAM or DRAM), and Delta and Gamma are compared every iteration.
// Mechanisms counted (each must occur): CHORD hit, miss, Prelude placement,
// Prelude spill, Riff eviction, downward fill, pipelined operand,
// delayed-hold operand, contracted and uncontracted operations, multi-tile
// operations, input-buffer DMA.
module tb_cello_top;
  import cello_pkg::*;
  localparam int ROWS = 16, CD = 64, M = 48;
  localparam int BP = 1000, BX = 2000, BR = 3000, BS = 5000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic cfg_tbl_we = 0; tid_t cfg_tbl_id = '0; riff_entry_t cfg_tbl_entry = '0;
  tid_t mon_tid = '0; riff_entry_t mon_entry;
  logic cfg_rf_we = 0; logic [1:0] cfg_rf_slot = '0, mon_rf_slot = '0; logic [3:0] cfg_rf_row = '0, mon_rf_row = '0;
  line_t cfg_rf_data = '0, mon_rf_data;
  logic ib_load_valid = 0, ib_load_ready, ib_load_busy; addr_t ib_load_dram_base = '0;
  logic [10:0] ib_load_local_base = '0; logic [11:0] ib_load_count = '0;
  logic op_start = 0, op_busy, op_done; op_desc_t op_desc = '0;
  logic ch_dram_req_valid, ch_dram_req_ready, ch_dram_req_write, ch_dram_rsp_valid; addr_t ch_dram_req_addr;
  line_t ch_dram_req_wdata, ch_dram_rsp_rdata;
  logic ib_dram_req_valid, ib_dram_req_ready, ib_dram_rsp_valid; addr_t ib_dram_req_addr; line_t ib_dram_rsp_rdata;
  logic ev_hit, ev_miss, ev_place, ev_evict, ev_spill;
  logic [11:0] pb_occupancy;
  int ch_rd, ch_wr, ib_rd, ib_wr;

  cello_top #(.CHORD_DEPTH(CD), .ENTRIES(64), .ROWS(ROWS), .IB_DEPTH(2048), .PB_DEPTH(2048)) dut (.*);
  dram_model #(.LATENCY(5)) u_chdram (.clk, .rst_n, .req_valid(ch_dram_req_valid), .req_ready(ch_dram_req_ready),
    .req_write(ch_dram_req_write), .req_addr(ch_dram_req_addr), .req_wdata(ch_dram_req_wdata),
    .rsp_valid(ch_dram_rsp_valid), .rsp_rdata(ch_dram_rsp_rdata), .n_reads(ch_rd), .n_writes(ch_wr));
  dram_model #(.LATENCY(5)) u_ibdram (.clk, .rst_n, .req_valid(ib_dram_req_valid), .req_ready(ib_dram_req_ready),
    .req_write(1'b0), .req_addr(ib_dram_req_addr), .req_wdata('0),
    .rsp_valid(ib_dram_rsp_valid), .rsp_rdata(ib_dram_rsp_rdata), .n_reads(ib_rd), .n_writes(ib_wr));

  typedef word_t mat_t [M][16];
  typedef word_t sm_t [16][16];
  mat_t P, X, R, S, An;
  sm_t  Dl, Gm, Gp, Lm, Ph;

  int c_hit = 0, c_miss = 0, c_place = 0, c_evict = 0, c_spill = 0, c_pipe = 0, c_hold = 0;
  int c_contr = 0, c_uncontr = 0, c_multitile = 0, c_dma = 0, c_down = 0;
  always @(posedge clk) begin
    c_hit <= c_hit + int'(ev_hit); c_miss <= c_miss + int'(ev_miss); c_place <= c_place + int'(ev_place);
    c_evict <= c_evict + int'(ev_evict); c_spill <= c_spill + int'(ev_spill);
    if (dut.pb_rd_valid[0] && dut.pb_rd_ready[0]) c_pipe <= c_pipe + 1;
    if (dut.pb_rd_valid[1] && dut.pb_rd_ready[1]) c_hold <= c_hold + 1;
  end

  function automatic line_t pack(word_t w [16]);
    line_t l;
    for (int n = 0; n < 16; n++) l[n*WORD_W +: WORD_W] = w[n];
    return l;
  endfunction
  function automatic line_t packs(sm_t s, int r);
    line_t l;
    for (int n = 0; n < 16; n++) l[n*WORD_W +: WORD_W] = s[r][n];
    return l;
  endfunction

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic cfg(int tid, int sa, int freq, int rdist);
    riff_entry_t e = '0;
    e.valid = 1; e.open = 1; e.tid = tid_t'(tid); e.start_addr = sa; e.end_addr = sa + M; e.end_chord_addr = sa;
    e.reuse_freq = 16'(freq); e.reuse_dist = 16'(rdist);
    @(negedge clk); cfg_tbl_we = 1; cfg_tbl_id = tid_t'(tid); cfg_tbl_entry = e;
    @(negedge clk); cfg_tbl_we = 0;
  endtask

  task automatic rf_write(int slot, sm_t s);
    for (int r = 0; r < 16; r++) begin
      @(negedge clk); cfg_rf_we = 1; cfg_rf_slot = 2'(slot); cfg_rf_row = 4'(r); cfg_rf_data = packs(s, r);
    end
    @(negedge clk); cfg_rf_we = 0;
  endtask

  task automatic rf_read(int slot, output sm_t s);
    for (int r = 0; r < 16; r++) begin
      mon_rf_slot = 2'(slot); mon_rf_row = 4'(r); #1;
      for (int n = 0; n < 16; n++) s[r][n] = mon_rf_data[n*WORD_W +: WORD_W];
    end
  endtask

  task automatic run(op_desc_t d);
    @(negedge clk); op_desc = d; op_start = 1;
    @(negedge clk); op_start = 0;
    while (!op_done) @(negedge clk);
    if (d.mode == MODE_CONTRACTED) c_contr++; else c_uncontr++;
    if (d.m_rows > ROWS) c_multitile++;
  endtask

  // current value of a tensor line, from CHORD's SRAM or from DRAM
  task automatic peek(int tid, int a, output line_t l);
    addr_t off; idx_t ix;
    mon_tid = tid_t'(tid); #1;
    if (a >= mon_entry.start_addr && a < mon_entry.end_chord_addr) begin
      off = a - mon_entry.start_addr;
      ix = mon_entry.dir ? mon_entry.start_idx - idx_t'(off) : mon_entry.start_idx + idx_t'(off);
      l = dut.u_chord.u_sram.mem[ix[5:0]];
    end else l = u_chdram.peek(a);
  endtask

  function automatic sm_t fx(sm_t a, sm_t b);
    sm_t o;
    for (int i = 0; i < 16; i++) for (int j = 0; j < 16; j++) o[i][j] = a[i][j] ^ b[i][j];
    return o;
  endfunction

  initial begin
    op_desc_t d; sm_t got; line_t l; mat_t Rn;
    for (int m = 0; m < M; m++) for (int n = 0; n < 16; n++) begin
      P[m][n] = $urandom; X[m][n] = $urandom; R[m][n] = $urandom;
    end
    for (int i = 0; i < 16; i++) for (int j = 0; j < 16; j++) Gm[i][j] = $urandom;
    for (int m = 0; m < M; m++) begin
      u_chdram.mem[BP + m] = pack(P[m]); u_chdram.mem[BX + m] = pack(X[m]); u_chdram.mem[BR + m] = pack(R[m]);
    end
    repeat (3) @(posedge clk); rst_n = 1;
    cfg(1, BP, 3, 1);   // P: three reuses, near
    cfg(2, BX, 1, 5);   // X: one reuse, next iteration
    cfg(3, BR, 2, 1);   // R: two reuses, near
    rf_write(1, Gm);

    for (int it = 0; it < 2; it++) begin
      // host: S = A*P with a banded integer A, placed in DRAM, loaded into the input buffer
      for (int m = 0; m < M; m++) for (int n = 0; n < 16; n++)
        S[m][n] = 32'(3) * P[m][n] - P[(m + 1) % M][n] + (m > 0 ? P[m - 1][n] : 0);
      for (int m = 0; m < M; m++) u_ibdram.mem[BS + it * 100 + m] = pack(S[m]);
      @(negedge clk); ib_load_valid = 1; ib_load_dram_base = BS + it * 100; ib_load_local_base = 0; ib_load_count = M;
      @(negedge clk); ib_load_valid = 0;
      while (ib_load_busy) @(negedge clk);
      c_dma++;
      // op1: Delta = P^T S
      for (int i = 0; i < 16; i++) for (int j = 0; j < 16; j++) begin
        Dl[i][j] = 0; for (int m = 0; m < M; m++) Dl[i][j] += P[m][i] * S[m][j];
      end
      d = '0; d.mode = MODE_CONTRACTED; d.m_rows = M; d.k_len = 16;
      d.a_src = SRC_CHORD; d.a_tid = 1; d.a_base = BP; d.c_src = SRC_INBUF; d.c_base = 0; d.out_slot = 2;
      run(d);
      rf_read(2, got);
      check($sformatf("it%0d Delta", it), got == Dl);
      // host: Lambda
      rf_read(1, got);
      Lm = fx(got, Dl);
      rf_write(0, Lm);
      // op2: X = X + P Lambda
      for (int m = 0; m < M; m++) for (int n = 0; n < 16; n++)
        for (int j = 0; j < 16; j++) X[m][n] += P[m][j] * Lm[j][n];
      d = '0; d.mode = MODE_UNCONTRACTED; d.m_rows = M; d.k_len = 16; d.a_src = SRC_CHORD; d.a_tid = 1; d.a_base = BP;
      d.c_src = SRC_CHORD; d.c_tid = 2; d.c_base = BX; d.b_slot = 0; d.z_to_chord = 1; d.z_tid = 2; d.z_base = BX;
      run(d);
      // op3: R = R - S Lambda
      for (int m = 0; m < M; m++) for (int n = 0; n < 16; n++)
        for (int j = 0; j < 16; j++) R[m][n] -= S[m][j] * Lm[j][n];
      d = '0; d.mode = MODE_UNCONTRACTED; d.m_rows = M; d.k_len = 16; d.a_src = SRC_INBUF; d.a_base = 0;
      d.c_src = SRC_CHORD; d.c_tid = 3; d.c_base = BR; d.ab_neg = 1; d.b_slot = 0;
      d.z_to_chord = 1; d.z_tid = 3; d.z_base = BR; d.z_to_pipe = 1; d.pipe_cons = 2'b11;
      run(d);
      check($sformatf("it%0d R staged in pipeline buffer", it), pb_occupancy == M);
      mon_tid = 3; #1; if (mon_entry.dir) c_down++;
      // Gamma_prev
      rf_read(1, Gp);
      rf_write(3, Gp);
      // op4: Gamma = R^T R
      for (int i = 0; i < 16; i++) for (int j = 0; j < 16; j++) begin
        Gm[i][j] = 0; for (int m = 0; m < M; m++) Gm[i][j] += R[m][i] * R[m][j];
      end
      d = '0; d.mode = MODE_CONTRACTED; d.m_rows = M; d.k_len = 16; d.a_src = SRC_PIPE;
      d.c_src = SRC_CHORD; d.c_tid = 3; d.c_base = BR; d.out_slot = 1;
      run(d);
      rf_read(1, got);
      check($sformatf("it%0d Gamma", it), got == Gm);
      check($sformatf("it%0d R held for P update", it), pb_occupancy == M);
      // host: Phi
      Ph = fx(Gp, Gm);
      rf_write(0, Ph);
      // op5: P = R + P Phi
      for (int m = 0; m < M; m++) for (int n = 0; n < 16; n++) begin
        Rn[m][n] = R[m][n];
        for (int j = 0; j < 16; j++) Rn[m][n] += P[m][j] * Ph[j][n];
      end
      P = Rn;
      d = '0; d.mode = MODE_UNCONTRACTED; d.m_rows = M; d.k_len = 16; d.a_src = SRC_CHORD; d.a_tid = 1; d.a_base = BP;
      d.c_src = SRC_PIPE; d.b_slot = 0; d.z_to_chord = 1; d.z_tid = 1; d.z_base = BP;
      run(d);
      check($sformatf("it%0d pipeline buffer drained", it), pb_occupancy == 0);
    end
    for (int m = 0; m < M; m++) begin
      peek(2, BX + m, l); check($sformatf("X row %0d", m), l == pack(X[m]));
      peek(3, BR + m, l); check($sformatf("R row %0d", m), l == pack(R[m]));
      peek(1, BP + m, l); check($sformatf("P row %0d", m), l == pack(P[m]));
    end
    $display("mechanisms: hit=%0d miss=%0d place=%0d spill=%0d evict=%0d down=%0d pipe=%0d hold=%0d contr=%0d uncontr=%0d multitile=%0d dma=%0d",
             c_hit, c_miss, c_place, c_spill, c_evict, c_down, c_pipe, c_hold, c_contr, c_uncontr, c_multitile, c_dma);
    $display("DRAM traffic through CHORD: reads=%0d writes=%0d", ch_rd, ch_wr);
    check("CHORD hit",           c_hit > 0);
    check("CHORD miss",          c_miss > 0);
    check("Prelude placement",   c_place > 0);
    check("Prelude spill",       c_spill > 0);
    check("Riff eviction",       c_evict > 0);
    check("downward fill",       c_down > 0);
    check("pipelined operand",   c_pipe > 0);
    check("delayed-hold operand", c_hold > 0);
    check("contracted op",       c_contr > 0);
    check("uncontracted op",     c_uncontr > 0);
    check("multi-tile op",       c_multitile > 0);
    check("input-buffer DMA",    c_dma > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
