// tb_cello_full: the accelerator at its default size (4 MB CHORD, 64-entry
// index table, 1024 x 16 = 16384 MACs, 2048-line input and pipeline buffers)
// running two complete operations on a 1500 x 16 tensor S (two tiles of the
// dominant rank):
//   op1  Gamma = S^T S          contracted, both operands from the input buffer
//   op2  Z = S Lambda           uncontracted, Z written to CHORD and read back
// S is DMA-loaded from the DRAM model. Results are compared with a reference
// computed in the testbench; Z must be entirely resident in CHORD (1500 lines
// fit in 65536) with no CHORD DRAM traffic. The compute phase of each tile
// must take exactly 16 cycles (one small-tensor row per cycle).
module tb_cello_full;
  import cello_pkg::*;
  localparam int M = 1500, BS = 7000, BZ = 100000;

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

  cello_top dut (.*);
  dram_model #(.LATENCY(5)) u_chdram (.clk, .rst_n, .req_valid(ch_dram_req_valid), .req_ready(ch_dram_req_ready),
    .req_write(ch_dram_req_write), .req_addr(ch_dram_req_addr), .req_wdata(ch_dram_req_wdata),
    .rsp_valid(ch_dram_rsp_valid), .rsp_rdata(ch_dram_rsp_rdata), .n_reads(ch_rd), .n_writes(ch_wr));
  dram_model #(.LATENCY(5)) u_ibdram (.clk, .rst_n, .req_valid(ib_dram_req_valid), .req_ready(ib_dram_req_ready),
    .req_write(1'b0), .req_addr(ib_dram_req_addr), .req_wdata('0),
    .rsp_valid(ib_dram_rsp_valid), .rsp_rdata(ib_dram_rsp_rdata), .n_reads(ib_rd), .n_writes(ib_wr));

  word_t S [M][16];
  word_t Lm [16][16], G [16][16];
  int step_cycles = 0, tiles = 0; logic step_prev = 0;
  always @(posedge clk) begin
    if (rst_n && dut.pe_step_en) step_cycles <= step_cycles + 1;
    if (rst_n && dut.pe_step_en && !step_prev) tiles <= tiles + 1;
    step_prev <= dut.pe_step_en;
  end

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic run(op_desc_t d);
    @(negedge clk); op_desc = d; op_start = 1;
    @(negedge clk); op_start = 0;
    while (!op_done) @(negedge clk);
  endtask

  initial begin
    op_desc_t d; line_t l; riff_entry_t e; word_t z; int nbad;
    for (int m = 0; m < M; m++) begin
      for (int n = 0; n < 16; n++) S[m][n] = $urandom;
      for (int n = 0; n < 16; n++) l[n*WORD_W +: WORD_W] = S[m][n];
      u_ibdram.mem[BS + m] = l;
    end
    for (int j = 0; j < 16; j++) for (int n = 0; n < 16; n++) Lm[j][n] = $urandom;
    for (int i = 0; i < 16; i++) for (int j = 0; j < 16; j++) begin
      G[i][j] = 0; for (int m = 0; m < M; m++) G[i][j] += S[m][i] * S[m][j];
    end
    repeat (3) @(posedge clk); rst_n = 1;
    // RF slot 0 = Lambda, CHORD entry for Z
    for (int r = 0; r < 16; r++) begin
      for (int n = 0; n < 16; n++) l[n*WORD_W +: WORD_W] = Lm[r][n];
      @(negedge clk); cfg_rf_we = 1; cfg_rf_slot = 0; cfg_rf_row = 4'(r); cfg_rf_data = l;
    end
    e = '0; e.valid = 1; e.open = 1; e.tid = 9; e.start_addr = BZ; e.end_addr = BZ + M; e.end_chord_addr = BZ;
    e.reuse_freq = 1; e.reuse_dist = 1;
    @(negedge clk); cfg_rf_we = 0; cfg_tbl_we = 1; cfg_tbl_id = 9; cfg_tbl_entry = e;
    @(negedge clk); cfg_tbl_we = 0;
    @(negedge clk); ib_load_valid = 1; ib_load_dram_base = BS; ib_load_local_base = 0; ib_load_count = M;
    @(negedge clk); ib_load_valid = 0;
    while (ib_load_busy) @(negedge clk);
    // op1
    d = '0; d.mode = MODE_CONTRACTED; d.m_rows = M; d.k_len = 16; d.a_src = SRC_INBUF; d.a_base = 0;
    d.c_src = SRC_INBUF; d.c_base = 0; d.out_slot = 1;
    run(d);
    for (int r = 0; r < 16; r++) begin
      mon_rf_slot = 1; mon_rf_row = 4'(r); #1;
      for (int n = 0; n < 16; n++) l[n*WORD_W +: WORD_W] = G[r][n];
      check($sformatf("Gamma row %0d", r), mon_rf_data == l);
    end
    // op2
    d = '0; d.mode = MODE_UNCONTRACTED; d.m_rows = M; d.k_len = 16; d.a_src = SRC_INBUF; d.a_base = 0;
    d.c_src = SRC_NONE; d.b_slot = 0; d.z_to_chord = 1; d.z_tid = 9; d.z_base = BZ;
    run(d);
    mon_tid = 9; #1;
    check("Z fully resident", mon_entry.end_chord_addr == BZ + M && !mon_entry.dir && mon_entry.start_idx == 0);
    check("no CHORD DRAM traffic", ch_rd == 0 && ch_wr == 0);
    check("two tiles per op, 16 compute cycles each", tiles == 4 && step_cycles == 4 * 16);
    nbad = 0;
    for (int m = 0; m < M; m++) begin
      l = dut.u_chord.u_sram.mem[m];
      for (int n = 0; n < 16; n++) begin
        z = 0; for (int j = 0; j < 16; j++) z += S[m][j] * Lm[j][n];
        if (l[n*WORD_W +: WORD_W] != z) nbad++;
      end
    end
    check("Z = S Lambda, all 1500 x 16 words", nbad == 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
