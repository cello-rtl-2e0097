// tb_op_sequencer: runs operation descriptors through the op sequencer wired
// to the PE array (8 rows), the register file and the pipeline buffer, with
// CHORD and the input buffer replaced by simple testbench memories (CHORD
// answers reads after a random 1-4 cycle delay and accepts requests with
// random back-pressure). A reference model in the testbench computes every
// expected line. Operations:
//  1. Z1 = C - A*B  (A from CHORD, C from the input buffer, 20 rows = 3 tiles,
//     J = 5), Z1 to CHORD and to the pipeline buffer with a held second stream
//  2. Z2 = 0 + Z1*B2 (A from pipeline stream 0, J = 16), Z2 to CHORD
//  3. Z3 = Z1 + Z2*B (A from CHORD = Z2, C from pipeline stream 1 = Z1, held)
//  4. RF slot 3 = Z3^T Z1 (contracted, 20 rows, 16 output rows)
// Also checks that an uncontracted tile spends exactly J cycles in compute.
module tb_op_sequencer;
  import cello_pkg::*;
  localparam int ROWS = 8;
  localparam int M = 20;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start = 0, busy, done; op_desc_t desc = '0;
  logic ch_req_valid, ch_req_ready, ch_req_write, ch_rsp_valid; tid_t ch_req_tid; addr_t ch_req_addr;
  line_t ch_req_wdata, ch_rsp_rdata;
  logic ib_rd_en; logic [10:0] ib_rd_addr; line_t ib_rd_data;
  logic [1:0] pb_cons_en, pb_rd_valid, pb_rd_ready; logic pb_wr_valid, pb_wr_ready; line_t pb_wr_data; line_t pb_rd_data [2];
  mode_e pe_mode; logic pe_ld_en, pe_ld_sel, pe_acc_init, pe_init_use_b, pe_init_neg, pe_sacc_clr, pe_step_en, pe_step_neg;
  logic [2:0] pe_ld_row, pe_out_row; logic [3:0] pe_n_valid; logic [3:0] pe_step_k, pe_out_k;
  line_t pe_ld_data, pe_out_data, pe_red_data;
  logic [1:0] rf_rd_slot, rf_wr_slot, mon_slot = '0; logic [3:0] rf_rd_row, rf_wr_row, mon_row = '0;
  logic rf_wr_en, host_we = 0; line_t rf_rd_data, rf_wr_data, mon_data, host_data = '0;
  logic [1:0] host_slot = '0; logic [3:0] host_row = '0;
  logic [11:0] occ;

  op_sequencer #(.ROWS(ROWS), .IB_AW(11)) dut (.*);
  pe_array #(.ROWS(ROWS), .COLS(16)) u_pe (.clk, .rst_n, .mode(pe_mode), .ld_en(pe_ld_en), .ld_row(pe_ld_row),
    .ld_sel(pe_ld_sel), .ld_data(pe_ld_data), .acc_init(pe_acc_init), .init_use_b(pe_init_use_b),
    .init_neg(pe_init_neg), .sacc_clr(pe_sacc_clr), .step_en(pe_step_en), .step_k(pe_step_k), .step_neg(pe_step_neg),
    .b_row(rf_rd_data), .n_valid(pe_n_valid), .out_row(pe_out_row), .out_data(pe_out_data), .out_k(pe_out_k), .red_data(pe_red_data));
  small_tensor_rf #(.SLOTS(4), .ROWS(16)) u_rf (.clk, .rst_n, .wr_en(rf_wr_en || host_we),
    .wr_slot(rf_wr_en ? rf_wr_slot : host_slot), .wr_row(rf_wr_en ? rf_wr_row : host_row),
    .wr_data(rf_wr_en ? rf_wr_data : host_data), .rd_slot(rf_rd_slot), .rd_row(rf_rd_row), .rd_data(rf_rd_data),
    .mon_slot, .mon_row, .mon_data);
  pipeline_buffer #(.DEPTH(2048), .NCONS(2)) u_pb (.clk, .rst_n, .cons_en(pb_cons_en), .wr_valid(pb_wr_valid),
    .wr_ready(pb_wr_ready), .wr_data(pb_wr_data), .rd_valid(pb_rd_valid), .rd_ready(pb_rd_ready),
    .rd_data(pb_rd_data), .occupancy(occ));

  // testbench memories standing in for CHORD and the input buffer
  line_t chmem [addr_t];
  line_t ibmem [2048];
  int rsp_delay = 0; logic rsp_pend = 0; line_t rsp_line;
  assign ch_rsp_valid = rsp_pend && rsp_delay == 0;
  assign ch_rsp_rdata = rsp_line;
  always @(negedge clk) ch_req_ready = !rsp_pend && ($urandom_range(0, 2) != 0);
  always @(posedge clk) begin
    if (ch_req_valid && ch_req_ready) begin
      if (ch_req_write) chmem[ch_req_addr] = ch_req_wdata;
      else begin rsp_pend <= 1; rsp_delay <= $urandom_range(0, 3); rsp_line <= chmem[ch_req_addr]; end
    end
    if (rsp_pend && rsp_delay != 0) rsp_delay <= rsp_delay - 1;
    if (ch_rsp_valid) rsp_pend <= 0;
    if (ib_rd_en) ib_rd_data <= ibmem[ib_rd_addr];
  end

  typedef word_t mat_t [M][16];
  typedef word_t sm_t [16][16];
  mat_t A, C, Z1, Z2, Z3; sm_t B, B2, G;

  function automatic line_t pack(word_t w [16]);
    line_t l;
    for (int n = 0; n < 16; n++) l[n*WORD_W +: WORD_W] = w[n];
    return l;
  endfunction

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic host_rf(int slot, sm_t s);
    for (int r = 0; r < 16; r++) begin
      @(negedge clk); host_we = 1; host_slot = 2'(slot); host_row = 4'(r); host_data = pack(s[r]);
    end
    @(negedge clk); host_we = 0;
  endtask

  task automatic run(op_desc_t dd);
    @(negedge clk); desc = dd; start = 1;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
  endtask

  int step_cycles, step_runs;
  logic step_prev;
  always @(posedge clk) begin
    if (pe_step_en && pe_mode == MODE_UNCONTRACTED) step_cycles <= step_cycles + 1;
    if (pe_step_en && !step_prev && pe_mode == MODE_UNCONTRACTED) step_runs <= step_runs + 1;
    step_prev <= pe_step_en;
  end

  initial begin
    op_desc_t d;
    step_cycles = 0; step_runs = 0; step_prev = 0;
    for (int m = 0; m < M; m++) for (int n = 0; n < 16; n++) begin A[m][n] = $urandom; C[m][n] = $urandom; end
    for (int j = 0; j < 16; j++) for (int n = 0; n < 16; n++) begin B[j][n] = $urandom; B2[j][n] = $urandom; end
    for (int m = 0; m < M; m++) begin chmem[100 + m] = pack(A[m]); ibmem[7 + m] = pack(C[m]); end
    // reference
    for (int m = 0; m < M; m++) for (int n = 0; n < 16; n++) begin
      Z1[m][n] = C[m][n];
      for (int j = 0; j < 5; j++) Z1[m][n] -= A[m][j] * B[j][n];
    end
    for (int m = 0; m < M; m++) for (int n = 0; n < 16; n++) begin
      Z2[m][n] = 0;
      for (int j = 0; j < 16; j++) Z2[m][n] += Z1[m][j] * B2[j][n];
    end
    for (int m = 0; m < M; m++) for (int n = 0; n < 16; n++) begin
      Z3[m][n] = Z1[m][n];
      for (int j = 0; j < 16; j++) Z3[m][n] += Z2[m][j] * B[j][n];
    end
    for (int k = 0; k < 16; k++) for (int n = 0; n < 16; n++) begin
      G[k][n] = 0;
      for (int m = 0; m < M; m++) G[k][n] += Z3[m][k] * Z1[m][n];
    end
    repeat (2) @(posedge clk); rst_n = 1;
    host_rf(0, B); host_rf(1, B2);
    // 1
    d = '0; d.mode = MODE_UNCONTRACTED; d.m_rows = M; d.k_len = 5;
    d.a_src = SRC_CHORD; d.a_base = 100; d.c_src = SRC_INBUF; d.c_base = 7; d.ab_neg = 1; d.b_slot = 0;
    d.z_to_chord = 1; d.z_base = 200; d.z_to_pipe = 1; d.pipe_cons = 2'b11;
    run(d);
    for (int m = 0; m < M; m++) check($sformatf("Z1 row %0d", m), chmem[200 + m] == pack(Z1[m]));
    check("Z1 held in pipeline buffer", occ == M);
    check("compute J cycles per tile", step_cycles == 5 * 3 && step_runs == 3);
    // 2
    d = '0; d.mode = MODE_UNCONTRACTED; d.m_rows = M; d.k_len = 16; d.a_src = SRC_PIPE; d.c_src = SRC_NONE;
    d.b_slot = 1; d.z_to_chord = 1; d.z_base = 300;
    run(d);
    for (int m = 0; m < M; m++) check($sformatf("Z2 row %0d", m), chmem[300 + m] == pack(Z2[m]));
    check("held stream still there", occ == M);
    // 3
    d = '0; d.mode = MODE_UNCONTRACTED; d.m_rows = M; d.k_len = 16; d.a_src = SRC_CHORD; d.a_base = 300;
    d.c_src = SRC_PIPE; d.b_slot = 0; d.z_to_chord = 1; d.z_base = 400;
    run(d);
    for (int m = 0; m < M; m++) check($sformatf("Z3 row %0d", m), chmem[400 + m] == pack(Z3[m]));
    check("pipeline buffer drained", occ == 0);
    // 4
    d = '0; d.mode = MODE_CONTRACTED; d.m_rows = M; d.k_len = 16; d.a_src = SRC_CHORD; d.a_base = 400;
    d.c_src = SRC_CHORD; d.c_base = 200; d.out_slot = 3;
    run(d);
    for (int k = 0; k < 16; k++) begin
      mon_slot = 3; mon_row = 4'(k); #1;
      check($sformatf("G row %0d", k), mon_data == pack(G[k]));
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
