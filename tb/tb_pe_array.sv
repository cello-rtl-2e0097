// tb_pe_array: checks both modes of the PE array (32 rows here) against a
// reference computed in the testbench with random 32-bit data.
//  Uncontracted: acc = +-C +- A*B for several (init, sign, J) combinations,
//  with B rows streamed one per step; one step per cycle, so J steps must
//  take J cycles.
//  Contracted: sacc[k][n] = sum over rows < n_valid of a[r][k]*b[r][n],
//  accumulated over two tiles, with n_valid below ROWS in the second tile
//  so that masking of unused rows is exercised.
module tb_pe_array;
  import cello_pkg::*;
  localparam int ROWS = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  mode_e mode = MODE_UNCONTRACTED;
  logic ld_en = 0, ld_sel = 0, acc_init = 0, init_use_b = 0, init_neg = 0, sacc_clr = 0, step_en = 0, step_neg = 0;
  logic [4:0] ld_row = '0, out_row = '0;
  logic [5:0] n_valid = '0;
  logic [3:0] step_k = '0, out_k = '0;
  line_t ld_data = '0, b_row = '0, out_data, red_data;

  pe_array #(.ROWS(ROWS), .COLS(16)) dut (.*);

  word_t A [ROWS][16], C [ROWS][16], B [16][16], Z [ROWS][16], S [16][16];

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic line_t pack(word_t w [16]);
    line_t l;
    for (int n = 0; n < 16; n++) l[n*WORD_W +: WORD_W] = w[n];
    return l;
  endfunction

  task automatic load_tiles();
    for (int r = 0; r < ROWS; r++) for (int n = 0; n < 16; n++) begin
      A[r][n] = $urandom; C[r][n] = $urandom;
    end
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk); ld_en = 1; ld_sel = 0; ld_row = 5'(r); ld_data = pack(A[r]);
      @(negedge clk); ld_sel = 1; ld_data = pack(C[r]);
    end
    @(negedge clk); ld_en = 0;
  endtask

  initial begin
    int t0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int trial = 0; trial < 4; trial++) begin
      int J; logic use_c, cneg, abneg;
      J = (trial == 0) ? 16 : $urandom_range(1, 16);
      use_c = trial != 1; cneg = trial[1]; abneg = trial[0];
      load_tiles();
      for (int j = 0; j < 16; j++) for (int n = 0; n < 16; n++) B[j][n] = $urandom;
      for (int r = 0; r < ROWS; r++) for (int n = 0; n < 16; n++) begin
        Z[r][n] = use_c ? (cneg ? -C[r][n] : C[r][n]) : '0;
        for (int j = 0; j < J; j++) Z[r][n] = abneg ? Z[r][n] - A[r][j] * B[j][n] : Z[r][n] + A[r][j] * B[j][n];
      end
      mode = MODE_UNCONTRACTED;
      @(negedge clk); acc_init = 1; init_use_b = use_c; init_neg = cneg;
      @(negedge clk); acc_init = 0;
      t0 = $time;
      for (int j = 0; j < J; j++) begin
        step_en = 1; step_k = 4'(j); step_neg = abneg; b_row = pack(B[j]);
        @(negedge clk);
      end
      step_en = 0;
      check("one step per cycle", ($time - t0) == J * 10);
      for (int r = 0; r < ROWS; r++) begin
        out_row = 5'(r); #1;
        check($sformatf("trial %0d row %0d", trial, r), out_data == pack(Z[r]));
      end
    end
    // contracted mode over two tiles
    mode = MODE_CONTRACTED;
    @(negedge clk); sacc_clr = 1; @(negedge clk); sacc_clr = 0;
    for (int k = 0; k < 16; k++) for (int n = 0; n < 16; n++) S[k][n] = '0;
    for (int tile = 0; tile < 2; tile++) begin
      int nv;
      nv = tile == 0 ? ROWS : 19;
      load_tiles();
      for (int k = 0; k < 16; k++) for (int n = 0; n < 16; n++)
        for (int r = 0; r < nv; r++) S[k][n] = S[k][n] + A[r][k] * C[r][n];
      n_valid = 6'(nv);
      for (int k = 0; k < 16; k++) begin
        @(negedge clk); step_en = 1; step_k = 4'(k);
      end
      @(negedge clk); step_en = 0;
    end
    for (int k = 0; k < 16; k++) begin
      out_k = 4'(k); #1;
      check($sformatf("contracted row %0d", k), red_data == pack(S[k]));
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
