// dram_model: behavioural model of an off-chip DRAM channel, for testbenches.
//
// Line-wide request/response port matching the accelerator's DRAM ports:
// req_valid/req_ready handshake, writes complete at acceptance, read data
// returns LATENCY cycles after acceptance, in order. Memory is sparse (an
// associative array); an unwritten line reads as a pattern derived from its
// address (init_line) so testbenches can predict it. ready is always high.
// Requests are ignored while rst_n is low, so values a design drives before
// its reset takes effect never reach the memory. Counts reads and writes for
// traffic checks. Not synthesizable by intent.
module dram_model
  import cello_pkg::*;
#(
  parameter int unsigned LATENCY = 4
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  req_valid,
  output logic  req_ready,
  input  logic  req_write,
  input  addr_t req_addr,
  input  line_t req_wdata,
  output logic  rsp_valid,
  output line_t rsp_rdata,
  output int    n_reads,
  output int    n_writes
);

  line_t mem [addr_t];
  line_t pipe_d [LATENCY];
  logic  pipe_v [LATENCY];

  function automatic line_t init_line(addr_t a);
    line_t l;
    for (int w = 0; w < LINE_WORDS; w++) l[w*WORD_W +: WORD_W] = (a * 32'd16 + 32'(w)) ^ 32'h5a5a_0000;
    return l;
  endfunction

  function automatic line_t peek(addr_t a);
    return mem.exists(a) ? mem[a] : init_line(a);
  endfunction

  assign req_ready = 1'b1;
  assign rsp_valid = pipe_v[LATENCY-1];
  assign rsp_rdata = pipe_d[LATENCY-1];

  initial begin
    n_reads = 0;
    n_writes = 0;
    for (int i = 0; i < LATENCY; i++) begin pipe_v[i] = 1'b0; pipe_d[i] = '0; end
  end

  always @(posedge clk) begin
    for (int i = LATENCY-1; i > 0; i--) begin pipe_v[i] <= pipe_v[i-1]; pipe_d[i] <= pipe_d[i-1]; end
    pipe_v[0] <= rst_n && req_valid && !req_write;
    pipe_d[0] <= peek(req_addr);
    if (rst_n && req_valid && req_write) begin mem[req_addr] = req_wdata; n_writes <= n_writes + 1; end
    if (rst_n && req_valid && !req_write) n_reads <= n_reads + 1;
  end

endmodule
