// input_buffer: explicitly managed scratchpad for input tensors.
//
// The scheduler issues a load command {dram_base, local_base, count}; the
// buffer then reads count lines from DRAM, one request per accepted handshake,
// and stores each returned line at local_base, local_base+1, ... in order.
// load_busy stays high until the last line is stored. The datapath reads any
// local line with rd_en/rd_addr and gets it on rd_data one cycle later; reads
// and DMA fills may run in the same cycle (separate read and write ports).
// Placement is entirely explicit: nothing here decides what is kept. The
// function follows the design description; the capacity (2048 lines, 128 KB),
// the DMA command format and in-order DRAM responses are this design's choices.
module input_buffer
  import cello_pkg::*;
#(
  parameter int unsigned DEPTH = 2048,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          rst_n,
  // DMA command
  input  logic          load_valid,
  output logic          load_ready,
  input  addr_t         load_dram_base,
  input  logic [AW-1:0] load_local_base,
  input  logic [AW:0]   load_count,
  output logic          load_busy,
  // DRAM read port (responses in request order)
  output logic          dram_req_valid,
  input  logic          dram_req_ready,
  output addr_t         dram_req_addr,
  input  logic          dram_rsp_valid,
  input  line_t         dram_rsp_rdata,
  // datapath read port
  input  logic          rd_en,
  input  logic [AW-1:0] rd_addr,
  output line_t         rd_data
);

  line_t mem [DEPTH];

  addr_t         req_addr_q;
  logic [AW:0]   req_left, rsp_left;
  logic [AW-1:0] wr_ptr;

  assign load_busy      = (rsp_left != '0);
  assign load_ready     = !load_busy;
  assign dram_req_valid = (req_left != '0);
  assign dram_req_addr  = req_addr_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      req_addr_q <= '0;
      req_left   <= '0;
      rsp_left   <= '0;
      wr_ptr     <= '0;
    end else if (load_valid && load_ready) begin
      req_addr_q <= load_dram_base;
      req_left   <= load_count;
      rsp_left   <= load_count;
      wr_ptr     <= load_local_base;
    end else begin
      if (dram_req_valid && dram_req_ready) begin
        req_addr_q <= req_addr_q + 1'b1;
        req_left   <= req_left - 1'b1;
      end
      if (dram_rsp_valid && load_busy) begin
        rsp_left <= rsp_left - 1'b1;
        wr_ptr   <= wr_ptr + 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (dram_rsp_valid && load_busy) mem[wr_ptr] <= dram_rsp_rdata;
    if (rd_en) rd_data <= mem[rd_addr];
  end

  a_no_stray_rsp: assert property (@(posedge clk) disable iff (!rst_n) dram_rsp_valid |-> load_busy)
    else $error("input_buffer: DRAM response without an outstanding load");

endmodule
