// pipeline_buffer: explicit staging buffer for pipelined tensor tiles.
//
// A ring of DEPTH lines between a producer operation and up to NCONS consumer
// streams. cons_en (sampled while the buffer is empty) says which consumers
// must read every line: consumer 0 is the immediately following operation of a
// pipelineable edge, consumer 1 a later operation reached by a delayed_hold
// edge. A line is discarded as soon as all enabled consumers have read it, so a
// held tensor costs only the extra lines between the two read pointers.
// Producer: wr_valid/wr_ready/wr_data. Consumer c: rd_valid[c]/rd_ready[c] and
// rd_data[c], shown combinationally from the head of that consumer's stream.
// Each consumer keeps its own read pointer; the write pointer stops when the
// line it would overwrite is still owed to an enabled consumer.
// The function follows the design description; depth (2048 lines, two tiles of
// 1024 rows), two consumers and the per-consumer pointers are this design's.
module pipeline_buffer
  import cello_pkg::*;
#(
  parameter int unsigned DEPTH = 2048,
  parameter int unsigned NCONS = 2,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [NCONS-1:0] cons_en,
  input  logic             wr_valid,
  output logic             wr_ready,
  input  line_t            wr_data,
  output logic [NCONS-1:0] rd_valid,
  input  logic [NCONS-1:0] rd_ready,
  output line_t            rd_data [NCONS],
  output logic [AW:0]      occupancy
);

  line_t mem [DEPTH];

  logic [AW:0]      wptr;
  logic [AW:0]      rptr [NCONS];
  logic [NCONS-1:0] en_q;
  logic [AW:0]      oldest;   // read pointer of the furthest-behind enabled consumer

  always_comb begin
    oldest = wptr;
    for (int c = 0; c < NCONS; c++)
      if (en_q[c] && (wptr - rptr[c]) > (wptr - oldest)) oldest = rptr[c];
  end

  assign occupancy = wptr - oldest;
  assign wr_ready  = (occupancy < (AW+1)'(DEPTH)) && (en_q != '0);

  always_comb begin
    for (int c = 0; c < NCONS; c++) begin
      rd_valid[c] = en_q[c] && (rptr[c] != wptr);
      rd_data[c]  = mem[rptr[c][AW-1:0]];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr <= '0;
      en_q <= '0;
      for (int c = 0; c < NCONS; c++) rptr[c] <= '0;
    end else begin
      if (occupancy == '0 && !(wr_valid && wr_ready)) begin
        en_q <= cons_en;
        for (int c = 0; c < NCONS; c++) rptr[c] <= wptr;   // a disabled consumer skips ahead
      end
      if (wr_valid && wr_ready) wptr <= wptr + 1'b1;
      for (int c = 0; c < NCONS; c++)
        if (rd_valid[c] && rd_ready[c]) rptr[c] <= rptr[c] + 1'b1;
    end
  end

  always_ff @(posedge clk) if (wr_valid && wr_ready) mem[wptr[AW-1:0]] <= wr_data;

  a_wr_hold: assert property (@(posedge clk) disable iff (!rst_n) wr_valid && !wr_ready |=> wr_valid)
    else $error("pipeline_buffer: producer dropped wr_valid");

endmodule
