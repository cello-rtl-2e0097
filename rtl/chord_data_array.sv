// chord_data_array: the data SRAM of the CHORD buffer.
//
// DEPTH lines of LINE_W bits (default 65536 x 512 bit = 4 MB, the evaluated
// CHORD capacity). Single port: when en is high, a write (we=1) stores wdata
// at addr; a read (we=0) returns the line at addr on rdata in the next cycle.
// There is no tag array: CHORD finds a line by index arithmetic on the
// per-tensor metadata, so this is a plain array. A foundry SRAM macro would
// take its place in silicon; the single port and one-cycle latency are this
// design's choices.
module chord_data_array #(
  parameter int unsigned DEPTH  = 65536,
  parameter int unsigned LINE_W = 512,
  localparam int unsigned AW    = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              en,
  input  logic              we,
  input  logic [AW-1:0]     addr,
  input  logic [LINE_W-1:0] wdata,
  output logic [LINE_W-1:0] rdata
);

  logic [LINE_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
  end

endmodule
