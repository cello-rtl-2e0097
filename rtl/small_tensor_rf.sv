// small_tensor_rf: register file for the small N x N tensors of a skewed GEMM.
//
// In block CG the small operands (Lambda, Phi) and small results (Delta, Gamma)
// are at most 16 x 16 words, so they live here whole and are streamed to the
// PE array one row per cycle instead of being tiled. SLOTS tensors of ROWS rows
// (one line each) are held. One write port (wr_en/wr_slot/wr_row/wr_data, at the
// clock edge) serves both the host, which writes inverted small matrices, and
// the op sequencer, which stores results of contracted operations. Two
// combinational read ports: rd_* feeds the PE array, mon_* lets the host read
// results back. Keeping the small tensor in an explicit RF follows the design
// description; four slots is this design's choice.
module small_tensor_rf
  import cello_pkg::*;
#(
  parameter int unsigned SLOTS = 4,
  parameter int unsigned ROWS  = 16,
  localparam int unsigned SW   = $clog2(SLOTS),
  localparam int unsigned RW   = $clog2(ROWS)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          wr_en,
  input  logic [SW-1:0] wr_slot,
  input  logic [RW-1:0] wr_row,
  input  line_t         wr_data,
  input  logic [SW-1:0] rd_slot,
  input  logic [RW-1:0] rd_row,
  output line_t         rd_data,
  input  logic [SW-1:0] mon_slot,
  input  logic [RW-1:0] mon_row,
  output line_t         mon_data
);

  line_t rf [SLOTS][ROWS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < SLOTS; s++)
        for (int r = 0; r < ROWS; r++) rf[s][r] <= '0;
    end else if (wr_en) begin
      rf[wr_slot][wr_row] <= wr_data;
    end
  end

  assign rd_data  = rf[rd_slot][rd_row];
  assign mon_data = rf[mon_slot][mon_row];

endmodule
