// cello_top: one CELLO accelerator node.
//
// Memory hierarchy around a 16384-MAC PE array (1024 rows x 16 columns):
//   input buffer    explicit scratchpad, DMA-filled from DRAM with input tensors
//   pipeline buffer explicit ring passing tiles between pipelined operations,
//                   holding them longer for a delayed_hold consumer
//   register file   the small N x N tensors, streamed to the PE array
//   CHORD           4 MB hybrid buffer for tensors that must be written back
//                   (sequential and delayed_writeback edges): Prelude keeps the
//                   head of a tensor and spills the rest, Riff replaces the
//                   tail of a tensor with fewer future reuses.
// The host (running the scheduler) programs the CHORD index table (cfg_tbl_*),
// writes small tensors into the RF (cfg_rf_*, e.g. inverted Delta), starts
// input-buffer loads (ib_load_*) and issues one operation descriptor at a time
// (op_start/op_desc, op_busy, op_done). Host writes must happen while no
// operation runs. Two DRAM ports leave the chip: CHORD's read/write port for
// spills, evictions and misses, and the input buffer's read port.
// ev_* pulse once per CHORD request outcome (hit, miss, Prelude placement,
// Riff eviction, Prelude spill).
// Structure and sizes follow the evaluated configuration (4 MB, 64-entry
// 512-bit index table, 16384 MACs); buffer depths of the input and pipeline
// buffers and the host interface are this design's choices.
module cello_top
  import cello_pkg::*;
#(
  parameter int unsigned CHORD_DEPTH = 65536,
  parameter int unsigned ENTRIES     = 64,
  parameter int unsigned ROWS        = 1024,
  parameter int unsigned IB_DEPTH    = 2048,
  parameter int unsigned PB_DEPTH    = 2048,
  localparam int unsigned IB_AW      = $clog2(IB_DEPTH)
) (
  input  logic             clk,
  input  logic             rst_n,
  // CHORD index table
  input  logic             cfg_tbl_we,
  input  tid_t             cfg_tbl_id,
  input  riff_entry_t      cfg_tbl_entry,
  input  tid_t             mon_tid,
  output riff_entry_t      mon_entry,
  // register file
  input  logic             cfg_rf_we,
  input  logic [1:0]       cfg_rf_slot,
  input  logic [3:0]       cfg_rf_row,
  input  line_t            cfg_rf_data,
  input  logic [1:0]       mon_rf_slot,
  input  logic [3:0]       mon_rf_row,
  output line_t            mon_rf_data,
  // input-buffer DMA
  input  logic             ib_load_valid,
  output logic             ib_load_ready,
  input  addr_t            ib_load_dram_base,
  input  logic [IB_AW-1:0] ib_load_local_base,
  input  logic [IB_AW:0]   ib_load_count,
  output logic             ib_load_busy,
  // operations
  input  logic             op_start,
  input  op_desc_t         op_desc,
  output logic             op_busy,
  output logic             op_done,
  // DRAM port of CHORD
  output logic             ch_dram_req_valid,
  input  logic             ch_dram_req_ready,
  output logic             ch_dram_req_write,
  output addr_t            ch_dram_req_addr,
  output line_t            ch_dram_req_wdata,
  input  logic             ch_dram_rsp_valid,
  input  line_t            ch_dram_rsp_rdata,
  // DRAM port of the input buffer
  output logic             ib_dram_req_valid,
  input  logic             ib_dram_req_ready,
  output addr_t            ib_dram_req_addr,
  input  logic             ib_dram_rsp_valid,
  input  line_t            ib_dram_rsp_rdata,
  // events
  output logic             ev_hit,
  output logic             ev_miss,
  output logic             ev_place,
  output logic             ev_evict,
  output logic             ev_spill,
  output logic [$clog2(PB_DEPTH):0] pb_occupancy
);

  localparam int unsigned RW = $clog2(ROWS);

  // sequencer <-> CHORD
  logic  ch_req_valid, ch_req_ready, ch_req_write, ch_rsp_valid, ch_rsp_hit;
  tid_t  ch_req_tid;
  addr_t ch_req_addr;
  line_t ch_req_wdata, ch_rsp_rdata;
  // sequencer <-> input buffer
  logic             ib_rd_en;
  logic [IB_AW-1:0] ib_rd_addr;
  line_t            ib_rd_data;
  // sequencer <-> pipeline buffer
  logic [1:0] pb_cons_en, pb_rd_valid, pb_rd_ready;
  logic       pb_wr_valid, pb_wr_ready;
  line_t      pb_wr_data;
  line_t      pb_rd_data [2];
  // sequencer <-> PE array
  mode_e         pe_mode;
  logic          pe_ld_en, pe_ld_sel, pe_acc_init, pe_init_use_b, pe_init_neg, pe_sacc_clr, pe_step_en, pe_step_neg;
  logic [RW-1:0] pe_ld_row, pe_out_row;
  logic [RW:0]   pe_n_valid;
  logic [3:0]    pe_step_k, pe_out_k;
  line_t         pe_ld_data, pe_out_data, pe_red_data;
  // sequencer <-> RF
  logic [1:0] rf_rd_slot, seq_rf_wr_slot;
  logic [3:0] rf_rd_row, seq_rf_wr_row;
  logic       seq_rf_wr_en;
  line_t      rf_rd_data, seq_rf_wr_data;

  op_sequencer #(.ROWS(ROWS), .IB_AW(IB_AW)) u_seq (
    .clk, .rst_n,
    .start(op_start), .desc(op_desc), .busy(op_busy), .done(op_done),
    .ch_req_valid, .ch_req_ready, .ch_req_write, .ch_req_tid, .ch_req_addr, .ch_req_wdata,
    .ch_rsp_valid, .ch_rsp_rdata,
    .ib_rd_en, .ib_rd_addr, .ib_rd_data,
    .pb_cons_en, .pb_wr_valid, .pb_wr_ready, .pb_wr_data, .pb_rd_valid, .pb_rd_ready, .pb_rd_data,
    .pe_mode, .pe_ld_en, .pe_ld_row, .pe_ld_sel, .pe_ld_data, .pe_acc_init, .pe_init_use_b,
    .pe_init_neg, .pe_sacc_clr, .pe_step_en, .pe_step_k, .pe_step_neg, .pe_n_valid,
    .pe_out_row, .pe_out_data, .pe_out_k, .pe_red_data,
    .rf_rd_slot, .rf_rd_row,
    .rf_wr_en(seq_rf_wr_en), .rf_wr_slot(seq_rf_wr_slot), .rf_wr_row(seq_rf_wr_row), .rf_wr_data(seq_rf_wr_data)
  );

  chord #(.DEPTH(CHORD_DEPTH), .ENTRIES(ENTRIES)) u_chord (
    .clk, .rst_n,
    .cfg_we(cfg_tbl_we), .cfg_id(cfg_tbl_id), .cfg_entry(cfg_tbl_entry),
    .mon_id(mon_tid), .mon_entry,
    .req_valid(ch_req_valid), .req_ready(ch_req_ready), .req_write(ch_req_write),
    .req_tid(ch_req_tid), .req_addr(ch_req_addr), .req_wdata(ch_req_wdata),
    .rsp_valid(ch_rsp_valid), .rsp_rdata(ch_rsp_rdata), .rsp_hit(ch_rsp_hit),
    .dram_req_valid(ch_dram_req_valid), .dram_req_ready(ch_dram_req_ready),
    .dram_req_write(ch_dram_req_write), .dram_req_addr(ch_dram_req_addr),
    .dram_req_wdata(ch_dram_req_wdata), .dram_rsp_valid(ch_dram_rsp_valid),
    .dram_rsp_rdata(ch_dram_rsp_rdata),
    .ev_hit, .ev_miss, .ev_place, .ev_evict, .ev_spill
  );

  input_buffer #(.DEPTH(IB_DEPTH)) u_ib (
    .clk, .rst_n,
    .load_valid(ib_load_valid), .load_ready(ib_load_ready), .load_dram_base(ib_load_dram_base),
    .load_local_base(ib_load_local_base), .load_count(ib_load_count), .load_busy(ib_load_busy),
    .dram_req_valid(ib_dram_req_valid), .dram_req_ready(ib_dram_req_ready), .dram_req_addr(ib_dram_req_addr),
    .dram_rsp_valid(ib_dram_rsp_valid), .dram_rsp_rdata(ib_dram_rsp_rdata),
    .rd_en(ib_rd_en), .rd_addr(ib_rd_addr), .rd_data(ib_rd_data)
  );

  pipeline_buffer #(.DEPTH(PB_DEPTH), .NCONS(2)) u_pb (
    .clk, .rst_n, .cons_en(pb_cons_en),
    .wr_valid(pb_wr_valid), .wr_ready(pb_wr_ready), .wr_data(pb_wr_data),
    .rd_valid(pb_rd_valid), .rd_ready(pb_rd_ready), .rd_data(pb_rd_data),
    .occupancy(pb_occupancy)
  );

  small_tensor_rf #(.SLOTS(4), .ROWS(16)) u_rf (
    .clk, .rst_n,
    .wr_en(seq_rf_wr_en || cfg_rf_we),
    .wr_slot(seq_rf_wr_en ? seq_rf_wr_slot : cfg_rf_slot),
    .wr_row(seq_rf_wr_en ? seq_rf_wr_row : cfg_rf_row),
    .wr_data(seq_rf_wr_en ? seq_rf_wr_data : cfg_rf_data),
    .rd_slot(rf_rd_slot), .rd_row(rf_rd_row), .rd_data(rf_rd_data),
    .mon_slot(mon_rf_slot), .mon_row(mon_rf_row), .mon_data(mon_rf_data)
  );

  pe_array #(.ROWS(ROWS), .COLS(LINE_WORDS)) u_pe (
    .clk, .rst_n, .mode(pe_mode),
    .ld_en(pe_ld_en), .ld_row(pe_ld_row), .ld_sel(pe_ld_sel), .ld_data(pe_ld_data),
    .acc_init(pe_acc_init), .init_use_b(pe_init_use_b), .init_neg(pe_init_neg), .sacc_clr(pe_sacc_clr),
    .step_en(pe_step_en), .step_k(pe_step_k), .step_neg(pe_step_neg), .b_row(rf_rd_data),
    .n_valid(pe_n_valid), .out_row(pe_out_row), .out_data(pe_out_data),
    .out_k(pe_out_k), .red_data(pe_red_data)
  );

  a_host_idle: assert property (@(posedge clk) disable iff (!rst_n) (cfg_rf_we || cfg_tbl_we) |-> !op_busy)
    else $error("cello_top: host configuration while an operation runs");

endmodule
