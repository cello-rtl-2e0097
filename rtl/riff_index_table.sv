// riff_index_table: per-tensor metadata of the CHORD buffer (the Riff index table).
//
// ENTRIES entries (default 64) of one 512-bit riff_entry_t each, indexed by
// tensor id. Replacing per-line tags, an entry records where the contiguous
// on-chip slice of a tensor starts and ends, both as global line addresses and
// as local SRAM indices, plus the reuse metadata the scheduler provides.
//
// Write ports (all take effect at the clock edge, cfg has priority):
//   cfg_*  : the scheduler writes a whole entry before an operation runs.
//   upd_*  : the CHORD controller rewrites the entry of the tensor it serves.
//   upd2_* : the CHORD controller rewrites the entry of a Riff victim.
// Combinational outputs, valid in the same cycle:
//   lk_entry          entry of tensor lk_id (hit test and index arithmetic).
//   mon_entry         entry of tensor mon_id (status read-back).
//   free_ptr          first local line above every upward-growing slice and
//   ceil_ptr          lowest line of every downward-growing slice (DEPTH if
//                     none): [free_ptr, ceil_ptr) is the empty space, found by
//                     "checking all end indices of existing tensors".
//   vic_found/vic_id/vic_entry  resident tensor other than lk_id with the lowest Riff
//                     priority, if that priority is below lk_id's.
//   nb_found/nb_id/nb_entry     resident tensor (other than lk_id) whose tail line is
//                     nb_slot and whose priority is below lk_id's: the tensor
//                     a growing Riff slice pushes out next.
// Priority (cello_pkg::riff_prio): remaining reuse frequency, then nearer reuse.
// That ordering, and the free-space rule, are this design's reading of the
// policy; the table size and entry width follow the evaluated configuration.
module riff_index_table
  import cello_pkg::*;
#(
  parameter int unsigned ENTRIES = 64,
  parameter int unsigned DEPTH   = 65536
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cfg_we,
  input  tid_t        cfg_id,
  input  riff_entry_t cfg_entry,
  input  logic        upd_we,
  input  tid_t        upd_id,
  input  riff_entry_t upd_entry,
  input  logic        upd2_we,
  input  tid_t        upd2_id,
  input  riff_entry_t upd2_entry,
  input  tid_t        lk_id,
  output riff_entry_t lk_entry,
  input  tid_t        mon_id,
  output riff_entry_t mon_entry,
  output idx_t        free_ptr,
  output idx_t        ceil_ptr,
  output logic        vic_found,
  output tid_t        vic_id,
  output riff_entry_t vic_entry,
  input  idx_t        nb_slot,
  output logic        nb_found,
  output tid_t        nb_id,
  output riff_entry_t nb_entry
);

  riff_entry_t tbl [ENTRIES];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ENTRIES; i++) tbl[i] <= '0;
    end else begin
      if (upd2_we) tbl[upd2_id[$clog2(ENTRIES)-1:0]] <= upd2_entry;
      if (upd_we)  tbl[upd_id[$clog2(ENTRIES)-1:0]]  <= upd_entry;
      if (cfg_we)  tbl[cfg_id[$clog2(ENTRIES)-1:0]]  <= cfg_entry;
    end
  end

  assign lk_entry  = tbl[lk_id[$clog2(ENTRIES)-1:0]];
  assign mon_entry = tbl[mon_id[$clog2(ENTRIES)-1:0]];

  // Bounds of the empty space.
  always_comb begin
    free_ptr = '0;
    ceil_ptr = idx_t'(DEPTH);
    for (int i = 0; i < ENTRIES; i++) begin
      if (tbl[i].valid && slice_len(tbl[i]) != '0) begin
        if (!tbl[i].dir && tbl[i].end_idx > free_ptr)          free_ptr = tbl[i].end_idx;
        if (tbl[i].dir && (tbl[i].end_idx + 1'b1) < ceil_ptr)  ceil_ptr = tbl[i].end_idx + 1'b1;
      end
    end
  end

  // Lowest-priority resident tensor, and the tensor whose tail is nb_slot.
  logic [2*CNT_W-1:0] best_prio, own_prio;
  always_comb begin
    own_prio  = riff_prio(lk_entry);
    vic_found = 1'b0;
    vic_id    = '0;
    best_prio = '1;
    nb_found  = 1'b0;
    nb_id     = '0;
    for (int i = 0; i < ENTRIES; i++) begin
      if (tbl[i].valid && slice_len(tbl[i]) != '0 && tid_t'(i) != lk_id) begin
        if (!vic_found || riff_prio(tbl[i]) < best_prio) begin
          if (riff_prio(tbl[i]) < own_prio) begin
            vic_found = 1'b1;
            vic_id    = tid_t'(i);
            best_prio = riff_prio(tbl[i]);
          end
        end
        if (riff_prio(tbl[i]) < own_prio &&
            ((!tbl[i].dir && tbl[i].end_idx - 1'b1 == nb_slot) ||
             ( tbl[i].dir && tbl[i].end_idx + 1'b1 == nb_slot))) begin
          nb_found = 1'b1;
          nb_id    = tid_t'(i);
        end
      end
    end
  end

  assign vic_entry = tbl[vic_id[$clog2(ENTRIES)-1:0]];
  assign nb_entry  = tbl[nb_id[$clog2(ENTRIES)-1:0]];

  // DEPTH documents the index range; the slice bounds never exceed it.
  initial assert (DEPTH < (1 << IDX_W)) else $error("DEPTH too large for idx_t");

endmodule
