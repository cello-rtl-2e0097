// chord: the CHORD hybrid implicit/explicit tensor buffer.
//
// The scheduler explicitly describes each tensor once (riff_index_table entry:
// global address range, reuse frequency and distance); the hardware then places
// and replaces data implicitly, one line at a time, at tensor granularity.
//
// Requests (one at a time, valid/ready): {write, tensor id, global line address,
// data}. Reads answer with rsp_valid one or more cycles later; rsp_hit tells
// whether the line came from the SRAM or from DRAM. Writes give no response.
//
// Hit test without tags: an address hits when it lies in
// [start_addr, end_chord_addr) of its tensor; its SRAM line is
// start_idx +/- (addr - start_addr), the sign given by the slice direction.
//
// Written lines that miss, in order of the tensor (addr == end_chord_addr) and
// while the slice is open, are placed by two policies. The empty space is
// [free_ptr, ceil_ptr): upward slices grow into it from below, downward ones
// from above.
//   Prelude - a new tensor that fits the empty space, or that has no
//             lower-priority tensor to push out, fills it upwards in queue
//             order. When no line is left, that line and every later line of
//             the tensor go to DRAM, so the head of the tensor stays on chip.
//   Riff    - a new tensor that does not fit, while the tensor just below the
//             empty space has lower priority, fills the empty space from the
//             top downwards and then keeps going into that tensor's tail: the
//             tail line is read, written back to DRAM and overwritten, one
//             line per written line, and the victim shrinks by one line. With
//             no empty space and no such neighbour the lowest-priority
//             resident tensor is the victim; the new slice always grows in
//             the direction opposite to its victim's.
// Reads of a tensor's first line count one reuse (history +1, frequency -1).
//
// Latency: read hit 2 cycles after acceptance, write hit or placement 1 cycle,
// Riff replacement 3 cycles plus the DRAM write handshake; DRAM accesses add
// the DRAM port's handshake and read latency. Index-table programming (cfg_*)
// must happen while no request is in flight.
// The algorithm follows the description of Prelude and Riff; the slice layout,
// the reuse-count update and the single outstanding request are this design's.
module chord
  import cello_pkg::*;
#(
  parameter int unsigned DEPTH   = 65536,
  parameter int unsigned ENTRIES = 64,
  localparam int unsigned AW     = $clog2(DEPTH)
) (
  input  logic        clk,
  input  logic        rst_n,
  // scheduler programming of the index table
  input  logic        cfg_we,
  input  tid_t        cfg_id,
  input  riff_entry_t cfg_entry,
  input  tid_t        mon_id,       // entry shown on mon_entry (status readback)
  output riff_entry_t mon_entry,
  // datapath requests
  input  logic        req_valid,
  output logic        req_ready,
  input  logic        req_write,
  input  tid_t        req_tid,
  input  addr_t       req_addr,
  input  line_t       req_wdata,
  output logic        rsp_valid,
  output line_t       rsp_rdata,
  output logic        rsp_hit,
  // DRAM port
  output logic        dram_req_valid,
  input  logic        dram_req_ready,
  output logic        dram_req_write,
  output addr_t       dram_req_addr,
  output line_t       dram_req_wdata,
  input  logic        dram_rsp_valid,
  input  line_t       dram_rsp_rdata,
  // event pulses, one per request outcome
  output logic        ev_hit,
  output logic        ev_miss,
  output logic        ev_place,
  output logic        ev_evict,
  output logic        ev_spill
);

  typedef enum logic [2:0] {S_IDLE, S_DECIDE, S_RD_WAIT, S_EV_WAIT, S_EV_WB, S_DRAM_REQ, S_DRAM_RSP} state_e;
  state_e state;

  logic  r_write;
  tid_t  r_tid;
  addr_t r_addr;
  line_t r_wdata;
  idx_t  r_slot;      // SRAM line of a pending Riff replacement
  addr_t r_ev_addr;   // global address of the line being pushed out

  riff_entry_t e, v, nb, upd_entry, upd2_entry;
  idx_t        free_ptr, ceil_ptr, nb_slot, free_lines;
  logic        vic_found, nb_found, upd_we, upd2_we;
  tid_t        vic_id, nb_id, upd2_id;

  riff_index_table #(.ENTRIES(ENTRIES), .DEPTH(DEPTH)) u_tbl (
    .clk, .rst_n,
    .cfg_we, .cfg_id, .cfg_entry,
    .upd_we, .upd_id(r_tid), .upd_entry,
    .upd2_we, .upd2_id, .upd2_entry,
    .lk_id(r_tid), .lk_entry(e), .mon_id, .mon_entry,
    .free_ptr, .ceil_ptr,
    .vic_found, .vic_id, .vic_entry(v),
    .nb_slot, .nb_found, .nb_id, .nb_entry(nb)
  );

  logic              sram_en, sram_we;
  logic [AW-1:0]     sram_addr;
  line_t             sram_wdata, sram_rdata;

  chord_data_array #(.DEPTH(DEPTH), .LINE_W(LINE_W)) u_sram (
    .clk, .en(sram_en), .we(sram_we), .addr(sram_addr), .wdata(sram_wdata), .rdata(sram_rdata)
  );

  // ---------------------------------------------------------------- decision
  addr_t off;
  idx_t  hit_idx, tail_of_v, tail_of_nb;
  logic  is_hit, in_order, is_empty, fits, next_free;
  addr_t t_len;

  // Tensor whose tail a slice would push out: for a new slice the tensor just
  // below the empty space, for a growing slice the one at its next line.
  assign nb_slot    = is_empty ? free_ptr - 1'b1 : e.end_idx;
  assign free_lines = (ceil_ptr > free_ptr) ? ceil_ptr - free_ptr : '0;

  always_comb begin
    off        = r_addr - e.start_addr;
    is_hit     = e.valid && (r_addr >= e.start_addr) && (r_addr < e.end_chord_addr);
    hit_idx    = e.dir ? (e.start_idx - idx_t'(off)) : (e.start_idx + idx_t'(off));
    in_order   = e.valid && e.open && (r_addr == e.end_chord_addr) && (r_addr < e.end_addr);
    is_empty   = (slice_len(e) == '0);
    t_len      = e.end_addr - e.start_addr;
    fits       = (t_len <= addr_t'(free_lines));
    next_free  = (e.end_idx >= free_ptr) && (e.end_idx < ceil_ptr);
    tail_of_v  = v.dir  ? v.end_idx  + 1'b1 : v.end_idx  - 1'b1;
    tail_of_nb = nb.dir ? nb.end_idx + 1'b1 : nb.end_idx - 1'b1;
  end

  typedef enum logic [3:0] {A_RD_HIT, A_RD_MISS, A_WR_HIT, A_PLACE, A_PLACE_DOWN, A_RIFF_NEW, A_RIFF_GROW,
                            A_SPILL, A_WR_MISS} act_e;
  act_e act;
  idx_t r_slot_n;   // slot taken by a Riff replacement decided this cycle
  assign r_slot_n = (act == A_RIFF_NEW) ? tail_of_v : tail_of_nb;

  always_comb begin
    if (!r_write) act = is_hit ? A_RD_HIT : A_RD_MISS;
    else if (is_hit) act = A_WR_HIT;
    else if (in_order && is_empty) begin
      if (free_lines != '0 && fits)            act = A_PLACE;       // whole tensor fits: fill upwards
      else if (nb_found && free_lines != '0)   act = A_PLACE_DOWN;  // fill downwards, then push out nb's tail
      else if (nb_found)                       act = A_RIFF_GROW;   // push out the tail below the empty space
      else if (free_lines != '0)               act = A_PLACE;       // Prelude: keep the head, spill the rest
      else if (vic_found)                      act = A_RIFF_NEW;    // push out the lowest-priority tail
      else                                     act = A_SPILL;
    end else if (in_order) begin
      if (next_free)     act = e.dir ? A_PLACE_DOWN : A_PLACE;
      else if (nb_found) act = A_RIFF_GROW;
      else               act = A_SPILL;
    end else act = A_WR_MISS;
  end

  // metadata updates made in S_DECIDE
  always_comb begin
    upd_we     = 1'b0;
    upd_entry  = e;
    upd2_we    = 1'b0;
    upd2_id    = vic_id;
    upd2_entry = v;
    if (state == S_DECIDE) begin
      unique case (act)
        A_RD_HIT, A_RD_MISS: if (e.valid && r_addr == e.start_addr) begin
          upd_we               = 1'b1;
          upd_entry.reuse_hist = e.reuse_hist + 1'b1;
          upd_entry.reuse_freq = (e.reuse_freq != '0) ? e.reuse_freq - 1'b1 : '0;
        end
        A_PLACE: begin
          upd_we                   = 1'b1;
          upd_entry.dir            = 1'b0;
          upd_entry.start_idx      = is_empty ? free_ptr : e.start_idx;
          upd_entry.end_idx        = (is_empty ? free_ptr : e.end_idx) + 1'b1;
          upd_entry.end_chord_addr = e.end_chord_addr + 1'b1;
        end
        A_PLACE_DOWN: begin
          upd_we                   = 1'b1;
          upd_entry.dir            = 1'b1;
          upd_entry.start_idx      = is_empty ? ceil_ptr - 1'b1 : e.start_idx;
          upd_entry.end_idx        = (is_empty ? ceil_ptr - 1'b1 : e.end_idx) - 1'b1;
          upd_entry.end_chord_addr = e.end_chord_addr + 1'b1;
        end
        A_RIFF_NEW, A_RIFF_GROW: begin
          upd_we                   = 1'b1;
          upd_entry.dir            = is_empty ? ((act == A_RIFF_NEW) ? ~v.dir : ~nb.dir) : e.dir;
          upd_entry.start_idx      = is_empty ? r_slot_n : e.start_idx;
          upd_entry.end_idx        = upd_entry.dir ? r_slot_n - 1'b1 : r_slot_n + 1'b1;
          upd_entry.end_chord_addr = e.end_chord_addr + 1'b1;
          upd2_we                  = 1'b1;
          upd2_id                  = (act == A_RIFF_NEW) ? vic_id : nb_id;
          upd2_entry               = (act == A_RIFF_NEW) ? v : nb;
          upd2_entry.open          = 1'b0;
          upd2_entry.end_chord_addr = upd2_entry.end_chord_addr - 1'b1;
          upd2_entry.end_idx       = upd2_entry.dir ? upd2_entry.end_idx + 1'b1 : upd2_entry.end_idx - 1'b1;
        end
        A_SPILL: begin
          upd_we         = 1'b1;
          upd_entry.open = 1'b0;
        end
        default: ;
      endcase
    end
  end

  // ------------------------------------------------------------------ FSM
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      r_write   <= 1'b0;
      r_tid     <= '0;
      r_addr    <= '0;
      r_wdata   <= '0;
      r_slot    <= '0;
      r_ev_addr <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (req_valid) begin
          r_write <= req_write;
          r_tid   <= req_tid;
          r_addr  <= req_addr;
          r_wdata <= req_wdata;
          state   <= S_DECIDE;
        end
        S_DECIDE: begin
          unique case (act)
            A_RD_HIT:                 state <= S_RD_WAIT;
            A_WR_HIT, A_PLACE, A_PLACE_DOWN: state <= S_IDLE;
            A_RIFF_NEW, A_RIFF_GROW: begin
              r_slot    <= r_slot_n;
              r_ev_addr <= ((act == A_RIFF_NEW) ? v.end_chord_addr : nb.end_chord_addr) - 1'b1;
              state     <= S_EV_WAIT;
            end
            default:                  state <= S_DRAM_REQ;   // read miss, spill, write miss
          endcase
        end
        S_RD_WAIT:  state <= S_IDLE;
        S_EV_WAIT:  state <= S_EV_WB;
        S_EV_WB:    if (dram_req_ready) state <= S_IDLE;
        S_DRAM_REQ: if (dram_req_ready) state <= r_write ? S_IDLE : S_DRAM_RSP;
        S_DRAM_RSP: if (dram_rsp_valid) state <= S_IDLE;
        default:    state <= S_IDLE;
      endcase
    end
  end

  // SRAM port
  always_comb begin
    sram_en    = 1'b0;
    sram_we    = 1'b0;
    sram_addr  = hit_idx[AW-1:0];
    sram_wdata = r_wdata;
    if (state == S_DECIDE) begin
      unique case (act)
        A_RD_HIT: begin sram_en = 1'b1; sram_addr = hit_idx[AW-1:0]; end
        A_WR_HIT: begin sram_en = 1'b1; sram_we = 1'b1; sram_addr = hit_idx[AW-1:0]; end
        A_PLACE:  begin sram_en = 1'b1; sram_we = 1'b1;
                        sram_addr = is_empty ? free_ptr[AW-1:0] : e.end_idx[AW-1:0]; end
        A_PLACE_DOWN: begin sram_en = 1'b1; sram_we = 1'b1;
                        sram_addr = is_empty ? ceil_ptr[AW-1:0] - 1'b1 : e.end_idx[AW-1:0]; end
        A_RIFF_NEW, A_RIFF_GROW: begin sram_en = 1'b1; sram_addr = r_slot_n[AW-1:0]; end
        default: ;
      endcase
    end else if (state == S_EV_WB && dram_req_ready) begin
      sram_en   = 1'b1;
      sram_we   = 1'b1;
      sram_addr = r_slot[AW-1:0];
    end
  end

  // DRAM port: push-out of a victim line, or the request itself
  always_comb begin
    dram_req_valid = (state == S_EV_WB) || (state == S_DRAM_REQ);
    dram_req_write = (state == S_EV_WB) ? 1'b1 : r_write;
    dram_req_addr  = (state == S_EV_WB) ? r_ev_addr : r_addr;
    dram_req_wdata = (state == S_EV_WB) ? sram_rdata : r_wdata;
  end

  assign req_ready = (state == S_IDLE);
  assign rsp_valid = (state == S_RD_WAIT) || (state == S_DRAM_RSP && dram_rsp_valid);
  assign rsp_rdata = (state == S_RD_WAIT) ? sram_rdata : dram_rsp_rdata;
  assign rsp_hit   = (state == S_RD_WAIT);

  assign ev_hit   = (state == S_DECIDE) && (act == A_RD_HIT || act == A_WR_HIT);
  assign ev_miss  = (state == S_DECIDE) && (act == A_RD_MISS || act == A_WR_MISS);
  assign ev_place = (state == S_DECIDE) && (act == A_PLACE || act == A_PLACE_DOWN);
  assign ev_evict = (state == S_DECIDE) && (act == A_RIFF_NEW || act == A_RIFF_GROW);
  assign ev_spill = (state == S_DECIDE) && (act == A_SPILL);

  // Handshake rules
  a_cfg_idle: assert property (@(posedge clk) disable iff (!rst_n) cfg_we |-> state == S_IDLE)
    else $error("chord: index table programmed while a request is in flight");
  a_req_hold: assert property (@(posedge clk) disable iff (!rst_n)
                               dram_req_valid && !dram_req_ready |=> dram_req_valid && $stable(dram_req_addr))
    else $error("chord: DRAM request dropped before acceptance");

endmodule
