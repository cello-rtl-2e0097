// op_sequencer: runs one tensor operation of a scheduled DAG on the PE array.
//
// A descriptor (cello_pkg::op_desc_t) is taken with start and held until done.
// The dominant rank (m_rows lines) is cut into tiles of ROWS lines. Per tile:
//   1. load A lines (and C lines, if c_src != SRC_NONE) into the stationary
//      a_line / b_line registers of the PE rows, one line per fetch, from
//      CHORD (request/response), the input buffer (one-cycle read) or the
//      pipeline buffer (stream 0 for A, stream 1 for C);
//   2. uncontracted mode: initialise the accumulators with +-C (or 0) and run
//      k_len steps, streaming row k of the small tensor from RF slot b_slot;
//      contracted mode: run k_len steps of the row-reduction into the small
//      accumulator;
//   3. uncontracted mode: write each Z line to CHORD (z_to_chord, tensor
//      z_tid at z_base) and/or push it into the pipeline buffer (z_to_pipe).
// After the last tile of a contracted operation the k_len x 16 result is
// written into RF slot out_slot. done pulses for one cycle at the end.
// This realises the schedule rule of the design (dominant rank outermost,
// large tensor stationary, small tensor streamed from the RF; pipelineable and
// delayed_hold outputs to the pipeline buffer, the rest to CHORD). The
// descriptor format and the strictly sequential load / compute / write-back
// phases are this design's choices.
module op_sequencer
  import cello_pkg::*;
#(
  parameter int unsigned ROWS  = 1024,
  parameter int unsigned IB_AW = 11,
  localparam int unsigned RW   = $clog2(ROWS)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  op_desc_t      desc,
  output logic          busy,
  output logic          done,
  // CHORD
  output logic          ch_req_valid,
  input  logic          ch_req_ready,
  output logic          ch_req_write,
  output tid_t          ch_req_tid,
  output addr_t         ch_req_addr,
  output line_t         ch_req_wdata,
  input  logic          ch_rsp_valid,
  input  line_t         ch_rsp_rdata,
  // input buffer
  output logic          ib_rd_en,
  output logic [IB_AW-1:0] ib_rd_addr,
  input  line_t         ib_rd_data,
  // pipeline buffer
  output logic [1:0]    pb_cons_en,
  output logic          pb_wr_valid,
  input  logic          pb_wr_ready,
  output line_t         pb_wr_data,
  input  logic [1:0]    pb_rd_valid,
  output logic [1:0]    pb_rd_ready,
  input  line_t         pb_rd_data [2],
  // PE array
  output mode_e         pe_mode,
  output logic          pe_ld_en,
  output logic [RW-1:0] pe_ld_row,
  output logic          pe_ld_sel,
  output line_t         pe_ld_data,
  output logic          pe_acc_init,
  output logic          pe_init_use_b,
  output logic          pe_init_neg,
  output logic          pe_sacc_clr,
  output logic          pe_step_en,
  output logic [3:0]    pe_step_k,
  output logic          pe_step_neg,
  output logic [RW:0]   pe_n_valid,
  output logic [RW-1:0] pe_out_row,
  input  line_t         pe_out_data,
  output logic [3:0]    pe_out_k,
  input  line_t         pe_red_data,
  // register file
  output logic [1:0]    rf_rd_slot,
  output logic [3:0]    rf_rd_row,
  output logic          rf_wr_en,
  output logic [1:0]    rf_wr_slot,
  output logic [3:0]    rf_wr_row,
  output line_t         rf_wr_data
);

  typedef enum logic [3:0] {
    S_IDLE, S_TILE, S_FETCH, S_FWAIT, S_INIT, S_STEP, S_WR_CHORD, S_WR_PIPE, S_NEXT_TILE, S_RF_OUT, S_DONE
  } state_e;

  state_e      st;
  op_desc_t    d;
  logic [31:0] tile_base, rows;
  logic [RW:0] r;          // row within tile
  logic [4:0]  k;
  logic        ld_c;       // 0: loading A lines, 1: loading C lines

  src_e  cur_src;
  addr_t cur_addr;
  tid_t  cur_tid;
  always_comb begin
    cur_src  = ld_c ? d.c_src  : d.a_src;
    cur_addr = (ld_c ? d.c_base : d.a_base) + tile_base + 32'(r);
    cur_tid  = ld_c ? d.c_tid  : d.a_tid;
  end

  // fetched line arrives this cycle
  logic  f_got;
  line_t f_data;
  always_comb begin
    f_got  = 1'b0;
    f_data = ch_rsp_rdata;
    if (st == S_FWAIT) begin
      unique case (cur_src)
        SRC_CHORD: begin f_got = ch_rsp_valid;         f_data = ch_rsp_rdata; end
        SRC_INBUF: begin f_got = 1'b1;                 f_data = ib_rd_data; end
        SRC_PIPE:  begin f_got = pb_rd_valid[ld_c];    f_data = pb_rd_data[ld_c]; end
        default:   begin f_got = 1'b1;                 f_data = '0; end
      endcase
    end
  end

  logic [31:0] rows_left;
  assign rows_left = d.m_rows - tile_base;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st        <= S_IDLE;
      d         <= '0;
      tile_base <= '0;
      rows      <= '0;
      r         <= '0;
      k         <= '0;
      ld_c      <= 1'b0;
    end else begin
      unique case (st)
        S_IDLE: if (start) begin
          d         <= desc;
          tile_base <= '0;
          st        <= S_TILE;
        end
        S_TILE: begin
          rows <= (rows_left > 32'(ROWS)) ? 32'(ROWS) : rows_left;
          r    <= '0;
          ld_c <= 1'b0;
          st   <= S_FETCH;
        end
        S_FETCH: begin
          if (cur_src == SRC_CHORD && !ch_req_ready) st <= S_FETCH;
          else                                       st <= S_FWAIT;
        end
        S_FWAIT: if (f_got) begin
          if (32'(r) + 1 < rows) begin
            r  <= r + 1'b1;
            st <= S_FETCH;
          end else if (!ld_c && d.c_src != SRC_NONE) begin
            r    <= '0;
            ld_c <= 1'b1;
            st   <= S_FETCH;
          end else begin
            k  <= '0;
            st <= (d.mode == MODE_UNCONTRACTED) ? S_INIT : S_STEP;
          end
        end
        S_INIT: st <= S_STEP;
        S_STEP: begin
          if (k + 1'b1 < d.k_len) k <= k + 1'b1;
          else begin
            r  <= '0;
            st <= (d.mode == MODE_CONTRACTED) ? S_NEXT_TILE
                : d.z_to_chord ? S_WR_CHORD : d.z_to_pipe ? S_WR_PIPE : S_NEXT_TILE;
          end
        end
        S_WR_CHORD: if (ch_req_ready) begin
          if (d.z_to_pipe) st <= S_WR_PIPE;
          else if (32'(r) + 1 < rows) r <= r + 1'b1;
          else st <= S_NEXT_TILE;
        end
        S_WR_PIPE: if (pb_wr_ready) begin
          if (32'(r) + 1 < rows) begin
            r  <= r + 1'b1;
            st <= d.z_to_chord ? S_WR_CHORD : S_WR_PIPE;
          end else st <= S_NEXT_TILE;
        end
        S_NEXT_TILE: begin
          if (tile_base + rows < d.m_rows) begin
            tile_base <= tile_base + rows;
            st        <= S_TILE;
          end else if (d.mode == MODE_CONTRACTED) begin
            k  <= '0;
            st <= S_RF_OUT;
          end else st <= S_DONE;
        end
        S_RF_OUT: begin
          if (k + 1'b1 < d.k_len) k <= k + 1'b1;
          else st <= S_DONE;
        end
        S_DONE: st <= S_IDLE;
        default: st <= S_IDLE;
      endcase
    end
  end

  assign busy = (st != S_IDLE);
  assign done = (st == S_DONE);

  // CHORD: fetch reads and Z writes
  always_comb begin
    ch_req_valid = 1'b0;
    ch_req_write = 1'b0;
    ch_req_tid   = cur_tid;
    ch_req_addr  = cur_addr;
    ch_req_wdata = pe_out_data;
    if (st == S_FETCH && cur_src == SRC_CHORD) ch_req_valid = 1'b1;
    if (st == S_WR_CHORD) begin
      ch_req_valid = 1'b1;
      ch_req_write = 1'b1;
      ch_req_tid   = d.z_tid;
      ch_req_addr  = d.z_base + tile_base + 32'(r);
    end
  end

  assign ib_rd_en   = (st == S_FETCH) && (cur_src == SRC_INBUF);
  assign ib_rd_addr = cur_addr[IB_AW-1:0];

  assign pb_cons_en  = d.pipe_cons;
  assign pb_wr_valid = (st == S_WR_PIPE);
  assign pb_wr_data  = pe_out_data;
  always_comb begin
    pb_rd_ready = '0;
    if (st == S_FWAIT && cur_src == SRC_PIPE) pb_rd_ready[ld_c] = 1'b1;
  end

  assign pe_mode       = d.mode;
  assign pe_ld_en      = f_got;
  assign pe_ld_row     = r[RW-1:0];
  assign pe_ld_sel     = ld_c;
  assign pe_ld_data    = f_data;
  assign pe_acc_init   = (st == S_INIT);
  assign pe_init_use_b = (d.c_src != SRC_NONE);
  assign pe_init_neg   = d.c_neg;
  assign pe_sacc_clr   = (st == S_IDLE);
  assign pe_step_en    = (st == S_STEP);
  assign pe_step_k     = k[3:0];
  assign pe_step_neg   = d.ab_neg;
  assign pe_n_valid    = (RW+1)'(rows);
  assign pe_out_row    = r[RW-1:0];
  assign pe_out_k      = k[3:0];

  assign rf_rd_slot = d.b_slot;
  assign rf_rd_row  = k[3:0];
  assign rf_wr_en   = (st == S_RF_OUT);
  assign rf_wr_slot = d.out_slot;
  assign rf_wr_row  = k[3:0];
  assign rf_wr_data = pe_red_data;

  a_klen: assert property (@(posedge clk) disable iff (!rst_n) start && !busy |-> desc.k_len inside {[1:16]})
    else $error("op_sequencer: k_len out of range");

endmodule
