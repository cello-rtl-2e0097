// cello_pkg: types and constants shared by the CELLO accelerator.
//
// A word is 32 bits (the evaluated CG and GNN workloads use 4-byte elements).
// Every buffer moves whole lines of LINE_WORDS words; one line holds one row
// of a skewed M x N tensor when N <= 16. Global addresses count lines.
// The CHORD index-table entry (riff_entry_t) carries exactly the metadata the
// design names: tensor id, three addresses (tensor start, tensor end, end of
// the slice held on chip), two local indices, reuse history, reuse frequency
// and reuse distance. It is padded to the 512-bit entry width. The line width,
// the field widths and the integer number format are this design's choices.
package cello_pkg;

  localparam int unsigned WORD_W       = 32;
  localparam int unsigned LINE_WORDS   = 16;
  localparam int unsigned LINE_W       = WORD_W * LINE_WORDS;   // 512
  localparam int unsigned ADDR_W       = 32;                    // global line address
  localparam int unsigned TID_W        = 6;                     // 64 tensors
  localparam int unsigned RIFF_ENTRIES = 64;
  localparam int unsigned ENTRY_BITS   = 512;
  localparam int unsigned IDX_W        = 17;                    // local line index, 0..65536
  localparam int unsigned CNT_W        = 16;

  typedef logic [WORD_W-1:0] word_t;
  typedef logic [LINE_W-1:0] line_t;
  typedef logic [ADDR_W-1:0] addr_t;
  typedef logic [TID_W-1:0]  tid_t;
  typedef logic [IDX_W-1:0]  idx_t;

  // One Riff index-table entry. Slice occupancy:
  //   dir == 0: lines [start_idx, end_idx)        hold addresses [start_addr, end_chord_addr)
  //   dir == 1: lines (end_idx, start_idx]        hold them in descending local order
  // open: the slice may still grow as the tensor is written.
  typedef struct packed {
    logic [ENTRY_BITS-(3+TID_W+3*ADDR_W+2*IDX_W+3*CNT_W)-1:0] pad;
    logic        valid;
    logic        open;
    logic        dir;
    tid_t        tid;
    addr_t       start_addr;      // first global line of the tensor
    addr_t       end_addr;        // one past the last global line of the tensor
    addr_t       end_chord_addr;  // one past the last global line held in CHORD
    idx_t        start_idx;       // local index of start_addr
    idx_t        end_idx;         // local index one step past the slice
    logic [CNT_W-1:0] reuse_hist; // reuses seen so far
    logic [CNT_W-1:0] reuse_freq; // reuses still to come (from the scheduler)
    logic [CNT_W-1:0] reuse_dist; // operations until the next reuse (from the scheduler)
  } riff_entry_t;

  // Riff priority: more reuses to come wins; on a tie, the nearer reuse wins.
  function automatic logic [2*CNT_W-1:0] riff_prio(riff_entry_t e);
    return {e.reuse_freq, ~e.reuse_dist};
  endfunction

  // Lines of a slice held on chip.
  function automatic addr_t slice_len(riff_entry_t e);
    return e.end_chord_addr - e.start_addr;
  endfunction

  // Where the operands of an operation come from and where results go.
  typedef enum logic [1:0] {SRC_CHORD = 2'd0, SRC_INBUF = 2'd1, SRC_PIPE = 2'd2, SRC_NONE = 2'd3} src_e;
  typedef enum logic {MODE_UNCONTRACTED = 1'b0, MODE_CONTRACTED = 1'b1} mode_e;

  // Operation descriptor produced by the scheduler.
  //  MODE_UNCONTRACTED: Z[m,:] = c_sign*C[m,:] + ab_sign * sum_j A[m,j] * RF[b_slot][j,:]
  //  MODE_CONTRACTED:   RF[out_slot][n',n] = sum_m A[m,n'] * C[m,n]   (e.g. Delta = P^T S)
  typedef struct packed {
    mode_e       mode;
    logic [31:0] m_rows;      // length of the dominant rank, in lines
    logic [4:0]  k_len;       // contraction length J (uncontracted) / output rows N' (contracted), 1..16
    src_e        a_src;
    tid_t        a_tid;
    addr_t       a_base;      // global line address (CHORD) or local line (input buffer)
    src_e        c_src;       // SRC_NONE: no addend
    tid_t        c_tid;
    addr_t       c_base;
    logic        c_neg;       // subtract C
    logic        ab_neg;      // subtract A*B
    logic [1:0]  b_slot;      // RF slot of the streamed small tensor
    logic [1:0]  out_slot;    // RF slot written by a contracted operation
    logic        z_to_chord;  // write Z to CHORD (sequential / delayed_writeback edge)
    tid_t        z_tid;
    addr_t       z_base;
    logic        z_to_pipe;   // push Z into the pipeline buffer (pipelineable / delayed_hold edge)
    logic [1:0]  pipe_cons;   // consumers that must read Z from the pipeline buffer
  } op_desc_t;
  // An operand with source SRC_PIPE reads pipeline-buffer consumer stream 0 (A)
  // or 1 (C, the delayed_hold stream).

endpackage
