// mpp_pkg: types and sizes shared by the merge point predictor.
//
// A merge point prediction has three parts: the PC of the merge point, the
// merge distance (how many dynamic instructions after the branch the merge
// point is expected) and a register set (the architectural registers that the
// instructions between the branch and the merge point may write).
//
// Sizes that follow the paper: 128-entry 4-way predictor table, 128-entry
// 4-way wrong path buffer, 8-entry update list, maximum prediction distance
// of 100, 3-bit saturating counters. Sizes chosen here: 32-bit PCs and 16
// architectural registers (an x86-64 integer register file); the paper gives
// neither.
package mpp_pkg;

  localparam int unsigned PC_W     = 32;   // PC width (design choice)
  localparam int unsigned NREGS    = 16;   // architectural registers (design choice)
  localparam int unsigned REG_W    = $clog2(NREGS);
  localparam int unsigned MAX_DIST = 100;  // maximum prediction distance (paper)
  localparam int unsigned DIST_W   = $clog2(MAX_DIST + 1); // holds 0..MAX_DIST
  localparam int unsigned CTR_W    = 3;    // saturating confidence counter (paper)
  localparam logic [CTR_W-1:0] CTR_MAX  = '1;
  localparam logic [CTR_W-1:0] CTR_INIT = 3'd4; // counter of a new entry (design choice)

  typedef logic [PC_W-1:0]   pc_t;
  typedef logic [NREGS-1:0]  regset_t;
  typedef logic [REG_W-1:0]  reg_t;
  typedef logic [DIST_W-1:0] dist_t;
  typedef logic [CTR_W-1:0]  ctr_t;

  // One merge point prediction as it is installed, predicted and updated.
  // The branch PC is carried whole; the table stores only its tag part.
  typedef struct packed {
    pc_t     br_pc;    // PC of the branch the prediction belongs to
    pc_t     merge_pc; // predicted merge point
    dist_t   mdist;     // predicted merge distance
    regset_t regs;     // registers the gap instructions may write
    ctr_t    ctr;      // 3-bit saturating confidence counter
  } mp_entry_t;

  // One retired (or ROB-walked) instruction.
  typedef struct packed {
    pc_t  pc;
    logic dst_valid;   // instruction writes an architectural register
    reg_t dst;
  } inst_t;

  // Confidence levels of Section 4.1.
  typedef enum logic [1:0] {CONF_LOW = 2'd0, CONF_MED = 2'd1, CONF_HIGH = 2'd2} conf_e;

  function automatic regset_t reg_bit(input logic v, input reg_t r);
    regset_t m;
    m = '0;
    if (v) m[r] = 1'b1;
    return m;
  endfunction

  function automatic ctr_t ctr_inc(input ctr_t c);
    return (c == CTR_MAX) ? c : c + 1'b1;
  endfunction

  function automatic ctr_t ctr_dec(input ctr_t c);
    return (c == '0) ? c : c - 1'b1;
  endfunction

endpackage
