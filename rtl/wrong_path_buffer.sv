// wrong_path_buffer: the Wrong Path Buffer (WPB) that detects new merge
// points.
//
// Fill. When a branch misprediction is detected the core walks its reorder
// buffer from the first instruction after the mispredicted branch and presents
// the wrong-path instructions here, one per cycle (walk_start, then walk_valid
// with walk_inst). Each one is written into the set-associative buffer
// (128 entries, 4 ways, LRU replacement in the paper), indexed by its PC, with
// its wrong-path distance (0 for the first instruction after the branch) and
// the wrong-path register set: the OR of the destination registers of all
// wrong-path instructions up to and including this one. The fill stops when
// (1) the walk ends (walk_end: no more instructions in the ROB), (2) the
// maximum merge distance has been copied, or (3) the mispredicted branch's own
// PC comes up again. The buffer is tagged with the branch PC and marked valid.
//
// Compare. Correct-path instructions that retire after the mispredicted branch
// (the branch itself is recognised by ret_mispred with a matching PC) index
// the buffer. A PC that hits is the merge point: the buffer reports the entry's
// wrong-path distance and set together with its own correct-path distance (the
// number of correct-path instructions that indexed it before) and correct-path
// register set (the OR of their destination registers), then invalidates
// itself. Reaching the maximum distance, or seeing the branch PC again, also
// invalidates it without a merge point.
//
// These rules are the paper's. This design's choices: one instruction per
// cycle on each stream; a PC seen twice on the wrong path keeps its first
// (shortest) distance; a new walk_start discards whatever the buffer held; the
// correct-path set excludes the hitting instruction, whose destination is
// already in the wrong-path set. Outputs are registered: hit and the
// invalidate pulses come one cycle after the retiring instruction.
module wrong_path_buffer
  import mpp_pkg::*;
#(
  parameter int unsigned ENTRIES = 128,
  parameter int unsigned WAYS    = 4,
  parameter int unsigned MAXD    = MAX_DIST
) (
  input  logic    clk,
  input  logic    rst_n,
  // ROB walk after a misprediction
  input  logic    walk_start,     // a new walk begins; walk_br_pc is valid
  input  pc_t     walk_br_pc,     // PC of the mispredicted branch
  input  logic    walk_valid,     // one wrong-path instruction
  input  inst_t   walk_inst,
  input  logic    walk_end,       // no more instructions in the ROB
  // retire stream
  input  logic    ret_valid,
  input  inst_t   ret_inst,
  input  logic    ret_mispred,    // retiring instruction is a mispredicted branch
  // merge point found
  output logic    hit,
  output pc_t     hit_br_pc,
  output pc_t     hit_pc,
  output dist_t   hit_wp_dist,
  output regset_t hit_wp_regs,
  output dist_t   hit_cp_dist,
  output regset_t hit_cp_regs,
  // status
  output logic    busy,           // filling, waiting or comparing
  output logic    inval_dist,     // invalidated: maximum distance reached
  output logic    inval_loop,     // invalidated: branch PC seen again
  output logic    evicted         // a fill evicted a valid entry (false negative)
);
  localparam int unsigned SETS  = ENTRIES / WAYS;
  localparam int unsigned IDX_W = (SETS > 1) ? $clog2(SETS) : 1;
  localparam int unsigned TAG_W = PC_W - IDX_W;
  localparam int unsigned WAY_W = (WAYS > 1) ? $clog2(WAYS) : 1;

  typedef logic [IDX_W-1:0] idx_t;
  typedef logic [TAG_W-1:0] tag_t;
  typedef logic [WAY_W-1:0] way_t;

  typedef enum logic [1:0] {S_IDLE, S_FILL, S_WAIT_BR, S_COMPARE} state_e;

  typedef struct packed {
    tag_t    tag;
    dist_t   wdist;
    regset_t wregs;
  } wpb_entry_t;

  state_e     state_q;
  pc_t        br_pc_q;
  dist_t      dist_q;          // wrong-path distance while filling, correct-path while comparing
  regset_t    regs_q;          // accumulated register set
  logic       valid_q [SETS][WAYS];
  wpb_entry_t ent_q   [SETS][WAYS];
  way_t       lru_q   [SETS][WAYS]; // 0 = most recently used

  function automatic idx_t idx_of(input pc_t pc);
    return pc[IDX_W-1:0];
  endfunction
  function automatic tag_t tag_of(input pc_t pc);
    return pc[PC_W-1:PC_W-TAG_W];
  endfunction

  // ---------------- fill-side lookup and victim choice ----------------
  idx_t    w_idx;
  logic    w_present, w_free;
  way_t    w_way;
  regset_t w_regs;
  always_comb begin
    w_idx     = idx_of(walk_inst.pc);
    w_present = 1'b0;
    w_free    = 1'b0;
    w_way     = '0;
    for (int w = 0; w < WAYS; w++)
      if (valid_q[w_idx][w] && ent_q[w_idx][w].tag == tag_of(walk_inst.pc)) w_present = 1'b1;
    for (int w = 0; w < WAYS; w++)
      if (!w_free && !valid_q[w_idx][w]) begin
        w_way  = way_t'(w);
        w_free = 1'b1;
      end
    if (!w_free)
      for (int w = 0; w < WAYS; w++)
        if (lru_q[w_idx][w] == way_t'(WAYS - 1)) w_way = way_t'(w);
    w_regs = regs_q | reg_bit(walk_inst.dst_valid, walk_inst.dst);
  end

  // ---------------- compare-side lookup ----------------
  idx_t r_idx;
  logic r_hit;
  way_t r_way;
  always_comb begin
    r_idx = idx_of(ret_inst.pc);
    r_hit = 1'b0;
    r_way = '0;
    for (int w = 0; w < WAYS; w++)
      if (valid_q[r_idx][w] && ent_q[r_idx][w].tag == tag_of(ret_inst.pc)) begin
        r_hit = 1'b1;
        r_way = way_t'(w);
      end
  end

  logic fill_store;  // this walk instruction is written into the buffer
  logic fill_stop;   // this walk instruction ends the fill
  always_comb begin
    fill_stop  = 1'b0;
    fill_store = 1'b0;
    if (state_q == S_FILL && walk_valid) begin
      if (walk_inst.pc == br_pc_q) fill_stop = 1'b1;            // (3) loop back to the branch
      else begin
        fill_store = 1'b1;
        if (32'(dist_q) + 1 >= MAXD) fill_stop = 1'b1;          // (2) maximum distance copied
      end
    end
    if (state_q == S_FILL && walk_end) fill_stop = 1'b1;         // (1) ROB exhausted
  end

  assign busy = (state_q != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q    <= S_IDLE;
      br_pc_q    <= '0;
      dist_q     <= '0;
      regs_q     <= '0;
      hit        <= 1'b0;
      hit_br_pc  <= '0;
      hit_pc     <= '0;
      hit_wp_dist <= '0;
      hit_wp_regs <= '0;
      hit_cp_dist <= '0;
      hit_cp_regs <= '0;
      inval_dist <= 1'b0;
      inval_loop <= 1'b0;
      evicted    <= 1'b0;
      for (int s = 0; s < SETS; s++)
        for (int w = 0; w < WAYS; w++) begin
          valid_q[s][w] <= 1'b0;
          ent_q[s][w]   <= '0;
          lru_q[s][w]   <= way_t'(w);
        end
    end else begin
      hit        <= 1'b0;
      inval_dist <= 1'b0;
      inval_loop <= 1'b0;
      evicted    <= 1'b0;
      if (walk_start) begin
        // a new misprediction: discard the old contents and start filling
        state_q <= S_FILL;
        br_pc_q <= walk_br_pc;
        dist_q  <= '0;
        regs_q  <= '0;
        for (int s = 0; s < SETS; s++)
          for (int w = 0; w < WAYS; w++)
            valid_q[s][w] <= 1'b0;
      end else begin
        unique case (state_q)
          S_FILL: begin
            if (fill_store) begin
              dist_q <= dist_q + 1'b1;
              regs_q <= w_regs;
              if (!w_present) begin
                valid_q[w_idx][w_way]     <= 1'b1;
                ent_q[w_idx][w_way].tag   <= tag_of(walk_inst.pc);
                ent_q[w_idx][w_way].wdist <= dist_q;
                ent_q[w_idx][w_way].wregs <= w_regs;
                evicted <= !w_free;
                for (int w = 0; w < WAYS; w++)
                  if (lru_q[w_idx][w] < lru_q[w_idx][w_way]) lru_q[w_idx][w] <= lru_q[w_idx][w] + 1'b1;
                lru_q[w_idx][w_way] <= '0;
              end
            end
            if (fill_stop) begin
              // nothing copied: there is nothing to compare against
              state_q <= (dist_q == '0 && !fill_store) ? S_IDLE : S_WAIT_BR;
            end
          end
          S_WAIT_BR: begin
            if (ret_valid && ret_mispred && ret_inst.pc == br_pc_q) begin
              state_q <= S_COMPARE;
              dist_q  <= '0;
              regs_q  <= '0;
            end
          end
          S_COMPARE: begin
            if (ret_valid) begin
              if (r_hit) begin
                hit         <= 1'b1;
                hit_br_pc   <= br_pc_q;
                hit_pc      <= ret_inst.pc;
                hit_wp_dist <= ent_q[r_idx][r_way].wdist;
                hit_wp_regs <= ent_q[r_idx][r_way].wregs;
                hit_cp_dist <= dist_q;
                hit_cp_regs <= regs_q;
                state_q     <= S_IDLE;
              end else if (ret_inst.pc == br_pc_q) begin
                inval_loop <= 1'b1;
                state_q    <= S_IDLE;
              end else if (32'(dist_q) + 1 >= MAXD) begin
                inval_dist <= 1'b1;
                state_q    <= S_IDLE;
              end else begin
                dist_q <= dist_q + 1'b1;
                regs_q <= regs_q | reg_bit(ret_inst.dst_valid, ret_inst.dst);
              end
            end
          end
          default: ;
        endcase
        if (state_q == S_COMPARE && ret_valid && (r_hit || ret_inst.pc == br_pc_q || 32'(dist_q) + 1 >= MAXD))
          for (int s = 0; s < SETS; s++)
            for (int w = 0; w < WAYS; w++)
              valid_q[s][w] <= 1'b0;
      end
    end
  end
endmodule
