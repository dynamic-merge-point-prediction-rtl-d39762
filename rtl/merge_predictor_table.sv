// merge_predictor_table: the Merge Point Predictor Table.
//
// A set-associative table (128 entries, 4 ways in the paper) indexed by the
// low bits of the branch PC and tagged by the rest. Each way holds a tag, a
// 3-bit saturating counter, a merge distance, a merge address and a register
// set. One branch may own several entries, one per merge point found.
//
// Lookup (combinational): all ways whose tag matches are hits. Among them the
// entry with the highest counter is selected; ties go to the shortest
// distance (the paper's "Highest Counter" then "Shortest Distance" stages);
// a remaining tie goes to the lowest way (this design's choice). All matching
// entries are also output, since every one of them is inserted into the
// update list when the prediction is used.
//
// Install (from the wrong path buffer): an invalid way is used first; else the
// victim is the way with the smallest counter, ties broken by the largest
// distance (paper), then by the lowest way (this design). If the set already
// holds the same branch/merge-point pair, that way is refreshed with the new
// distance and register set and keeps its counter (this design's choice).
//
// Write-back (from the update list): the way holding the same branch tag and
// merge address receives the new counter, distance and register set; if the
// entry was evicted meanwhile the write-back is dropped (this design's
// choice). Install and write-back act at the clock edge; when both hit the
// same way in one cycle the install wins. Reset clears all valid bits.
module merge_predictor_table
  import mpp_pkg::*;
#(
  parameter int unsigned ENTRIES = 128,
  parameter int unsigned WAYS    = 4
) (
  input  logic      clk,
  input  logic      rst_n,
  // lookup
  input  pc_t       lk_pc,
  output logic      lk_hit,
  output mp_entry_t lk_sel,              // selected prediction
  output logic [WAYS-1:0] lk_match,      // ways that matched
  output logic [WAYS-1:0] lk_sel_oh,     // one-hot: the selected way
  output mp_entry_t lk_entries [WAYS],   // contents of every way of the set
  // install of a newly detected merge point
  input  logic      ins_valid,
  input  mp_entry_t ins_entry,
  // write-back of an updated entry
  input  logic      wb_valid,
  input  mp_entry_t wb_entry
);
  localparam int unsigned SETS  = ENTRIES / WAYS;
  localparam int unsigned IDX_W = (SETS > 1) ? $clog2(SETS) : 1;
  localparam int unsigned TAG_W = PC_W - IDX_W;
  localparam int unsigned WAY_W = (WAYS > 1) ? $clog2(WAYS) : 1;

  typedef logic [IDX_W-1:0] idx_t;
  typedef logic [TAG_W-1:0] tag_t;
  typedef logic [WAY_W-1:0] way_t;

  typedef struct packed {
    logic    valid;
    tag_t    tag;
    pc_t     merge_pc;
    dist_t   mdist;
    regset_t regs;
    ctr_t    ctr;
  } way_entry_t;

  way_entry_t tab_q [SETS][WAYS];

  function automatic idx_t idx_of(input pc_t pc);
    return pc[IDX_W-1:0];
  endfunction
  function automatic tag_t tag_of(input pc_t pc);
    return pc[PC_W-1:PC_W-TAG_W];
  endfunction

  // ---------------- lookup ----------------
  idx_t lk_idx;
  way_t sel_way;
  always_comb begin
    lk_idx  = idx_of(lk_pc);
    lk_hit  = 1'b0;
    sel_way = '0;
    for (int w = 0; w < WAYS; w++) begin
      lk_match[w]            = tab_q[lk_idx][w].valid && tab_q[lk_idx][w].tag == tag_of(lk_pc);
      lk_entries[w].br_pc    = lk_pc;
      lk_entries[w].merge_pc = tab_q[lk_idx][w].merge_pc;
      lk_entries[w].mdist     = tab_q[lk_idx][w].mdist;
      lk_entries[w].regs     = tab_q[lk_idx][w].regs;
      lk_entries[w].ctr      = tab_q[lk_idx][w].ctr;
    end
    for (int w = 0; w < WAYS; w++) begin
      if (lk_match[w]) begin
        if (!lk_hit
            || tab_q[lk_idx][w].ctr > tab_q[lk_idx][sel_way].ctr
            || (tab_q[lk_idx][w].ctr == tab_q[lk_idx][sel_way].ctr
                && tab_q[lk_idx][w].mdist < tab_q[lk_idx][sel_way].mdist)) begin
          sel_way = way_t'(w);
        end
        lk_hit = 1'b1;
      end
    end
    lk_sel    = lk_entries[sel_way];
    lk_sel_oh = lk_hit ? (WAYS'(1) << sel_way) : '0;
  end

  // ---------------- install: way selection ----------------
  idx_t ins_idx;
  way_t ins_way;
  logic ins_found, ins_free;
  always_comb begin
    ins_idx   = idx_of(ins_entry.br_pc);
    ins_way   = '0;
    ins_found = 1'b0;
    ins_free  = 1'b0;
    // same branch / merge point already present?
    for (int w = 0; w < WAYS; w++) begin
      if (!ins_found && tab_q[ins_idx][w].valid
          && tab_q[ins_idx][w].tag == tag_of(ins_entry.br_pc)
          && tab_q[ins_idx][w].merge_pc == ins_entry.merge_pc) begin
        ins_way   = way_t'(w);
        ins_found = 1'b1;
      end
    end
    if (!ins_found) begin
      for (int w = 0; w < WAYS; w++) begin
        if (!ins_free && !tab_q[ins_idx][w].valid) begin
          ins_way  = way_t'(w);
          ins_free = 1'b1;
        end
      end
    end
    if (!ins_found && !ins_free) begin
      // victim: smallest counter, then largest distance
      ins_way = '0;
      for (int w = 1; w < WAYS; w++) begin
        if (tab_q[ins_idx][w].ctr < tab_q[ins_idx][ins_way].ctr
            || (tab_q[ins_idx][w].ctr == tab_q[ins_idx][ins_way].ctr
                && tab_q[ins_idx][w].mdist > tab_q[ins_idx][ins_way].mdist)) begin
          ins_way = way_t'(w);
        end
      end
    end
  end

  // ---------------- write-back: way search ----------------
  idx_t wb_idx;
  way_t wb_way;
  logic wb_found;
  always_comb begin
    wb_idx   = idx_of(wb_entry.br_pc);
    wb_way   = '0;
    wb_found = 1'b0;
    for (int w = 0; w < WAYS; w++) begin
      if (!wb_found && tab_q[wb_idx][w].valid
          && tab_q[wb_idx][w].tag == tag_of(wb_entry.br_pc)
          && tab_q[wb_idx][w].merge_pc == wb_entry.merge_pc) begin
        wb_way   = way_t'(w);
        wb_found = 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < SETS; s++)
        for (int w = 0; w < WAYS; w++)
          tab_q[s][w] <= '0;
    end else begin
      if (wb_valid && wb_found) begin
        tab_q[wb_idx][wb_way].ctr  <= wb_entry.ctr;
        tab_q[wb_idx][wb_way].mdist <= wb_entry.mdist;
        tab_q[wb_idx][wb_way].regs <= wb_entry.regs;
      end
      if (ins_valid) begin
        tab_q[ins_idx][ins_way].valid    <= 1'b1;
        tab_q[ins_idx][ins_way].tag      <= tag_of(ins_entry.br_pc);
        tab_q[ins_idx][ins_way].merge_pc <= ins_entry.merge_pc;
        tab_q[ins_idx][ins_way].mdist     <= ins_entry.mdist;
        tab_q[ins_idx][ins_way].regs     <= ins_entry.regs;
        tab_q[ins_idx][ins_way].ctr      <= ins_found ? tab_q[ins_idx][ins_way].ctr : ins_entry.ctr;
      end
    end
  end
endmodule
