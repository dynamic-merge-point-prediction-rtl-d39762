// update_list: the Update List, which verifies merge point predictions and
// trains the predictor table.
//
// When a merge prediction is used, every table entry that matched the branch
// is allocated here (8 entries, fully associative, in the paper), one of them
// marked as the prediction actually used. An entry waits until its branch
// retires, which activates it with age 0. Each later retired instruction then
// has age = number of instructions retired since the branch (0 for the first
// one). An active entry ends:
//   correct   - the merge address retires with age <= merge distance;
//   incorrect - the age passes the merge distance, the branch PC retires a
//               second time (a loop back to the branch), or a gap
//               instruction (between branch and merge point) writes a
//               register outside the entry's register set.
// A correct entry's 3-bit counter is incremented, an incorrect one's is
// decremented, and the entry is written back to the predictor table.
//
// UPDATE_MAX mode (update_max = 1): every entry is kept until its age passes
// the maximum prediction distance, as if its distance were the maximum. If the
// merge address was seen the counter is incremented and the distance becomes
// the age at which it was seen, if larger; otherwise the counter is
// decremented. The paper says the distance is "set to equal the age field" and
// also that the policy "strictly increases the predicted distance"; this
// design keeps the larger of the two so both statements hold.
//
// Independently of the mode, the outcome of the prediction that was used is
// reported once, as soon as it is known: pred_correct, or pred_wrong, which
// asks the core to flush, as after a branch misprediction.
//
// This design's choices (the paper is silent): one retired instruction per
// cycle; all waiting entries of a branch PC are activated by its next
// retirement; squash_waiting drops every entry not yet active (the predicted
// branches were flushed); allocations that find no free entry are dropped;
// finished entries are written back one per cycle, lowest index first.
module update_list
  import mpp_pkg::*;
#(
  parameter int unsigned ENTRIES = 8,
  parameter int unsigned WAYS    = 4,          // entries allocated per prediction, at most
  parameter int unsigned MAXD    = MAX_DIST
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            update_max,          // UPDATE_MAX policy (MPPmax)
  // allocation, from a used merge prediction
  input  logic            alloc_valid,
  input  logic [WAYS-1:0] alloc_match,
  input  mp_entry_t       alloc_entries [WAYS],
  input  logic [WAYS-1:0] alloc_sel,           // one-hot: the entry used as the prediction
  input  logic            squash_waiting,
  // retire stream
  input  logic            ret_valid,
  input  inst_t           ret_inst,
  // write-back to the predictor table
  output logic            wb_valid,
  output mp_entry_t       wb_entry,
  // outcome of used predictions
  output logic            pred_correct,
  output logic            pred_wrong,
  output logic            alloc_drop,          // an allocation found no free entry
  output logic [$clog2(ENTRIES+1)-1:0] occupancy
);
  typedef enum logic [1:0] {U_FREE, U_WAIT, U_ACTIVE, U_DONE} ustate_e;

  typedef struct packed {
    ustate_e   st;
    mp_entry_t e;
    dist_t     age;
    logic      selected;  // this entry is the prediction that was used
    logic      decided;   // outcome of the used prediction already reported
    logic      found;     // UPDATE_MAX: merge address seen
    dist_t     found_age;
    logic      good;      // final verdict for the counter
  } ul_entry_t;

  localparam int unsigned IDX_W = (ENTRIES > 1) ? $clog2(ENTRIES) : 1;

  ul_entry_t ul_q [ENTRIES];

  // ---------------- allocation slots ----------------
  logic [ENTRIES-1:0] taken;
  logic [IDX_W-1:0]   slot [WAYS];
  logic [WAYS-1:0]    slot_ok;
  always_comb begin
    taken   = '0;
    slot_ok = '0;
    for (int w = 0; w < WAYS; w++) begin
      slot[w] = '0;
      if (alloc_valid && alloc_match[w]) begin
        for (int i = 0; i < ENTRIES; i++) begin
          if (!slot_ok[w] && !taken[i] && ul_q[i].st == U_FREE) begin
            slot[w]    = IDX_W'(i);
            slot_ok[w] = 1'b1;
            taken[i]   = 1'b1;
          end
        end
      end
    end
    alloc_drop = alloc_valid && ((alloc_match & ~slot_ok) != '0);
  end

  // ---------------- write-back selection ----------------
  logic [IDX_W-1:0] wb_idx;
  always_comb begin
    wb_valid = 1'b0;
    wb_idx   = '0;
    for (int i = ENTRIES - 1; i >= 0; i--)
      if (ul_q[i].st == U_DONE) begin
        wb_valid = 1'b1;
        wb_idx   = IDX_W'(i);
      end
    wb_entry = ul_q[wb_idx].e;
  end

  // ---------------- per-entry evaluation of the retiring instruction ----------------
  ul_entry_t nxt [ENTRIES];
  logic [ENTRIES-1:0] ok_v, bad_v;
  always_comb begin
    for (int i = 0; i < ENTRIES; i++) begin
      logic  is_merge, is_branch, bad_wr, limit_eff, limit_pred;
      dist_t d_eff;
      nxt[i]  = ul_q[i];
      ok_v[i]  = 1'b0;
      bad_v[i] = 1'b0;
      d_eff      = update_max ? dist_t'(MAXD - 1) : ul_q[i].e.mdist;
      is_merge   = ret_inst.pc == ul_q[i].e.merge_pc;
      is_branch  = ret_inst.pc == ul_q[i].e.br_pc;
      bad_wr     = ret_inst.dst_valid && !ul_q[i].e.regs[ret_inst.dst];
      limit_eff  = ul_q[i].age >= d_eff;
      limit_pred = ul_q[i].age >= ul_q[i].e.mdist;
      if (ret_valid) begin
        unique case (ul_q[i].st)
          U_WAIT: if (is_branch) begin
            nxt[i].st  = U_ACTIVE;
            nxt[i].age = '0;
          end
          U_ACTIVE: begin
            // outcome of the prediction that was used (original distance)
            if (ul_q[i].selected && !ul_q[i].decided && !ul_q[i].found) begin
              if (is_merge && ul_q[i].age <= ul_q[i].e.mdist) begin
                ok_v[i] = 1'b1; nxt[i].decided = 1'b1;
              end else if (!is_merge && (is_branch || bad_wr || limit_pred)) begin
                bad_v[i] = 1'b1; nxt[i].decided = 1'b1;
              end
            end
            // training
            if (ul_q[i].found) begin
              // UPDATE_MAX after the merge point: wait for the maximum distance
              if (limit_eff) nxt[i].st = U_DONE;
            end else if (is_merge) begin
              if (update_max) begin
                nxt[i].found     = 1'b1;
                nxt[i].found_age = ul_q[i].age;
                nxt[i].good      = 1'b1;
                if (limit_eff) nxt[i].st = U_DONE;
              end else begin
                nxt[i].good = 1'b1;
                nxt[i].st   = U_DONE;
              end
            end else if (is_branch || bad_wr || limit_eff) begin
              nxt[i].good = 1'b0;
              nxt[i].st   = U_DONE;
            end
            if (nxt[i].st == U_DONE) begin
              nxt[i].e.ctr = nxt[i].good ? ctr_inc(ul_q[i].e.ctr) : ctr_dec(ul_q[i].e.ctr);
              if (update_max && nxt[i].found && nxt[i].found_age > ul_q[i].e.mdist)
                nxt[i].e.mdist = nxt[i].found_age;
            end else begin
              nxt[i].age = ul_q[i].age + 1'b1;
            end
          end
          default: ;
        endcase
      end
    end
    pred_correct = |ok_v;
    pred_wrong   = |bad_v;
  end

  always_comb begin
    occupancy = '0;
    for (int i = 0; i < ENTRIES; i++)
      if (ul_q[i].st != U_FREE) occupancy = occupancy + 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ENTRIES; i++) ul_q[i] <= '0;
    end else begin
      for (int i = 0; i < ENTRIES; i++) begin
        ul_q[i] <= nxt[i];
        if (squash_waiting && ul_q[i].st == U_WAIT) ul_q[i].st <= U_FREE;
      end
      if (wb_valid) ul_q[wb_idx].st <= U_FREE;
      for (int w = 0; w < WAYS; w++)
        if (slot_ok[w]) begin
          ul_q[slot[w]]          <= '0;
          ul_q[slot[w]].st       <= U_WAIT;
          ul_q[slot[w]].e        <= alloc_entries[w];
          ul_q[slot[w]].selected <= alloc_sel[w];
        end
    end
  end

  // at most one entry of an allocation is the used prediction
  assert property (@(posedge clk) disable iff (!rst_n) alloc_valid |-> $onehot0(alloc_sel & alloc_match));
endmodule
