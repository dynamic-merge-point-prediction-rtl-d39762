// tb_merge_predictor_table: random installs, write-backs and lookups against
// a way-exact reference model of the table. Checked on every lookup: hit, the
// selected prediction (highest counter, then shortest distance, then lowest
// way), the match vector, and after installs the victim order (invalid way,
// then smallest counter, then largest distance). Directed cases first.
module tb_merge_predictor_table;
  import mpp_pkg::*;
  localparam int SETS = 32, WAYS = 4;
  logic clk = 0, rst_n = 0;
  pc_t lk_pc;
  logic lk_hit;
  mp_entry_t lk_sel;
  logic [WAYS-1:0] lk_match, lk_sel_oh;
  mp_entry_t lk_entries [WAYS];
  logic ins_valid, wb_valid;
  mp_entry_t ins_entry, wb_entry;
  int checks = 0, failures = 0;

  merge_predictor_table dut (.*);
  always #5 clk = ~clk;

  // reference model
  bit      m_v   [SETS][WAYS];
  pc_t     m_br  [SETS][WAYS];
  pc_t     m_mp  [SETS][WAYS];
  int      m_d   [SETS][WAYS];
  regset_t m_r   [SETS][WAYS];
  int      m_c   [SETS][WAYS];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic mp_entry_t mk(input pc_t br, input pc_t mp, input int d, input int c);
    mp_entry_t e;
    e.br_pc = br; e.merge_pc = mp; e.mdist = dist_t'(d); e.ctr = ctr_t'(c);
    e.regs = regset_t'(mp[15:0] ^ 16'h5a5a);
    return e;
  endfunction

  task automatic install(input mp_entry_t e);
    int s, w, found;
    @(negedge clk);
    ins_valid = 1; ins_entry = e;
    @(posedge clk); #1;
    ins_valid = 0;
    s = int'(e.br_pc[4:0]); found = -1;
    for (int i = 0; i < WAYS; i++)
      if (found < 0 && m_v[s][i] && m_br[s][i] == e.br_pc && m_mp[s][i] == e.merge_pc) found = i;
    if (found >= 0) begin
      m_d[s][found] = e.mdist; m_r[s][found] = e.regs;
    end else begin
      w = -1;
      for (int i = 0; i < WAYS; i++) if (w < 0 && !m_v[s][i]) w = i;
      if (w < 0) begin
        w = 0;
        for (int i = 1; i < WAYS; i++)
          if (m_c[s][i] < m_c[s][w] || (m_c[s][i] == m_c[s][w] && m_d[s][i] > m_d[s][w])) w = i;
      end
      m_v[s][w] = 1; m_br[s][w] = e.br_pc; m_mp[s][w] = e.merge_pc;
      m_d[s][w] = e.mdist; m_r[s][w] = e.regs; m_c[s][w] = e.ctr;
    end
  endtask

  task automatic writeback(input mp_entry_t e);
    int s;
    @(negedge clk);
    wb_valid = 1; wb_entry = e;
    @(posedge clk); #1;
    wb_valid = 0;
    s = int'(e.br_pc[4:0]);
    for (int i = 0; i < WAYS; i++)
      if (m_v[s][i] && m_br[s][i] == e.br_pc && m_mp[s][i] == e.merge_pc) begin
        m_d[s][i] = e.mdist; m_r[s][i] = e.regs; m_c[s][i] = e.ctr;
        break;
      end
  endtask

  task automatic lookup(input pc_t br);
    int s, sel;
    logic [WAYS-1:0] mt;
    lk_pc = br; #1;
    s = int'(br[4:0]); sel = -1; mt = '0;
    for (int i = 0; i < WAYS; i++)
      if (m_v[s][i] && m_br[s][i] == br) begin
        mt[i] = 1'b1;
        if (sel < 0 || m_c[s][i] > m_c[s][sel] || (m_c[s][i] == m_c[s][sel] && m_d[s][i] < m_d[s][sel])) sel = i;
      end
    check(lk_hit == (sel >= 0), $sformatf("hit br=%h", br));
    check(lk_match == mt, $sformatf("match br=%h got %b exp %b", br, lk_match, mt));
    if (sel >= 0) begin
      check(lk_sel.merge_pc == m_mp[s][sel] && int'(lk_sel.mdist) == m_d[s][sel]
            && int'(lk_sel.ctr) == m_c[s][sel] && lk_sel.regs == m_r[s][sel],
            $sformatf("selected entry br=%h got mp=%h exp mp=%h", br, lk_sel.merge_pc, m_mp[s][sel]));
      check(lk_sel_oh == (WAYS'(1) << sel), "selected way");
    end
  endtask

  pc_t brs [6];

  initial begin
    ins_valid = 0; wb_valid = 0; lk_pc = 0; ins_entry = '0; wb_entry = '0;
    foreach (m_v[s, w]) m_v[s][w] = 0;
    // branches 0..3 share set 3, 4..5 share set 17
    brs = '{32'h0040_0003, 32'h0040_0023, 32'h0051_0003, 32'h7000_0063, 32'h0040_0011, 32'h0099_0031};
    repeat (2) @(posedge clk);
    rst_n = 1;
    // directed: two merge points for one branch (D and F of a hammock)
    lookup(brs[0]);
    check(!lk_hit, "empty table misses");
    install(mk(brs[0], 32'h0040_0100, 3, 4));   // D, distance 3
    install(mk(brs[0], 32'h0040_0200, 9, 4));   // F, distance 9
    lookup(brs[0]);
    check(lk_sel.merge_pc == 32'h0040_0100, "equal counters: shortest distance wins");
    writeback(mk(brs[0], 32'h0040_0200, 9, 6));
    lookup(brs[0]);
    check(lk_sel.merge_pc == 32'h0040_0200, "highest counter wins");
    lookup(brs[1]);
    check(!lk_hit, "same set, other tag misses");
    // fill the set and force an eviction: smallest counter, then largest distance
    install(mk(brs[1], 32'h0040_0300, 20, 4));
    install(mk(brs[2], 32'h0040_0400, 30, 4));
    install(mk(brs[3], 32'h0040_0500, 5, 4));   // victim: counter 4, distance 30 -> brs[2]
    lookup(brs[2]);
    check(!lk_hit, "largest distance among smallest counters evicted");
    lookup(brs[3]);
    check(lk_hit, "new entry present");
    // random phase
    for (int n = 0; n < 3000; n++) begin
      pc_t b;
      b = brs[$urandom_range(0, 5)];
      case ($urandom_range(0, 3))
        0: install(mk(b, 32'h0040_0000 + 32'($urandom_range(0, 7)) * 4, $urandom_range(0, 99), 4));
        1: writeback(mk(b, 32'h0040_0000 + 32'($urandom_range(0, 7)) * 4, $urandom_range(0, 99), $urandom_range(0, 7)));
        default: lookup(b);
      endcase
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
