// Self-checking test of pre_cache. A scoreboard indexed by line address
// models which lines are held, locked, their data and hit level; random
// fills, lookups, commits, STC completions, invalidations and squashes are
// applied and every combinational answer and the occupancy are compared
// with it. Directed steps first check the paper's example: the line of a
// committed load survives a squash, the line of a squashed load does not.
// Loads carry sequence numbers BASE + r (r = 0..31, BASE chosen so that
// they wrap around 0); a squash from r_s clears unlocked lines whose oldest
// load has r >= r_s, and clr_mask must name exactly those entries.
module tb_pre_cache;
  localparam int N = 32;
  localparam int KW = 26;
  localparam int DW = 512;
  localparam int KEYS = 48;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [KW-1:0] lk_key, fill_key, cm_key, inv_key;
  logic lk_hit, fill_valid, fill_ok, cm_valid, cm_hit, cm_coal, done_valid, inv_valid, inv_hit, squash;
  logic [DW-1:0] lk_data, fill_data, cm_data;
  logic [1:0] fill_level, cm_level;
  logic [4:0] cm_idx, done_idx;
  logic [5:0] occ;
  logic [5:0] fill_seq, squash_seq;
  logic [4:0] fill_idx;
  logic [N-1:0] clr_mask;
  localparam logic [5:0] BASE = 6'd40;

  pre_cache dut (.clk, .rst_n, .lk_key, .lk_hit, .lk_data, .fill_valid, .fill_key, .fill_data,
    .fill_level, .fill_seq, .fill_ok, .fill_idx, .cm_valid, .cm_key, .cm_hit, .cm_coalesced(cm_coal), .cm_idx, .cm_data,
    .cm_level, .done_valid, .done_idx, .inv_valid, .inv_key, .inv_hit, .squash, .squash_seq, .clr_mask,
    .occupancy(occ));

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // scoreboard
  bit            m_valid [KEYS];
  bit            m_lock  [KEYS];
  logic [DW-1:0] m_data  [KEYS];
  logic [1:0]    m_level [KEYS];
  logic [4:0]    m_idx   [KEYS];
  int            m_r     [KEYS];
  function automatic int m_occ();
    int n = 0;
    foreach (m_valid[k]) n += m_valid[k];
    return n;
  endfunction
  function automatic logic [DW-1:0] pat(int k, int salt);
    logic [DW-1:0] d;
    for (int w = 0; w < DW/32; w++) d[w*32 +: 32] = 32'(k * 7919 + w * 31 + salt * 1000003);
    return d;
  endfunction

  task automatic idle();
    fill_valid = 0; cm_valid = 0; done_valid = 0; inv_valid = 0; squash = 0;
  endtask

  task automatic do_fill(int k, int lvl, int salt, int r = 0);
    idle();
    fill_valid = 1; fill_key = KW'(k); fill_data = pat(k, salt); fill_level = 2'(lvl);
    fill_seq = BASE + 6'(r);
    #1;
    check(fill_ok == (m_valid[k] || m_occ() < N), "fill_ok");
    if (m_valid[k]) begin
      check(fill_idx == m_idx[k], "fill_idx of a held line");
      if (r < m_r[k]) m_r[k] = r;
    end else if (m_occ() < N) begin
      m_valid[k] = 1; m_lock[k] = 0; m_data[k] = pat(k, salt); m_level[k] = 2'(lvl);
      m_idx[k] = fill_idx; m_r[k] = r;
    end
    @(posedge clk); #1; idle();
  endtask

  task automatic do_lookup(int k);
    lk_key = KW'(k); #1;
    check(lk_hit == m_valid[k], $sformatf("lk_hit key %0d", k));
    if (m_valid[k]) check(lk_data == m_data[k], "lk_data");
  endtask

  task automatic do_commit(int k);
    idle(); cm_valid = 1; cm_key = KW'(k); #1;
    check(cm_hit == (m_valid[k] && !m_lock[k]), "cm_hit");
    check(cm_coal == (m_valid[k] && m_lock[k]), "cm_coalesced");
    if (m_valid[k]) begin
      check(cm_data == m_data[k] && cm_level == m_level[k], "cm_data/level");
      check(cm_idx == m_idx[k], "cm_idx");
      m_lock[k] = 1;
    end
    @(posedge clk); #1; idle();
  endtask

  task automatic do_done(int k);
    if (!(m_valid[k] && m_lock[k])) return;
    idle(); done_valid = 1; done_idx = m_idx[k];
    @(posedge clk); #1; idle();
    m_valid[k] = 0; m_lock[k] = 0;
  endtask

  task automatic do_inv(int k);
    idle(); inv_valid = 1; inv_key = KW'(k); #1;
    check(inv_hit == m_valid[k], "inv_hit");
    @(posedge clk); #1; idle();
    m_valid[k] = 0; m_lock[k] = 0;
  endtask

  task automatic do_squash(int rs = 0);
    logic [N-1:0] exp_m;
    idle(); squash = 1; squash_seq = BASE + 6'(rs);
    exp_m = '0;
    foreach (m_valid[k]) if (m_valid[k] && !m_lock[k] && m_r[k] >= rs) exp_m[m_idx[k]] = 1'b1;
    #1;
    check(clr_mask == exp_m, "clr_mask");
    @(posedge clk); #1; idle();
    foreach (m_valid[k]) if (!m_lock[k] && m_r[k] >= rs) m_valid[k] = 0;
  endtask

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    idle(); lk_key = '0; fill_key = '0; cm_key = '0; inv_key = '0; done_idx = '0;
    fill_data = '0; fill_level = '0; fill_seq = '0; squash_seq = '0;
    foreach (m_valid[k]) begin m_valid[k] = 0; m_lock[k] = 0; end
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    check(occ == 0, "empty after reset");
    // Paper example: I1 loads D1 (key 1, from memory), I2 loads D2 (key 2).
    do_fill(1, 3, 0); do_fill(2, 3, 0);
    do_lookup(1); do_lookup(2); do_lookup(3);
    do_commit(1);                      // I1 commits: STC of D1 starts
    do_squash();                       // I2 squashed: D2 discarded
    do_lookup(2);
    check(!lk_hit, "D2 gone after squash");
    do_lookup(1);
    check(lk_hit, "D1 kept while its STC runs");
    do_commit(1);                      // second commit to the same line coalesces
    do_done(1);
    do_lookup(1);
    check(occ == 0, "empty after STC");
    // fill to capacity
    for (int k = 0; k < N + 2; k++) do_fill(k, k % 4, 1);
    check(occ == N, "full at 32");
    do_fill(5, 1, 9);                  // duplicate of a held line
    check(occ == N, "duplicate not added");
    do_squash();
    check(occ == 0, "squash empties unlocked");
    // only the lines of squashed loads go: D1 by load 2, D2 by load 5, D3
    // first by load 6 and then also used by the older load 1
    do_fill(1, 3, 2, 2); do_fill(2, 3, 2, 5); do_fill(3, 3, 2, 6); do_fill(3, 3, 2, 1);
    do_squash(4);                      // loads 4 and younger squashed
    do_lookup(1); check(lk_hit, "line of older load kept");
    do_lookup(2); check(!lk_hit, "line of squashed load cleared");
    do_lookup(3); check(lk_hit, "line shared with an older load kept");
    do_squash();
    check(occ == 0, "empty again");
    // random
    for (int it = 0; it < 4000; it++) begin
      int k;
      k = $urandom_range(KEYS-1);
      case ($urandom_range(9))
        0, 1, 2: do_fill(k, $urandom_range(3), it, $urandom_range(31));
        3, 4:    do_lookup(k);
        5, 6:    do_commit(k);
        7:       do_done(k);
        8:       do_inv(k);
        9:       if ($urandom_range(7) == 0) do_squash($urandom_range(31)); else do_lookup(k);
      endcase
      check(int'(occ) == m_occ(), "occupancy");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
