// End-to-end test of precache_top at its default (full) size: 32-entry
// pre-cache, 32 KB 4-way L1D and L1I, 2 MB 8-way L2, 16-entry prefetch
// buffer, 28-block instruction pre-cache, 32-entry TLB pre-cache. The levels
// below L2 are the behavioural lower_mem_model. Every load's data is
// compared with the model's memory image, and the latencies of L1,
// pre-cache and L2 hits are checked against 4 and 4 + 10 cycles.
//
// Scenarios:
//  1. Meltdown/Spectre pattern: a load that commits and a transient load
//     whose line is fetched, then squashed. The transient line must not be in
//     any cache afterwards (the next access goes below L2), the committed one
//     must hit in L1.
//  2. Hit level: a line from L2 commits without an STC request below.
//  3. Inclusion through the L2 pre-cache directory: a line loaded from L2
//     into the pre-cache is evicted from L2; the pre-cache copy must go.
//  4. Invalidation from below reaches the pre-cache through the directory.
//  5. STC abort, by a local invalidation and by the lower levels.
//  6. Committed stores: pre-cache copy dropped, new value seen afterwards.
//  7. Prefetch buffer: a prefetched line serves a load, and moves into L2
//     once its trigger load commits.
//  1b. Spectre training loop: 100 committed loads with a 4 KB stride, then a
//     transient one; only the transient line is missing from L1/L2 afterwards.
//  8. Squash of an in-flight load, and a full pre-cache.
//  8b. Ordered squash: only lines owned by loads at or after the squash point
//     go; a line shared with an older load and an older in-flight load stay.
//  9. Instruction pre-cache: speculative blocks after an indirect jump,
//     released on commit, dropped on misprediction.
// 10. TLB pre-cache: translation reaches the TLB only on commit.
// Then a random mix of loads, in-order commits, stores and squashes, with
// load sequence numbers from an in-order load-queue model.
// Each mechanism is counted and a mechanism that never happened is a failure.
module tb_precache_top;
  import precache_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int cycle = 0;
  always @(posedge clk) cycle++;

  logic  ld_valid, ld_ready, ld_resp_valid, cm_valid, cm_ready, st_valid, st_ready, squash;
  addr_t ld_addr, cm_addr, st_addr;
  seq_t  ld_seq, squash_seq;
  word_t ld_resp_data, st_data;
  src_e  ld_resp_src;
  logic  mem_req_valid, mem_req_ready, mem_resp_valid, mem_resp_abort;
  mreq_e mem_req_type;
  addr_t mem_req_addr;
  word_t mem_req_data;
  line_t mem_resp_data;
  level_e mem_resp_level;
  logic  ext_inv_valid, ext_inv_ready, squash_out, abort_next;
  addr_t ext_inv_addr;
  logic  pf_valid, pf_ok, pf_mem_req_valid, pf_mem_resp_valid;
  addr_t pf_trig_addr, pf_addr, pf_mem_req_addr, pf_mem_resp_addr;
  line_t pf_mem_resp_data;
  addr_t if_addr, if_fill_addr;
  logic  if_hit, if_from_ipc, if_fill_valid, if_fill_ready, ijump_dec, ijump_commit, mispredict, ipc_spec_mode;
  line_t if_data, if_fill_data;
  addr_t tlb_lk_vaddr, walk_vaddr, tcm_vaddr;
  logic  tpc_hit, walk_valid, tcm_valid, tlb_wr_valid;
  logic [19:0] tpc_ppn, walk_ppn, tlb_wr_vpn, tlb_wr_ppn;
  mem_events_t events;

  precache_top dut (.*);

  lower_mem_model u_mem (
    .clk, .mem_req_valid, .mem_req_ready, .mem_req_type, .mem_req_addr, .mem_req_data,
    .mem_resp_valid, .mem_resp_data, .mem_resp_level, .mem_resp_abort, .abort_next,
    .pf_req_valid(pf_mem_req_valid), .pf_req_addr(pf_mem_req_addr),
    .pf_resp_valid(pf_mem_resp_valid), .pf_resp_addr(pf_mem_resp_addr), .pf_resp_data(pf_mem_resp_data)
  );

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at cycle %0d", what, cycle); end
  endtask

  // event counters
  int n_pc_hit, n_l1_hit, n_l2_hit, n_pb_hit, n_mem_load, n_pc_full, n_stc_start, n_stc_done,
      n_stc_abort, n_dir_inv, n_l2_evict, n_squash_kill, n_squash_clear, n_pb_to_l2, n_store;
  int n_ic_release = 0, n_tlb_wr = 0, n_stc_down = 0;
  initial begin
    n_pc_hit = 0; n_l1_hit = 0; n_l2_hit = 0; n_pb_hit = 0; n_mem_load = 0; n_pc_full = 0;
    n_stc_start = 0; n_stc_done = 0; n_stc_abort = 0; n_dir_inv = 0; n_l2_evict = 0;
    n_squash_kill = 0; n_squash_clear = 0; n_pb_to_l2 = 0; n_store = 0;
  end
  always @(posedge clk) if (rst_n) begin
    n_pc_hit += events.pc_hit;       n_l1_hit += events.l1_hit;
    n_l2_hit += events.l2_hit;       n_pb_hit += events.pb_hit;
    n_mem_load += events.mem_load;   n_pc_full += events.pc_full;
    n_stc_start += events.stc_start; n_stc_done += events.stc_done;
    n_stc_abort += events.stc_abort; n_dir_inv += events.dir_inv;
    n_l2_evict += events.l2_evict;   n_squash_kill += events.squash_kill;
    n_squash_clear += events.squash_clear; n_pb_to_l2 += events.pb_to_l2;
    n_store += events.store;
    n_tlb_wr += tlb_wr_valid;
    if (mem_req_valid && mem_req_ready && mem_req_type == MREQ_STC) n_stc_down++;
  end

  // ---------------- helpers ----------------
  localparam addr_t BASE = 32'h0010_0000;
  function automatic addr_t line_addr(int n);
    return BASE + addr_t'(n) * 64;
  endfunction

  task automatic wait_idle();
    int t = 0;
    #1;
    while (!ld_ready && t < 1000) begin @(posedge clk); #1; t++; end
    check(t < 1000, "design returns to idle");
  endtask

  // One load; checks data against the memory image and returns source and latency.
  task automatic load(addr_t a, output src_e src, output int lat, output bit answered);
    int t0, t;
    wait_idle();
    ld_valid = 1; ld_addr = a;
    @(posedge clk); #1;
    ld_valid = 0;
    t0 = cycle; t = 0; answered = 0; src = SRC_L1; lat = 0;
    while (t < 400) begin
      if (ld_resp_valid) begin
        answered = 1; src = ld_resp_src; lat = cycle - t0 + 1;
        check(ld_resp_data == u_mem.ref_word(a), $sformatf("load data at %h", a));
        break;
      end
      @(posedge clk); #1; t++;
    end
    @(posedge clk); #1;
  endtask

  task automatic load_expect(addr_t a, src_e exp_src, int exp_lat, string what);
    src_e s; int lat; bit ok;
    load(a, s, lat, ok);
    check(ok, {what, ": answered"});
    check(s == exp_src, $sformatf("%s: source %s, expected %s", what, s.name(), exp_src.name()));
    if (exp_lat > 0) check(lat == exp_lat, $sformatf("%s: latency %0d, expected %0d", what, lat, exp_lat));
  endtask

  task automatic commit(addr_t a);
    wait_idle();
    cm_valid = 1; cm_addr = a;
    @(posedge clk); #1;
    cm_valid = 0;
    wait_idle();
  endtask

  task automatic store(addr_t a, word_t d);
    wait_idle();
    st_valid = 1; st_addr = a; st_data = d;
    @(posedge clk); #1;
    while (!st_ready) begin @(posedge clk); #1; end
    st_valid = 0;
    @(posedge clk); #1;
  endtask

  task automatic do_squash();
    squash = 1; @(posedge clk); #1; squash = 0;
  endtask

  task automatic ext_inv(addr_t a);
    ext_inv_valid = 1; ext_inv_addr = a; #1;
    while (!ext_inv_ready) begin @(posedge clk); #1; end
    @(posedge clk); #1; ext_inv_valid = 0;
  endtask

  // load + commit, leaving the line in L1 and L2
  task automatic load_commit(addr_t a);
    src_e s; int lat; bit ok;
    load(a, s, lat, ok);
    check(ok, "load_commit answered");
    commit(a);
  endtask

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int nb, nb2;
    src_e s; int lat; bit ok;
    ld_valid = 0; cm_valid = 0; st_valid = 0; squash = 0; ext_inv_valid = 0; abort_next = 0;
    ld_addr = '0; cm_addr = '0; st_addr = '0; st_data = '0; ext_inv_addr = '0;
    // loads share sequence number 0 and squashes start at 0 (everything
    // uncommitted goes) except in the scenarios that order loads
    ld_seq = '0; squash_seq = '0;
    pf_valid = 0; pf_trig_addr = '0; pf_addr = '0;
    if_addr = '0; if_fill_valid = 0; if_fill_addr = '0; if_fill_data = '0;
    ijump_dec = 0; ijump_commit = 0; mispredict = 0;
    tlb_lk_vaddr = '0; walk_valid = 0; walk_vaddr = '0; walk_ppn = '0; tcm_valid = 0; tcm_vaddr = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1;
    // the cache arrays clear one set per cycle (L2: 4096 cycles)
    while (!ld_ready) begin @(posedge clk); #1; end

    // ---- 1. Meltdown/Spectre pattern ----
    begin
      addr_t a1 = line_addr(1) + 8, a2 = line_addr(2) + 16;
      load_expect(a1, SRC_BELOW, 0, "I1 first access");
      load_expect(a1 + 8, SRC_PRECACHE, 4, "I1 line reused from pre-cache");
      load_expect(a2, SRC_BELOW, 0, "transient I2");
      nb = n_stc_down;
      commit(a1);                           // I1 commits: STC
      do_squash();                          // I2 squashed
      check(n_stc_down == nb + 1, "STC of a line from memory goes below L2");
      load_expect(a1, SRC_L1, 4, "committed line now in L1");
      nb = n_mem_load;
      load_expect(a2, SRC_BELOW, 0, "transient line left no trace");
      check(n_mem_load == nb + 1, "transient line fetched again from below L2");
      do_squash();
    end

    // ---- 1b. Spectre loop: 100 trained iterations over a probe array with a
    // 4 KB stride, then one transient iteration that is squashed ----
    begin
      int pb0 = 1 << 16;                    // probe array, 64 lines per 4 KB page
      for (int i = 0; i < 100; i++) load_commit(line_addr(pb0 + 64 * i));
      load_expect(line_addr(pb0 + 64 * 100), SRC_BELOW, 0, "transient iteration");
      do_squash();
      nb = n_mem_load;
      for (int i = 0; i < 100; i += 11) begin
        load(line_addr(pb0 + 64 * i), s, lat, ok);
        check(ok && s != SRC_PRECACHE, "trained line served by the caches");
      end
      check(n_mem_load == nb, "trained lines all still in L1 or L2");
      load_expect(line_addr(pb0 + 64 * 100), SRC_BELOW, 0, "transient probe line");
      check(n_mem_load == nb + 1, "transient probe line left no trace in L1 or L2");
      do_squash();
    end

    // ---- 2. hit level: line in L2 but not L1 ----
    begin
      // line 40 and four lines in the same L1 set (stride 128 lines), other L2 sets
      load_commit(line_addr(40));
      for (int i = 1; i <= 4; i++) load_commit(line_addr(40 + 128 * i));
      nb = n_stc_down;
      load_expect(line_addr(40), SRC_BELOW, 14, "L2 hit after L1 eviction");
      load_expect(line_addr(40) + 24, SRC_PRECACHE, 4, "L2 line served by pre-cache");
      commit(line_addr(40));
      check(n_stc_down == nb, "STC of an L2 line stays above L3");
      load_expect(line_addr(40), SRC_L1, 4, "L2 line written to L1 by STC");
    end

    // ---- 3. inclusion via the L2 directory (paper's two-level example) ----
    begin
      int d = 3000;                         // L2 set of line 3000
      load_commit(line_addr(d));
      for (int i = 1; i <= 4; i++) load_commit(line_addr(d + 128 * i));   // out of L1
      load_expect(line_addr(d), SRC_BELOW, 14, "D from L2 into pre-cache");
      nb = n_dir_inv;
      // eight further lines into the same L2 set (stride 4096 lines) evict D
      for (int i = 1; i <= 8; i++) load_commit(line_addr(d + 4096 * i));
      check(n_dir_inv > nb, "L2 eviction invalidated the pre-cache copy");
      nb = n_stc_start;
      commit(line_addr(d));
      check(n_stc_start == nb, "no STC for an invalidated line");
      load_expect(line_addr(d), SRC_BELOW, 0, "D fetched again");
      do_squash();
    end

    // ---- 4. invalidation from below ----
    begin
      addr_t a = line_addr(60);
      load_expect(a, SRC_BELOW, 0, "line for external invalidation");
      nb = n_dir_inv;
      ext_inv(a);
      check(n_dir_inv == nb + 1, "external invalidation reached the pre-cache");
      load_expect(a, SRC_BELOW, 0, "invalidated line fetched again");
      do_squash();
    end

    // ---- 5. STC aborts ----
    begin
      addr_t a = line_addr(70), b = line_addr(71);
      load_expect(a, SRC_BELOW, 0, "line for aborted STC");
      nb = n_stc_abort;
      wait_idle();
      cm_valid = 1; cm_addr = a; @(posedge clk); #1; cm_valid = 0;
      repeat (3) @(posedge clk); #1;
      ext_inv(a);                             // arrives while the STC waits below
      wait_idle();
      check(n_stc_abort == nb + 1, "STC aborted by invalidation");
      load_expect(a, SRC_BELOW, 0, "aborted STC wrote nothing");
      do_squash();
      load_expect(b, SRC_BELOW, 0, "line for refused STC");
      abort_next = 1;
      commit(b);
      abort_next = 0;
      check(n_stc_abort == nb + 2, "STC aborted by the lower levels");
      load_expect(b, SRC_BELOW, 0, "refused STC wrote nothing");
      do_squash();
    end

    // ---- 6. stores ----
    begin
      addr_t a = line_addr(80) + 8, b = line_addr(1) + 32;
      load_expect(a, SRC_BELOW, 0, "line then stored to");
      store(a, 64'hDEAD_BEEF_0123_4567);
      load_expect(a, SRC_BELOW, 0, "store removed pre-cache copy; new value");
      store(b, 64'h0BAD_CAFE_0000_1111);   // line 1 is in L1
      load_expect(b, SRC_L1, 4, "store updated L1 copy");
      do_squash();
    end

    // ---- 7. prefetch buffer ----
    begin
      addr_t g = line_addr(90), h = line_addr(91);
      wait_idle();
      pf_valid = 1; pf_trig_addr = g; pf_addr = h; #1;
      check(pf_ok, "prefetch accepted");
      @(posedge clk); #1; pf_valid = 0;
      load_expect(g, SRC_BELOW, 0, "trigger load");
      repeat (50) @(posedge clk); #1;
      load_expect(h, SRC_BELOW, 14, "prefetched line served at L2 latency");
      nb = n_pb_to_l2;
      commit(g);
      wait_idle();
      check(n_pb_to_l2 == nb + 1, "prefetched line moved to L2 after trigger STC");
      do_squash();                          // drops h from the pre-cache
      load_expect(h, SRC_BELOW, 14, "prefetched line now an L2 hit");
      check(n_l2_hit > 0, "L2 hits seen");
      do_squash();
    end

    // ---- 8. squash of an in-flight load; full pre-cache ----
    begin
      addr_t a = line_addr(100);
      wait_idle();
      ld_valid = 1; ld_addr = a; @(posedge clk); #1; ld_valid = 0;
      repeat (20) @(posedge clk); #1;
      nb = n_squash_kill;
      do_squash();
      check(n_squash_kill == nb + 1, "in-flight load killed");
      wait_idle();
      check(dut.u_pc.occupancy == 0, "killed load left nothing in the pre-cache");
      nb = n_pc_full;
      for (int i = 0; i < 33; i++) load_expect(line_addr(200 + i), SRC_BELOW, 0, "filling pre-cache");
      check(n_pc_full == nb + 1, "33rd line finds the pre-cache full");
      do_squash();
      check(n_squash_clear > 0, "squash cleared lines");
    end

    // ---- 8b. a squash takes only the squashed loads and their lines ----
    begin
      addr_t a;
      ld_seq = 6'd10; load_expect(line_addr(300), SRC_BELOW, 0, "load 10");
      ld_seq = 6'd11; load_expect(line_addr(301), SRC_BELOW, 0, "load 11");
      ld_seq = 6'd12; load_expect(line_addr(302), SRC_BELOW, 0, "load 12");
      ld_seq = 6'd9;  load_expect(line_addr(302) + 8, SRC_PRECACHE, 4, "older load 9 shares line of 12");
      // load 5 (older than the squash) still in flight when loads 11.. go
      a = line_addr(303);
      ld_seq = 6'd5;
      wait_idle();
      ld_valid = 1; ld_addr = a; @(posedge clk); #1; ld_valid = 0;
      repeat (20) @(posedge clk); #1;
      nb = n_squash_kill;
      squash_seq = 6'd11; do_squash();
      check(n_squash_kill == nb, "older in-flight load survives the squash");
      wait_idle();
      check(dut.u_pc.occupancy == 3, "lines of loads 5, 9 and 10 kept");
      ld_seq = 6'd13;
      load_expect(line_addr(300), SRC_PRECACHE, 4, "line of load 10 kept");
      load_expect(line_addr(302), SRC_PRECACHE, 4, "line shared with load 9 kept");
      load_expect(line_addr(303), SRC_PRECACHE, 4, "line of surviving in-flight load kept");
      nb = n_mem_load;
      load_expect(line_addr(301), SRC_BELOW, 0, "line of squashed load 11 gone");
      check(n_mem_load == nb + 1, "squashed line fetched again");
      ld_seq = '0; squash_seq = '0; do_squash();
      check(dut.u_pc.occupancy == 0, "squash from 0 clears the rest");
    end

    // ---- 9. instruction pre-cache ----
    begin
      int released;
      wait_idle();
      // block 0 fetched nb any indirect jump goes straight to the I-cache
      if_fill_valid = 1; if_fill_addr = line_addr(500); if_fill_data = u_mem.ref_line(key_of(line_addr(500)));
      @(posedge clk); #1; if_fill_valid = 0;
      ijump_dec = 1; @(posedge clk); #1; ijump_dec = 0;     // J1
      check(ipc_spec_mode, "speculative fetch after indirect jump");
      for (int i = 1; i <= 3; i++) begin
        if_fill_valid = 1; if_fill_addr = line_addr(500 + i); if_fill_data = u_mem.ref_line(key_of(line_addr(500 + i)));
        @(posedge clk); #1;
      end
      if_fill_valid = 0;
      ijump_dec = 1; @(posedge clk); #1; ijump_dec = 0;     // J2
      for (int i = 4; i <= 5; i++) begin
        if_fill_valid = 1; if_fill_addr = line_addr(500 + i); if_fill_data = u_mem.ref_line(key_of(line_addr(500 + i)));
        @(posedge clk); #1;
      end
      if_fill_valid = 0;
      if_addr = line_addr(502); #1;
      check(if_hit && if_from_ipc, "speculative block served from instruction pre-cache");
      check(if_data == u_mem.ref_line(key_of(line_addr(502))), "instruction block data");
      if_addr = line_addr(500); #1;
      check(if_hit && !if_from_ipc, "non-speculative block in I-cache");
      ijump_commit = 1; @(posedge clk); #1; ijump_commit = 0;   // J1 commits
      released = 0;
      for (int i = 0; i < 5; i++) begin released += dut.u_ipc.ic_valid; @(posedge clk); #1; end
      check(released == 3, $sformatf("J1 commit releases its 3 blocks (got %0d)", released));
      n_ic_release += released;
      if_addr = line_addr(503); #1;
      check(if_hit && !if_from_ipc, "released block now in I-cache");
      if_addr = line_addr(504); #1;
      check(if_hit && if_from_ipc, "block after J2 still speculative");
      mispredict = 1; @(posedge clk); #1; mispredict = 0;    // J2 mispredicted
      if_addr = line_addr(504); #1;
      check(!if_hit, "mispredicted path blocks dropped");
      check(!ipc_spec_mode, "no jump outstanding after clear");
    end

    // ---- 10. TLB pre-cache ----
    begin
      walk_valid = 1; walk_vaddr = 32'h1234_5678; walk_ppn = 20'hABCDE; @(posedge clk); #1; walk_valid = 0;
      walk_valid = 1; walk_vaddr = 32'h2222_1000; walk_ppn = 20'h11111; @(posedge clk); #1; walk_valid = 0;
      tlb_lk_vaddr = 32'h1234_5FFF; #1;
      check(tpc_hit && tpc_ppn == 20'hABCDE, "translation in TLB pre-cache");
      nb2 = n_tlb_wr;
      tcm_valid = 1; tcm_vaddr = 32'h1234_5000; @(posedge clk); #1; tcm_valid = 0;
      check(tlb_wr_valid && tlb_wr_vpn == 20'h12345 && tlb_wr_ppn == 20'hABCDE, "committed translation to TLB");
      do_squash();
      tlb_lk_vaddr = 32'h2222_1000; #1;
      check(!tpc_hit, "squashed translation dropped");
      @(posedge clk); #1;
      check(n_tlb_wr == nb2 + 1, "exactly one TLB write");
    end

    // ---- random mix of loads, commits, stores and squashes ----
    begin
      // in-order load queue model: commits take the oldest load, a squash
      // starts at the oldest uncommitted load
      addr_t inflight[$];
      seq_t  inflight_seq[$];
      seq_t  next_seq;
      next_seq = '0;
      for (int it = 0; it < 400; it++) begin
        addr_t a;
        int op;
        a = line_addr($urandom_range(63) * 37 % 2048) + addr_t'($urandom_range(7) * 8);
        op = $urandom_range(9);
        if (op < 5 && inflight.size() >= 24) op = 5;
        if (op < 5) begin
          ld_seq = next_seq; next_seq++;
          load(a, s, lat, ok); check(ok, "random load answered");
          inflight.push_back(a); inflight_seq.push_back(ld_seq);
        end
        else if (op < 8 && inflight.size() > 0) begin
          commit(inflight.pop_front()); void'(inflight_seq.pop_front());
        end
        else if (op == 8) store(a, {$urandom, $urandom});
        else begin
          squash_seq = inflight.size() > 0 ? inflight_seq[0] : next_seq;
          do_squash(); inflight.delete(); inflight_seq.delete();
        end
      end
      squash_seq = next_seq - 6'd32; do_squash();
      check(dut.u_pc.occupancy == 0, "final squash empties the pre-cache");
    end

    // ---- every mechanism seen ----
    check(n_pc_hit > 0,       "pre-cache hit seen");
    check(n_l1_hit > 0,       "L1 hit seen");
    check(n_l2_hit > 0,       "L2 hit seen");
    check(n_pb_hit > 0,       "prefetch-buffer hit seen");
    check(n_mem_load > 0,     "load below L2 seen");
    check(n_pc_full > 0,      "full pre-cache seen");
    check(n_stc_done > 0,     "completed STC seen");
    check(n_stc_abort > 0,    "aborted STC seen");
    check(n_dir_inv > 0,      "directory invalidation seen");
    check(n_l2_evict > 0,     "L2 eviction seen");
    check(n_squash_kill > 0,  "squash of in-flight load seen");
    check(n_squash_clear > 0, "squash clear seen");
    check(n_pb_to_l2 > 0,     "prefetch transfer seen");
    check(n_store > 0,        "store seen");
    check(n_ic_release > 0,   "instruction block release seen");
    check(n_tlb_wr > 0,       "TLB write seen");
    check(u_mem.n_coh_updates > 0, "coherence update at STC seen");
    $display("events: pc_hit=%0d l1_hit=%0d l2_hit=%0d pb_hit=%0d mem_load=%0d pc_full=%0d stc=%0d/%0d abort=%0d dir_inv=%0d l2_evict=%0d kill=%0d clear=%0d pb_to_l2=%0d store=%0d ic_rel=%0d tlb_wr=%0d",
      n_pc_hit, n_l1_hit, n_l2_hit, n_pb_hit, n_mem_load, n_pc_full, n_stc_done, n_stc_start, n_stc_abort,
      n_dir_inv, n_l2_evict, n_squash_kill, n_squash_clear, n_pb_to_l2, n_store, n_ic_release, n_tlb_wr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
