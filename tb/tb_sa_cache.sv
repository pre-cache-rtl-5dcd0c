// Self-checking test of sa_cache with the L1 data cache geometry
// (128 sets x 4 ways, 64-byte lines). A reference model keeps, per set, the
// resident lines in LRU order; random writes (fills/STCs), touches, word
// stores, invalidations and lookups are checked, including which line each
// fill displaces. A directed step fills five lines into one set and checks
// that the least recently used one is evicted.
module tb_sa_cache;
  localparam int SETS = 128, WAYS = 4, KW = 26, LW = 512;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [KW-1:0] rd_key, touch_key, wr_key, ev_key, st_key, inv_key;
  logic ready, rd_hit, touch_valid, wr_valid, ev_valid, st_valid, inv_valid, inv_hit;
  logic [LW-1:0] rd_data, wr_data;
  logic [2:0] st_widx;
  logic [63:0] st_word;

  sa_cache dut (.clk, .rst_n, .ready, .rd_key, .rd_hit, .rd_data, .touch_valid, .touch_key,
    .wr_valid, .wr_key, .wr_data, .ev_valid, .ev_key, .st_valid, .st_key, .st_widx, .st_word,
    .inv_valid, .inv_key, .inv_hit);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // model: per set a queue of keys, index 0 = most recently used
  logic [KW-1:0] lru [SETS][$];
  logic [LW-1:0] mdata [logic [KW-1:0]];
  function automatic int findq(logic [KW-1:0] k);
    int s = int'(k[6:0]);
    foreach (lru[s][i]) if (lru[s][i] == k) return i;
    return -1;
  endfunction
  function automatic logic [LW-1:0] pat(logic [KW-1:0] k, int salt);
    logic [LW-1:0] d;
    for (int w = 0; w < LW/32; w++) d[w*32 +: 32] = 32'(k) * 32'd2654435761 + 32'(w + salt);
    return d;
  endfunction
  task automatic idle();
    touch_valid = 0; wr_valid = 0; st_valid = 0; inv_valid = 0;
  endtask
  task automatic lookup(logic [KW-1:0] k);
    rd_key = k; #1;
    check(rd_hit == (findq(k) >= 0), "rd_hit");
    if (findq(k) >= 0) check(rd_data == mdata[k], "rd_data");
  endtask
  task automatic write(logic [KW-1:0] k, int salt);
    int s = int'(k[6:0]);
    int i = findq(k);
    idle(); wr_valid = 1; wr_key = k; wr_data = pat(k, salt); #1;
    if (i >= 0) begin
      check(!ev_valid, "no eviction on rewrite");
      lru[s].delete(i);
    end else if (lru[s].size() == WAYS) begin
      check(ev_valid && ev_key == lru[s][WAYS-1], "evicts LRU line");
      void'(lru[s].pop_back());
    end else check(!ev_valid, "no eviction with free way");
    lru[s].push_front(k); mdata[k] = pat(k, salt);
    @(posedge clk); #1; idle();
  endtask
  task automatic touch(logic [KW-1:0] k);
    int s = int'(k[6:0]);
    int i = findq(k);
    idle(); touch_valid = 1; touch_key = k;
    @(posedge clk); #1; idle();
    if (i >= 0) begin lru[s].delete(i); lru[s].push_front(k); end
  endtask
  task automatic store(logic [KW-1:0] k, int w, logic [63:0] v);
    idle(); st_valid = 1; st_key = k; st_widx = 3'(w); st_word = v;
    @(posedge clk); #1; idle();
    if (findq(k) >= 0) begin
      logic [LW-1:0] d = mdata[k]; d[w*64 +: 64] = v; mdata[k] = d;
    end
  endtask
  task automatic inval(logic [KW-1:0] k);
    int s = int'(k[6:0]);
    int i = findq(k);
    idle(); inv_valid = 1; inv_key = k; #1;
    check(inv_hit == (i >= 0), "inv_hit");
    @(posedge clk); #1; idle();
    if (i >= 0) lru[s].delete(i);
  endtask

  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    idle(); rd_key = '0; touch_key = '0; wr_key = '0; st_key = '0; inv_key = '0;
    wr_data = '0; st_widx = '0; st_word = '0;
    repeat (2) @(posedge clk); #1 rst_n = 1;
    // the arrays clear one set per cycle: exactly SETS cycles of not ready
    check(!ready, "not ready right after reset");
    repeat (SETS - 1) @(posedge clk);
    #1 check(!ready, "still clearing one cycle before the end");
    @(posedge clk); #1 check(ready, "ready after SETS cycles");
    // five lines into set 3; the first one, untouched since, is the victim
    for (int t = 0; t < 4; t++) write(KW'(t * SETS + 3), 0);
    touch(KW'(0 * SETS + 3));
    write(KW'(4 * SETS + 3), 0);      // evicts tag 1 (LRU after the touch)
    lookup(KW'(1 * SETS + 3)); check(!rd_hit, "tag 1 evicted");
    lookup(KW'(0 * SETS + 3)); check(rd_hit, "touched line kept");
    for (int it = 0; it < 6000; it++) begin
      // few sets, few tags: plenty of conflicts
      logic [KW-1:0] k;
      k = KW'($urandom_range(9) * SETS + $urandom_range(3));
      case ($urandom_range(6))
        0, 1: write(k, it);
        2:    touch(k);
        3:    store(k, $urandom_range(7), {$urandom, $urandom});
        4:    inval(k);
        default: lookup(k);
      endcase
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
