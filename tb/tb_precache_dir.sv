// Self-checking test of precache_dir against a model that holds, per
// pre-cache entry, the line address tracked for it: random inserts into
// given entries, STC removals, probes (evictions / invalidations, which must
// report a hit exactly when the address is held and then drop it) and
// squash clears of random entry masks.
module tb_precache_dir;
  localparam int N = 32, KW = 26, KEYS = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic ins_valid, rm_valid, probe_valid, probe_hit;
  logic [4:0] ins_idx;
  logic [N-1:0] clear_mask;
  logic [KW-1:0] ins_key, rm_key, probe_key;

  precache_dir dut (.clk, .rst_n, .ins_valid, .ins_idx, .ins_key, .rm_valid, .rm_key,
    .probe_valid, .probe_key, .probe_hit, .clear_mask);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask
  // model: slot i holds key mk[i] when mv[i]; keys are unique among slots,
  // as they are in the pre-cache
  bit mv [N];
  int mk [N];
  function automatic bit held(int k);
    foreach (mv[i]) if (mv[i] && mk[i] == k) return 1;
    return 0;
  endfunction
  function automatic void drop(int k);
    foreach (mv[i]) if (mv[i] && mk[i] == k) mv[i] = 0;
  endfunction
  task automatic idle();
    ins_valid = 0; rm_valid = 0; probe_valid = 0; clear_mask = '0;
  endtask
  task automatic probe(int k);
    idle(); probe_valid = 1; probe_key = KW'(k); #1;
    check(probe_hit == held(k), $sformatf("probe %0d", k));
    @(posedge clk); #1; idle(); drop(k);
  endtask
  task automatic insert(int slot, int k);
    idle(); ins_valid = 1; ins_idx = 5'(slot); ins_key = KW'(k);
    @(posedge clk); #1; idle(); mv[slot] = 1; mk[slot] = k;
  endtask

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    idle(); ins_idx = '0; ins_key = '0; rm_key = '0; probe_key = '0;
    foreach (mv[i]) begin mv[i] = 0; mk[i] = 0; end
    repeat (2) @(posedge clk); #1 rst_n = 1;
    // line loaded from L2 into the pre-cache, then evicted from L2
    insert(3, 7);
    probe(7);
    probe(7);
    // squash clearing slots 0 and 2 keeps the line in slot 1 (an STC or an
    // older load)
    for (int k = 8; k <= 10; k++) insert(k - 8, k);
    idle(); clear_mask = 32'b101; @(posedge clk); #1; idle();
    mv[0] = 0; mv[2] = 0;
    probe(8); probe(9); probe(10);
    for (int it = 0; it < 3000; it++) begin
      int k, slot;
      k = $urandom_range(KEYS-1);
      slot = $urandom_range(N-1);
      idle();
      case ($urandom_range(5))
        0, 1: if (!held(k)) insert(slot, k);
        2: begin rm_valid = 1; rm_key = KW'(k); @(posedge clk); #1; drop(k); end
        3, 4: probe(k);
        5: begin
          logic [N-1:0] m;
          m = {$urandom, $urandom};
          if ($urandom_range(3) == 0) m = '1;
          clear_mask = m; @(posedge clk); #1; idle();
          foreach (mv[i]) if (m[i]) mv[i] = 0;
        end
      endcase
    end
    for (int k = 0; k < KEYS; k++) probe(k);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
