// Self-checking test of prefetch_buffer. Directed part follows the paper's
// prefetch example: load D1 triggers prefetches of D2 and D3; their data is
// held until the STC of D1 passes, then both are offered to the L2; a
// prefetch whose data arrives after its trigger committed is offered at
// once; a squash drops entries whose trigger never committed. A random part
// compares every output against a model of the entries.
module tb_prefetch_buffer;
  localparam int N = 16, KW = 26, LW = 512, KEYS = 40;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic pf_valid, pf_ok, fill_valid, stc_valid, out_valid, out_ready, lk_hit, squash;
  logic [KW-1:0] pf_trig_key, pf_key, fill_key, stc_key, out_key, lk_key;
  logic [LW-1:0] fill_data, out_data, lk_data;

  prefetch_buffer dut (.clk, .rst_n, .pf_valid, .pf_trig_key, .pf_key, .pf_ok, .fill_valid,
    .fill_key, .fill_data, .stc_valid, .stc_key, .out_valid, .out_key, .out_data, .out_ready,
    .lk_key, .lk_hit, .lk_data, .squash);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // model indexed by prefetched line
  bit m_v[KEYS], m_h[KEYS], m_c[KEYS];
  int m_t[KEYS];
  logic [LW-1:0] m_d[KEYS];
  function automatic int cnt();
    int n = 0; foreach (m_v[k]) n += m_v[k]; return n;
  endfunction
  function automatic logic [LW-1:0] pat(int k, int s);
    return {16{32'(k * 1009 + s)}};
  endfunction
  task automatic idle();
    pf_valid = 0; fill_valid = 0; stc_valid = 0; out_ready = 0; squash = 0;
  endtask
  task automatic pf(int t, int k);
    idle(); pf_valid = 1; pf_trig_key = KW'(t); pf_key = KW'(k); #1;
    check(pf_ok == (!m_v[k] && cnt() < N), "pf_ok");
    if (pf_ok) begin m_v[k] = 1; m_h[k] = 0; m_c[k] = 0; m_t[k] = t; end
    @(posedge clk); #1; idle();
  endtask
  task automatic fill(int k, int s);
    idle(); fill_valid = 1; fill_key = KW'(k); fill_data = pat(k, s);
    @(posedge clk); #1; idle();
    if (m_v[k] && !m_h[k]) begin m_h[k] = 1; m_d[k] = pat(k, s); end
  endtask
  task automatic stc(int t);
    idle(); stc_valid = 1; stc_key = KW'(t);
    @(posedge clk); #1; idle();
    foreach (m_v[k]) if (m_v[k] && m_t[k] == t) m_c[k] = 1;
  endtask
  task automatic look(int k);
    bit any = 0;
    lk_key = KW'(k); #1;
    check(lk_hit == (m_v[k] && m_h[k]), "lk_hit");
    if (lk_hit) check(lk_data == m_d[k], "lk_data");
    foreach (m_v[j]) any |= m_v[j] && m_h[j] && m_c[j];
    check(out_valid == any, "out_valid");
  endtask
  // accept one transfer to the cache; returns its key or -1
  task automatic take(output int got);
    got = -1;
    idle(); out_ready = 1; #1;
    if (out_valid) begin
      int k = int'(out_key);
      check(k < KEYS && m_v[k] && m_h[k] && m_c[k], "out entry committed with data");
      if (k < KEYS) check(out_data == m_d[k], "out_data");
      got = k;
      if (k < KEYS) m_v[k] = 0;
    end
    @(posedge clk); #1; idle();
  endtask
  task automatic do_squash();
    idle(); squash = 1; @(posedge clk); #1; idle();
    foreach (m_v[k]) if (!m_c[k]) m_v[k] = 0;
  endtask

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int g1, g2, g3;
    idle(); pf_trig_key = '0; pf_key = '0; fill_key = '0; stc_key = '0; lk_key = '0; fill_data = '0;
    foreach (m_v[k]) begin m_v[k] = 0; m_h[k] = 0; m_c[k] = 0; m_t[k] = 0; end
    repeat (2) @(posedge clk); #1 rst_n = 1;
    // D1 = 1 triggers D2 = 2 and D3 = 3
    pf(1, 2); pf(1, 3); fill(2, 0); fill(3, 0);
    look(2); check(lk_hit && !out_valid, "prefetched data held before commit");
    stc(1);
    take(g1); take(g2); take(g3);
    check(g1 >= 0 && g2 >= 0 && g1 != g2 && g3 < 0, "D2 and D3 moved to L2 after STC of D1");
    // late data after commit goes straight out
    pf(4, 5); stc(4); look(5); check(!out_valid, "no data yet");
    fill(5, 1); look(5); check(out_valid && out_key == 5, "late data sent directly");
    take(g1);
    // squash drops uncommitted
    pf(6, 7); fill(7, 0); do_squash(); look(7); check(!lk_hit, "squash clears");
    for (int it = 0; it < 5000; it++) begin
      int k;
      k = $urandom_range(KEYS-1);
      case ($urandom_range(9))
        0, 1: pf($urandom_range(9), k);
        2, 3: fill(k, it);
        4:    stc($urandom_range(9));
        5:    take(g1);
        6:    if ($urandom_range(5) == 0) do_squash(); else look(k);
        default: look(k);
      endcase
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
