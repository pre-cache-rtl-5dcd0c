// Self-checking test of tlb_pre_cache: translations from page walks are
// visible to lookups but reach the TLB only when an instruction using the
// page commits (one cycle later, once per page); a squash removes
// translations of pages no committed instruction used. Random walks,
// commits, squashes and lookups are compared with a model keyed by page.
module tb_tlb_pre_cache;
  localparam int PAGES = 48;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [31:0] lk_vaddr, walk_vaddr, cm_vaddr;
  logic lk_hit, walk_valid, cm_valid, tlb_wr_valid, squash;
  logic [19:0] lk_ppn, walk_ppn, tlb_wr_vpn, tlb_wr_ppn;

  tlb_pre_cache dut (.clk, .rst_n, .lk_vaddr, .lk_hit, .lk_ppn, .walk_valid, .walk_vaddr,
    .walk_ppn, .cm_valid, .cm_vaddr, .tlb_wr_valid, .tlb_wr_vpn, .tlb_wr_ppn, .squash);

  int checks = 0, failures = 0, to_tlb = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask
  bit m_v[PAGES];
  logic [19:0] m_p[PAGES];
  function automatic int cnt();
    int n = 0; foreach (m_v[k]) n += m_v[k]; return n;
  endfunction
  function automatic logic [31:0] va(int page);
    return {20'(page + 20'h40000), 12'($urandom_range(4095))};
  endfunction
  function automatic logic [19:0] ppn_of(int page, int salt);
    return 20'(page * 37 + salt);
  endfunction

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    walk_valid = 0; cm_valid = 0; squash = 0; lk_vaddr = '0; walk_vaddr = '0; cm_vaddr = '0; walk_ppn = '0;
    foreach (m_v[k]) m_v[k] = 0;
    repeat (2) @(posedge clk); #1 rst_n = 1;
    for (int it = 0; it < 5000; it++) begin
      int pg, op;
      bit exp_wr;
      logic [19:0] exp_ppn;
      pg = $urandom_range(PAGES-1);
      op = $urandom_range(9);
      walk_valid = 0; cm_valid = 0; squash = 0; exp_wr = 0; exp_ppn = '0;
      lk_vaddr = va(pg); #1;
      check(lk_hit == m_v[pg], "lookup hit");
      if (lk_hit) check(lk_ppn == m_p[pg], "lookup ppn");
      if (op < 4) begin
        walk_valid = 1; walk_vaddr = va(pg); walk_ppn = ppn_of(pg, it);
        if (!m_v[pg] && cnt() < 32) begin m_v[pg] = 1; m_p[pg] = walk_ppn; end
      end else if (op < 8) begin
        cm_valid = 1; cm_vaddr = va(pg);
        exp_wr = m_v[pg]; exp_ppn = m_p[pg];
      end else if (op == 8 && $urandom_range(3) == 0) begin
        squash = 1;
        foreach (m_v[k]) m_v[k] = 0;
      end
      @(posedge clk); #1;
      walk_valid = 0; cm_valid = 0; squash = 0;
      check(tlb_wr_valid == exp_wr, "TLB written only on commit of a held page");
      if (exp_wr) begin
        to_tlb++;
        check(tlb_wr_vpn == 20'(pg + 20'h40000) && tlb_wr_ppn == exp_ppn, "TLB write contents");
        m_v[pg] = 0;
        @(posedge clk); #1;   // entry is freed as the TLB write happens
        check(!tlb_wr_valid, "single TLB write");
      end
    end
    check(to_tlb > 100, "translations reached the TLB");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
