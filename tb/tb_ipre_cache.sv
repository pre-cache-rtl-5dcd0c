// Self-checking test of ipre_cache. The reference model tags each block
// filled while an indirect jump is outstanding with the number of the
// youngest decoded jump; when the oldest outstanding jump commits, exactly
// the blocks tagged with it must be copied to the I-cache, in fetch order,
// one per accepted cycle. A misprediction must drop every block. Random
// fills, decodes, commits, mispredictions and I-cache back-pressure are
// applied; lookups, spec_mode, fill_ready and the copy stream are checked.
module tb_ipre_cache;
  localparam int B = 28, KW = 26, LW = 512;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [KW-1:0] f_key, fill_key, ic_key;
  logic f_hit, spec_mode, fill_valid, fill_ready, ijump_dec, ijump_commit, mispredict, ic_valid, ic_ready;
  logic [LW-1:0] f_data, fill_data, ic_data;
  logic [4:0] occ;

  ipre_cache dut (.clk, .rst_n, .f_key, .f_hit, .f_data, .spec_mode, .fill_valid, .fill_key,
    .fill_data, .fill_ready, .ijump_dec, .ijump_commit, .mispredict, .ic_valid, .ic_key,
    .ic_data, .ic_ready, .occupancy(occ));

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  typedef struct { logic [KW-1:0] key; int tag; } blk_t;
  blk_t held[$];          // blocks in the buffer, oldest first
  int   oldest = 0;       // number of the oldest outstanding jump
  int   youngest = -1;    // number of the youngest decoded jump
  int   release_n = 0;    // blocks released but not yet copied
  int   copied = 0, released_total = 0;
  logic [KW-1:0] next_key = 100;

  function automatic logic [LW-1:0] pat(logic [KW-1:0] k);
    return {16{32'(k) ^ 32'h5a5a_0000}};
  endfunction

  initial begin
    #5000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    fill_valid = 0; ijump_dec = 0; ijump_commit = 0; mispredict = 0; ic_ready = 0;
    f_key = '0; fill_key = '0; fill_data = '0;
    repeat (2) @(posedge clk); #1 rst_n = 1;
    for (int cyc = 0; cyc < 20000; cyc++) begin
      bit outstanding, took, room;
      outstanding = youngest >= oldest;
      // drive
      fill_valid = outstanding && $urandom_range(2) == 0;
      fill_key = next_key; fill_data = pat(next_key);
      ijump_dec = $urandom_range(6) == 0;
      ijump_commit = outstanding && $urandom_range(5) == 0;
      mispredict = $urandom_range(150) == 0;
      ic_ready = $urandom_range(3) != 0;
      f_key = held.size() > 0 ? held[$urandom_range(held.size()-1)].key : KW'(7);
      #1;
      // combinational checks
      check(spec_mode == outstanding, $sformatf("spec_mode dut=%0d model=%0d y=%0d o=%0d", spec_mode, outstanding, youngest, oldest));
      check(fill_ready == (held.size() < B), "fill_ready");
      check(f_hit == (held.size() > 0), "lookup of held block");
      if (f_hit) check(f_data == pat(f_key), "lookup data");
      check(ic_valid == (release_n > 0), "ic_valid when blocks released");
      if (ic_valid && release_n > 0) begin
        check(ic_key == held[0].key && ic_data == pat(held[0].key), "copy order");
      end
      took = ic_valid && ic_ready;
      room = fill_ready;
      @(posedge clk); #1;
      // update model in the same order as the design
      if (mispredict) begin
        held.delete(); release_n = 0; oldest = youngest + 1;
        next_key++;
        continue;
      end
      if (took && release_n > 0) begin
        void'(held.pop_front()); release_n--; copied++;
      end
      if (ijump_commit && outstanding) begin
        int n;
        n = 0;
        foreach (held[i]) if (held[i].tag == oldest) n++;
        release_n += n; released_total += n;
        oldest++;
      end
      if (ijump_dec) youngest++;
      if (fill_valid && room && outstanding) begin
        held.push_back('{key: next_key, tag: youngest});
        next_key++;
      end
      check(int'(occ) == held.size(), $sformatf("occupancy dut=%0d model=%0d rel=%0d dec=%0d cm=%0d fill=%0d mp=%0d", occ, held.size(), release_n, ijump_dec, ijump_commit, fill_valid, mispredict));
    end
    check(copied > 100, "blocks were released to the I-cache");
    $display("released %0d copied %0d", released_total, copied);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
