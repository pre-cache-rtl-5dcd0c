// ipre_cache: instruction pre-cache that keeps blocks fetched down a
// speculated indirect-jump path out of the instruction cache.
//
// Once an indirect jump has been decoded (ijump_dec) and until it is resolved,
// instruction blocks that miss the I-cache are filled here (fill_*) instead
// of into the I-cache; spec_mode tells the fetch unit which way to fill.
// Blocks are kept in fetch order in a circular array of BLOCKS entries and
// can be fetched from here (f_*). A counter counts the blocks filled since
// the youngest decoded indirect jump. When another indirect jump is decoded,
// the counter value (the size of the previous jump's basic block, in blocks)
// is pushed into a circular queue of QDEPTH counts and the counter restarts.
// The head index points at the oldest block not yet released. When the
// oldest outstanding indirect jump commits (ijump_commit), the next count is
// popped (or, if its basic block is still the youngest one, the live
// counter is taken), and that many blocks are copied from the head to the
// I-cache over ic_* one per accepted cycle, advancing the head index. A
// mispredicted jump (mispredict) clears the blocks, the queue and the counter.
//
// Timing: f_* is combinational; ic_* is a valid/ready handshake; other inputs
// are single-cycle pulses sampled at the clock edge. Synchronous active-low
// reset empties everything.
//
// From the paper: counter in decode, circular queue of 8-bit counts (448 of
// them), head index advanced by the popped count, bulk release on commit,
// clear on misprediction, 28-block capacity. This design's choices: blocks
// filled while no indirect jump is outstanding are not speculative with
// respect to indirect jumps and bypass the buffer; a commit with no jump
// outstanding (after a clear) is ignored; a full buffer holds fetch
// (fill_ready low); mispredict clears all blocks, as the paper states.
module ipre_cache #(
  parameter int unsigned BLOCKS = 28,
  parameter int unsigned QDEPTH = 448,
  parameter int unsigned CNT_W  = 8,
  parameter int unsigned KEY_W  = precache_pkg::KEY_W,
  parameter int unsigned LINE_W = precache_pkg::LINE_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [KEY_W-1:0]  f_key,
  output logic              f_hit,
  output logic [LINE_W-1:0] f_data,
  output logic              spec_mode,
  input  logic              fill_valid,
  input  logic [KEY_W-1:0]  fill_key,
  input  logic [LINE_W-1:0] fill_data,
  output logic              fill_ready,
  input  logic              ijump_dec,
  input  logic              ijump_commit,
  input  logic              mispredict,
  output logic              ic_valid,
  output logic [KEY_W-1:0]  ic_key,
  output logic [LINE_W-1:0] ic_data,
  input  logic              ic_ready,
  output logic [$clog2(BLOCKS+1)-1:0] occupancy
);

  localparam int unsigned BI_W = $clog2(BLOCKS);
  localparam int unsigned QI_W = $clog2(QDEPTH);
  localparam int unsigned OJ_W = $clog2(QDEPTH + 2);
  localparam int unsigned XL_W = $clog2(BLOCKS + 1) + 1;

  logic [KEY_W-1:0]  bkey_q  [BLOCKS];
  logic [LINE_W-1:0] bdata_q [BLOCKS];
  logic [BI_W-1:0]   head_q, tail_q;
  logic [$clog2(BLOCKS+1)-1:0] count_q;
  logic [CNT_W-1:0]  cq_q [QDEPTH];
  logic [QI_W-1:0]   qhead_q, qtail_q;
  logic [QI_W:0]     qcount_q;
  logic [CNT_W-1:0]  cur_q;
  logic [OJ_W-1:0]   outst_q;   // indirect jumps decoded, not yet committed
  logic [XL_W-1:0]   xfer_q;    // blocks still to copy to the I-cache

  function automatic logic [BI_W-1:0] binc(logic [BI_W-1:0] i);
    return (i == BI_W'(BLOCKS-1)) ? '0 : i + 1'b1;
  endfunction
  function automatic logic [QI_W-1:0] qinc(logic [QI_W-1:0] i);
    return (i == QI_W'(QDEPTH-1)) ? '0 : i + 1'b1;
  endfunction

  // Lookup over the occupied part of the circular array.
  always_comb begin
    logic [BI_W-1:0] i;
    f_hit = 1'b0; f_data = bdata_q[0];
    i = head_q;
    for (int n = 0; n < BLOCKS; n++) begin
      if (n < int'(count_q) && bkey_q[i] == f_key) begin f_hit = 1'b1; f_data = bdata_q[i]; end
      i = binc(i);
    end
  end

  assign spec_mode  = outst_q != '0;
  assign fill_ready = int'(count_q) < BLOCKS;
  assign ic_valid   = xfer_q != '0 && count_q != '0;
  assign ic_key     = bkey_q[head_q];
  assign ic_data    = bdata_q[head_q];
  assign occupancy  = count_q;

  always_ff @(posedge clk) begin
    if (!rst_n || mispredict) begin
      head_q <= '0; tail_q <= '0; count_q <= '0;
      qhead_q <= '0; qtail_q <= '0; qcount_q <= '0;
      cur_q <= '0; outst_q <= '0; xfer_q <= '0;
    end else begin
      logic [OJ_W-1:0] oj;
      logic [CNT_W-1:0] cur;
      logic [XL_W-1:0] xl;
      logic [$clog2(BLOCKS+1)-1:0] cnt;
      logic [QI_W:0] qc;
      logic [BI_W-1:0] hd;
      logic [QI_W-1:0] qh, qt;
      oj = outst_q; cur = cur_q; xl = xfer_q; cnt = count_q; qc = qcount_q;
      hd = head_q; qh = qhead_q; qt = qtail_q;
      // copy one released block to the I-cache
      if (ic_valid && ic_ready) begin
        hd = binc(hd); cnt = cnt - 1'b1; xl = xl - 1'b1;
      end
      // oldest outstanding indirect jump commits: release its basic block
      if (ijump_commit && oj != '0) begin
        if (qc != '0) begin
          xl = xl + XL_W'(cq_q[qh]);
          qh = qinc(qh); qc = qc - 1'b1;
        end else begin
          xl = xl + XL_W'(cur);
          cur = '0;
        end
        oj = oj - 1'b1;
      end
      // a new indirect jump closes the previous basic block
      if (ijump_dec) begin
        if (oj != '0 && int'(qc) < QDEPTH) begin
          cq_q[qt] <= cur;
          qt = qinc(qt); qc = qc + 1'b1;
        end
        cur = '0;
        oj = oj + 1'b1;
      end
      // speculative fill
      if (fill_valid && fill_ready && spec_mode) begin
        bkey_q[tail_q]  <= fill_key;
        bdata_q[tail_q] <= fill_data;
        tail_q <= binc(tail_q);
        cnt = cnt + 1'b1;
        cur = cur + 1'b1;
      end
      outst_q <= oj; cur_q <= cur; xfer_q <= xl; count_q <= cnt; qcount_q <= qc;
      head_q <= hd; qhead_q <= qh; qtail_q <= qt;
    end
  end

endmodule
