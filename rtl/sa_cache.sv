// sa_cache: set-associative cache array with true-LRU replacement.
//
// Used for the private L1 data cache (32 KB, 4-way), the L1 instruction
// cache (32 KB, 4-way) and the private L2 (2 MB, 8-way), all with 64-byte
// lines. The array only stores and finds lines; the sequencing around it
// (latency, pre-cache, STC) is done by the caller. Lookup (rd_*) is
// combinational and has no side effect; touch_* marks a line most recently
// used. A line write (wr_*) updates a present line or allocates the invalid
// or least recently used way of its set, and reports in the same cycle the
// valid line it displaces (ev_*), so that the caller can keep inclusion and
// probe the pre-cache directory. st_* writes one 64-bit word of a present
// line (write-through store). inv_* drops a line. One operation is applied
// per cycle, in the priority inv, wr, st, touch; the others are ignored.
//
// Each set keeps a valid vector, a tag per way and a WAY_W-bit age per way
// (0 = most recently used, WAYS-1 = least). All state lives in arrays that
// are read by set index and written at one set per cycle, so that they map
// onto RAMs. After reset the arrays are initialised one set per cycle
// (ready low for SETS cycles): valid bits cleared, ages set to 0..WAYS-1.
//
// Timing: results are combinational, state changes at the next clock edge.
// Reset is synchronous and active low.
//
// From the paper: sizes, associativity, line size, LRU replacement. This
// design's choices: one port (the paper's caches have 2 and 4 ports), no
// dirty state (stores write through), physical line address as tag, the
// set-by-set initialisation after reset.
module sa_cache #(
  parameter int unsigned SETS   = 128,
  parameter int unsigned WAYS   = 4,
  parameter int unsigned KEY_W  = precache_pkg::KEY_W,
  parameter int unsigned LINE_W = precache_pkg::LINE_W,
  localparam int unsigned WORD_W = 64,
  localparam int unsigned WIDX_W = $clog2(LINE_W / WORD_W),
  localparam int unsigned SET_W  = $clog2(SETS),
  localparam int unsigned WAY_W  = (WAYS > 1) ? $clog2(WAYS) : 1,
  localparam int unsigned TAG_W  = KEY_W - SET_W
) (
  input  logic              clk,
  input  logic              rst_n,
  output logic              ready,
  input  logic [KEY_W-1:0]  rd_key,
  output logic              rd_hit,
  output logic [LINE_W-1:0] rd_data,
  input  logic              touch_valid,
  input  logic [KEY_W-1:0]  touch_key,
  input  logic              wr_valid,
  input  logic [KEY_W-1:0]  wr_key,
  input  logic [LINE_W-1:0] wr_data,
  output logic              ev_valid,
  output logic [KEY_W-1:0]  ev_key,
  input  logic              st_valid,
  input  logic [KEY_W-1:0]  st_key,
  input  logic [WIDX_W-1:0] st_widx,
  input  logic [WORD_W-1:0] st_word,
  input  logic              inv_valid,
  input  logic [KEY_W-1:0]  inv_key,
  output logic              inv_hit
);

  typedef logic [WAYS-1:0]            valid_row_t;
  typedef logic [WAYS-1:0][TAG_W-1:0] tag_row_t;
  typedef logic [WAYS-1:0][WAY_W-1:0] age_row_t;

  valid_row_t        valid_m [SETS];
  tag_row_t          tag_m   [SETS];
  age_row_t          age_m   [SETS];
  logic [LINE_W-1:0] data_m  [SETS][WAYS];

  logic             init_q;
  logic [SET_W-1:0] init_idx_q;

  function automatic logic [SET_W-1:0] set_of(logic [KEY_W-1:0] k);
    return k[SET_W-1:0];
  endfunction
  function automatic logic [TAG_W-1:0] tag_of(logic [KEY_W-1:0] k);
    return k[KEY_W-1:SET_W];
  endfunction
  // Way holding key k, with a hit flag in the top bit.
  function automatic logic [WAY_W:0] find(valid_row_t v, tag_row_t t, logic [KEY_W-1:0] k);
    logic [WAY_W:0] r;
    r = '0;
    for (int w = 0; w < WAYS; w++)
      if (v[w] && t[w] == tag_of(k)) r = {1'b1, WAY_W'(w)};
    return r;
  endfunction
  // Ages after way w is used.
  function automatic age_row_t mru(age_row_t a, logic [WAY_W-1:0] w);
    age_row_t n;
    for (int i = 0; i < WAYS; i++) n[i] = (a[i] < a[w]) ? a[i] + 1'b1 : a[i];
    n[w] = '0;
    return n;
  endfunction

  // the one operation of this cycle
  logic [KEY_W-1:0] op_key;
  logic             op_inv, op_wr, op_st, op_touch;
  valid_row_t       v_row, v_new;
  tag_row_t         t_row, t_new;
  age_row_t         a_row, a_new;
  logic [WAY_W:0]   op_f, rd_f;
  logic [WAY_W-1:0] victim, op_way;
  logic             victim_valid, meta_we, data_we;
  logic [LINE_W-1:0] data_new;

  assign ready    = !init_q;
  assign op_inv   = ready && inv_valid;
  assign op_wr    = ready && !inv_valid && wr_valid;
  assign op_st    = ready && !inv_valid && !wr_valid && st_valid;
  assign op_touch = ready && !inv_valid && !wr_valid && !st_valid && touch_valid;

  always_comb begin
    op_key = op_inv ? inv_key : op_wr ? wr_key : op_st ? st_key : touch_key;
    v_row  = valid_m[set_of(op_key)];
    t_row  = tag_m[set_of(op_key)];
    a_row  = age_m[set_of(op_key)];
    op_f   = find(v_row, t_row, op_key);
    // victim: first invalid way, else the least recently used
    victim = '0; victim_valid = 1'b1;
    for (int w = WAYS-1; w >= 0; w--)
      if (a_row[w] == WAY_W'(WAYS-1)) victim = WAY_W'(w);
    for (int w = WAYS-1; w >= 0; w--)
      if (!v_row[w]) begin victim = WAY_W'(w); victim_valid = 1'b0; end
    op_way = (op_wr && !op_f[WAY_W]) ? victim : op_f[WAY_W-1:0];
    v_new = v_row; t_new = t_row; a_new = a_row;
    meta_we = 1'b0; data_we = 1'b0;
    data_new = wr_data;
    if (op_inv && op_f[WAY_W]) begin
      v_new[op_way] = 1'b0; meta_we = 1'b1;
    end
    if (op_wr) begin
      v_new[op_way] = 1'b1; t_new[op_way] = tag_of(wr_key);
      a_new = mru(a_row, op_way);
      meta_we = 1'b1; data_we = 1'b1;
    end
    if (op_st && op_f[WAY_W]) begin
      data_new = data_m[set_of(st_key)][op_way];
      data_new[st_widx*WORD_W +: WORD_W] = st_word;
      data_we = 1'b1;
    end
    if (op_touch && op_f[WAY_W]) begin
      a_new = mru(a_row, op_way); meta_we = 1'b1;
    end
    ev_valid = op_wr && !op_f[WAY_W] && victim_valid;
    ev_key   = {t_row[victim], set_of(wr_key)};
    inv_hit  = op_inv && op_f[WAY_W];
    rd_f     = find(valid_m[set_of(rd_key)], tag_m[set_of(rd_key)], rd_key);
    rd_hit   = ready && rd_f[WAY_W];
    rd_data  = data_m[set_of(rd_key)][rd_f[WAY_W-1:0]];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      init_q     <= 1'b1;
      init_idx_q <= '0;
    end else if (init_q) begin
      init_idx_q <= init_idx_q + 1'b1;
      if (init_idx_q == SET_W'(SETS-1)) init_q <= 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    if (init_q) begin
      age_row_t a0;
      for (int w = 0; w < WAYS; w++) a0[w] = WAY_W'(w);
      valid_m[init_idx_q] <= '0;
      age_m[init_idx_q]   <= a0;
    end else if (meta_we) begin
      valid_m[set_of(op_key)] <= v_new;
      tag_m[set_of(op_key)]   <= t_new;
      age_m[set_of(op_key)]   <= a_new;
    end
  end

  always_ff @(posedge clk)
    if (data_we) data_m[set_of(op_key)][op_way] <= data_new;

endmodule
