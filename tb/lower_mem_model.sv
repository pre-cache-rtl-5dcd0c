// lower_mem_model: behavioural model of what lies below the private L2 of
// one core: the shared L3 with its coherence directory and pre-cache
// directory, and main memory. Testbench only, not synthesizable.
//
// Memory contents are a fixed function of the address (ref_word), overlaid
// with the words written by stores. A speculative line load answers after
// LOAD_LAT cycles with level L3 if the line was placed in L3 by an earlier
// STC and level memory otherwise, and changes no state (no coherence update,
// no allocation). An STC answers after STC_LAT cycles; it allocates the line
// in L3 and counts a coherence update, unless abort_next is set, in which
// case it answers with abort and changes nothing. A store is written and
// acknowledged after STC_LAT cycles. Prefetch requests are answered on the
// separate prefetch port after LOAD_LAT cycles. One request at a time.
module lower_mem_model
  import precache_pkg::*;
#(
  parameter int LOAD_LAT = 40,
  parameter int STC_LAT  = 12
) (
  input  logic   clk,
  input  logic   mem_req_valid,
  output logic   mem_req_ready,
  input  mreq_e  mem_req_type,
  input  addr_t  mem_req_addr,
  input  word_t  mem_req_data,
  output logic   mem_resp_valid,
  output line_t  mem_resp_data,
  output level_e mem_resp_level,
  output logic   mem_resp_abort,
  input  logic   abort_next,
  input  logic   pf_req_valid,
  input  addr_t  pf_req_addr,
  output logic   pf_resp_valid,
  output addr_t  pf_resp_addr,
  output line_t  pf_resp_data
);

  word_t written [addr_t];     // store overlay, by 8-byte word address
  bit    in_l3   [key_t];
  int    n_loads = 0, n_stc = 0, n_stc_abort = 0, n_stores = 0, n_coh_updates = 0;

  function automatic word_t ref_word(addr_t a);
    addr_t w;
    w = {a[ADDR_W-1:3], 3'b000};
    if (written.exists(w)) return written[w];
    return {w ^ 32'hA5A5_0F0F, ~w};
  endfunction

  function automatic line_t ref_line(key_t k);
    line_t l;
    for (int i = 0; i < WORDS; i++) l[i*WORD_W +: WORD_W] = ref_word({k, OFF_W'(i * 8)});
    return l;
  endfunction

  logic  busy = 1'b0;
  int    left = 0;
  mreq_e typ_q;
  addr_t addr_q;
  bit    abort_q;

  assign mem_req_ready = !busy;

  initial begin
    mem_resp_valid = 1'b0; mem_resp_abort = 1'b0; mem_resp_data = '0; mem_resp_level = LVL_MEM;
    pf_resp_valid = 1'b0; pf_resp_addr = '0; pf_resp_data = '0;
  end

  always @(posedge clk) begin
    mem_resp_valid <= 1'b0;
    mem_resp_abort <= 1'b0;
    if (!busy && mem_req_valid) begin
      busy    <= 1'b1;
      typ_q   <= mem_req_type;
      addr_q  <= mem_req_addr;
      abort_q <= abort_next;
      left    <= (mem_req_type == MREQ_LOAD) ? LOAD_LAT : STC_LAT;
      if (mem_req_type == MREQ_STORE) begin
        written[{mem_req_addr[ADDR_W-1:3], 3'b000}] = mem_req_data;
        n_stores++;
      end
    end else if (busy) begin
      if (left > 1) left <= left - 1;
      else begin
        busy <= 1'b0;
        mem_resp_valid <= 1'b1;
        mem_resp_data  <= ref_line(key_of(addr_q));
        mem_resp_level <= in_l3.exists(key_of(addr_q)) ? LVL_L3 : LVL_MEM;
        case (typ_q)
          MREQ_LOAD: n_loads++;
          MREQ_STC: if (abort_q) begin
            mem_resp_abort <= 1'b1; n_stc_abort++;
          end else begin
            in_l3[key_of(addr_q)] = 1'b1; n_stc++; n_coh_updates++;
          end
          default: ;
        endcase
      end
    end
  end

  // prefetch port: fixed latency, several in flight
  addr_t pf_q[$];
  int    pf_t[$];
  int    now = 0;
  always @(posedge clk) begin
    now++;
    pf_resp_valid <= 1'b0;
    if (pf_req_valid) begin pf_q.push_back(pf_req_addr); pf_t.push_back(now + LOAD_LAT); end
    if (pf_q.size() > 0 && pf_t[0] <= now) begin
      pf_resp_valid <= 1'b1;
      pf_resp_addr  <= pf_q[0];
      pf_resp_data  <= ref_line(key_of(pf_q[0]));
      void'(pf_q.pop_front()); void'(pf_t.pop_front());
    end
  end

endmodule
