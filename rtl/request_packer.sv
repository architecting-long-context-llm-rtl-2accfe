// request_packer -- inter-request packing (chunked prefill + decode).
//
// Keeps the table of active requests and forms one packed iteration at a
// time.  An iteration carries every request that is in its decode phase
// (decode is served first) together with one prefill chunk of the oldest
// request still in its prefill phase, so the compute-bound prefill linear
// work is packed with the memory-bound decode linear work of the others.
// A long prompt is split into chunks of chunk_tokens tokens over successive
// iterations.  When the iteration has run through all layers (iter_done),
// the table is updated: each decode request gained one KV token and produced
// one output token; the prefill request advanced by its chunk, and when its
// prompt is complete it turns into a decode request whose KV-cache holds
// exactly its prompt tokens.  A request leaves after its last output token
// (pulse on fin).
//
// Interfaces:
//   req_*   admission, valid/ready; req_slot is the slot it gets.  kv_base
//           is the HBM beat address of the request's KV region, which holds
//           per layer (prompt+output) tokens of KV (the op generator's layout).
//   it_*    packed iteration, valid/ready; at most one iteration is in
//           flight, the next is offered after iter_done.
//   slot_*  per-slot KV base, KV length and capacity, stable while an
//           iteration is in flight.
//
// Follows the published scheduling: decode requests prioritised, prefill
// chunks interleaved with them, 512-token chunks in the service-level runs.
// This design's own choices: 32 slots (the service-level runs bound the
// batch at 32 concurrent decode requests), first-come order for prefill,
// one prefill chunk per iteration, chunk size as a run-time input, the
// decode requests' tokens not counted against the chunk.
module request_packer
  import ppsched_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic [TOK_W-1:0]   chunk_tokens,
  // admission
  input  logic               req_valid,
  output logic               req_ready,
  input  logic [TOK_W-1:0]   req_prompt,
  input  logic [TOK_W-1:0]   req_out,
  input  logic [HBM_AW-1:0]  req_kv_base,
  output logic [SLOT_W-1:0]  req_slot,
  // iterations
  output logic               it_valid,
  input  logic               it_ready,
  output iter_desc_t         it_desc,
  input  logic               iter_done,
  // slot table
  output logic [HBM_AW-1:0]  slot_kv_base [MAX_REQ],
  output logic [TOK_W-1:0]   slot_kv_len  [MAX_REQ],
  output logic [TOK_W-1:0]   slot_cap     [MAX_REQ],
  output logic [MAX_REQ-1:0] fin
);

  logic               s_valid [MAX_REQ];
  logic               s_dec   [MAX_REQ];
  logic [TOK_W-1:0]   s_prompt[MAX_REQ];
  logic [TOK_W-1:0]   s_done  [MAX_REQ];
  logic [TOK_W-1:0]   s_out   [MAX_REQ];

  // first-come queue of requests waiting for (more) prefill
  logic [SLOT_W-1:0]  pq [MAX_REQ];
  logic [SLOT_W-1:0]  pq_rp, pq_wp;
  logic [SLOT_W:0]    pq_cnt;

  logic               busy;
  iter_desc_t         cur;

  logic [MAX_REQ-1:0] dec_now;
  logic               any_free;
  logic [SLOT_W-1:0]  free_slot;
  logic [SLOT_W-1:0]  head;
  logic [TOK_W-1:0]   left;
  logic               admit, issue, pf_pop;

  always_comb begin
    any_free  = 1'b0;
    free_slot = '0;
    for (int i = MAX_REQ - 1; i >= 0; i--)
      if (!s_valid[i]) begin any_free = 1'b1; free_slot = SLOT_W'(i); end
    for (int i = 0; i < MAX_REQ; i++) dec_now[i] = s_valid[i] && s_dec[i];

    req_ready = any_free;
    req_slot  = free_slot;
    admit     = req_valid && req_ready;

    head = pq[pq_rp];
    left = s_prompt[head] - s_done[head];
    it_desc.dec_mask    = dec_now;
    it_desc.has_pf      = (pq_cnt != 0);
    it_desc.pf_slot     = head;
    it_desc.chunk_start = s_done[head];
    it_desc.chunk_len   = (pq_cnt == 0) ? '0 : ((left > chunk_tokens) ? chunk_tokens : left);
    it_desc.n_tokens    = it_desc.chunk_len;
    for (int i = 0; i < MAX_REQ; i++) it_desc.n_tokens += TOK_W'(dec_now[i]);

    it_valid = !busy && (dec_now != '0 || pq_cnt != 0);
    issue    = it_valid && it_ready;
    pf_pop   = busy && iter_done && cur.has_pf &&
               (s_done[cur.pf_slot] + cur.chunk_len == s_prompt[cur.pf_slot]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < MAX_REQ; i++) begin
        s_valid[i] <= 1'b0; s_dec[i] <= 1'b0; s_prompt[i] <= '0; s_done[i] <= '0;
        s_out[i] <= '0; slot_kv_len[i] <= '0; slot_kv_base[i] <= '0; slot_cap[i] <= '0;
        pq[i] <= '0;
      end
      pq_rp <= '0; pq_wp <= '0; pq_cnt <= '0;
      busy <= 1'b0; cur <= '0; fin <= '0;
    end else begin
      fin <= '0;
      if (admit) begin
        s_valid[free_slot]      <= 1'b1;
        s_dec[free_slot]        <= 1'b0;
        s_prompt[free_slot]     <= req_prompt;
        s_done[free_slot]       <= '0;
        s_out[free_slot]        <= req_out;
        slot_kv_len[free_slot]  <= '0;
        slot_kv_base[free_slot] <= req_kv_base;
        slot_cap[free_slot]     <= req_prompt + req_out;
        pq[pq_wp]               <= free_slot;
        pq_wp                   <= pq_wp + 1'b1;
      end
      pq_cnt <= pq_cnt + SLOT_W'(admit) - SLOT_W'(pf_pop);
      if (pf_pop) pq_rp <= pq_rp + 1'b1;

      if (issue) begin
        busy <= 1'b1;
        cur  <= it_desc;
      end

      if (busy && iter_done) begin
        busy <= 1'b0;
        for (int i = 0; i < MAX_REQ; i++)
          if (cur.dec_mask[i]) begin
            slot_kv_len[i] <= slot_kv_len[i] + 1'b1;
            s_out[i]       <= s_out[i] - 1'b1;
            if (s_out[i] == 1) begin
              s_valid[i] <= 1'b0;
              fin[i]     <= 1'b1;
            end
          end
        if (cur.has_pf) begin
          s_done[cur.pf_slot] <= s_done[cur.pf_slot] + cur.chunk_len;
          if (pf_pop) begin
            s_dec[cur.pf_slot]       <= 1'b1;
            slot_kv_len[cur.pf_slot] <= s_prompt[cur.pf_slot];
          end
        end
      end
    end
  end

  a_req_sizes: assert property (@(posedge clk) disable iff (!rst_n)
                                admit |-> req_prompt != 0 && req_out != 0);
  a_chunk:     assert property (@(posedge clk) disable iff (!rst_n)
                                it_valid |-> chunk_tokens != 0);
  a_done:      assert property (@(posedge clk) disable iff (!rst_n) iter_done |-> busy);

endmodule
