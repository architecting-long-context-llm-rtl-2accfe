// prefetch_scheduler -- packing-prefetch HBM scheduler and partition control.
//
// What it does.  Operations arrive in execution order (packed linear,
// prefill attention, decode attention, packed linear, layer after layer).
// Each operation's HBM operand (weights, or KV-cache) is cut into partitions
// of at most one compute-buffer bank.  Partition p is computed from one bank
// while partition p+1 is fetched into the other.  Every cycle the single HBM
// read port is given to one of two users, exactly as the published
// scheduling loop states:
//
//   while (compute of partition p unfinished)
//     if (operand partition p+1 on chip)
//       if (prefetch buffer occupancy < M)  prefetch KV-cache for the next
//                                           decode attention
//     else                                  fetch operand partition p+1
//
// So operand fetch always wins; the idle HBM bandwidth of compute-bound
// phases goes to KV-cache prefetch, bounded by M (input pf_limit, in beats;
// M = 0 gives packing without prefetch).
//
// KV bookkeeping.  When a decode-attention operation is accepted, its KV
// range is also entered in a small look-ahead table; prefetch walks that
// table in order.  When the operand fetcher reaches the operation itself it
// "closes" the entry: the beats already prefetched stay in the prefetch
// buffer (part_desc_t.kv_onchip, popped in order by the compute units) and
// only the remainder, if any, is fetched as an ordinary operand partition.
// Prefetch then moves on to the next attention (the next layer's, if this
// was the last of a layer).
//
// Interfaces (all synchronous to clk, active-low asynchronous reset):
//   op_*     operation input, valid/ready
//   hbm_req  one beat read per accepted cycle (valid & ready); the tag says
//            where the beat is written on return.  A request that has not
//            been accepted may be withdrawn (valid drops) if the grant
//            changes.  Returns must come back in request order.
//   hbm_rsp  return beat's tag (the buffers take the data)
//   kvb_*    prefetch buffer reservation and occupancy
//   cmp_*    one partition handed to the compute units (valid/ready), and
//            cmp_done, a pulse when the compute units finished it
//   iter_done pulse when the last operation of a packed iteration finished
//
// Beyond the published loop, this design's own choices: the decision is per
// beat; "operand on chip" means all its beats requested (those in flight
// count as on chip); prefetch only runs while the compute units are busy, as
// in the loop; a partition is started only when all its own beats, and all
// KV beats prefetched for it, have returned.
module prefetch_scheduler
  import ppsched_pkg::*;
#(
  parameter int unsigned BANK_WORDS = 40960,   // beats per compute-buffer bank
  parameter int unsigned KV_WORDS   = 524288,  // prefetch buffer words
  parameter int unsigned OPQ_DEPTH  = 64,      // operation look-ahead
  parameter int unsigned KVQ_DEPTH  = 64       // decode attentions looked ahead
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [IDX_W:0]    pf_limit,
  // operations
  input  logic              op_valid,
  output logic              op_ready,
  input  op_desc_t          op_desc,
  // HBM read port
  output logic              hbm_req_valid,
  input  logic              hbm_req_ready,
  output logic [HBM_AW-1:0] hbm_req_addr,
  output hbm_tag_t          hbm_req_tag,
  input  logic              hbm_rsp_valid,
  input  hbm_tag_t          hbm_rsp_tag,
  // KV prefetch buffer
  output logic              kvb_resv,
  input  logic [IDX_W-1:0]  kvb_resv_idx,
  input  logic [IDX_W:0]    kvb_used,
  // compute units
  output logic              cmp_valid,
  input  logic              cmp_ready,
  output part_desc_t        cmp_part,
  input  logic              cmp_done,
  output logic              iter_done,
  output perf_t             perf
);

  localparam int unsigned OQW = $clog2(OPQ_DEPTH);
  localparam int unsigned KQW = $clog2(KVQ_DEPTH);

  // ---------------------------------------------------------------- op queue
  op_desc_t         opq [OPQ_DEPTH];
  logic [OQW-1:0]   oq_wp, oq_rp;
  logic [OQW:0]     oq_cnt;

  // ------------------------------------------- decode-attention look-ahead
  logic [HBM_AW-1:0] kvq_addr  [KVQ_DEPTH];
  logic [HBM_AW-1:0] kvq_beats [KVQ_DEPTH];
  logic [HBM_AW-1:0] kvq_sent  [KVQ_DEPTH];
  logic [KQW-1:0]    kq_head, kq_pf, kq_tail;
  logic [KQW:0]      kq_cnt;     // entries head..tail
  logic [KQW:0]      pf_cnt;     // entries pf..tail

  // ------------------------------------------------------- operand fetcher
  logic              f_active;       // an operation still has partitions to start
  op_desc_t          f_op;
  logic [HBM_AW-1:0] f_addr, f_rem, f_kv_onchip;
  logic [31:0]       f_kv_tgt;
  logic              f_first;
  logic              f_part_active;  // beats of the current partition left to request
  logic              f_bank;
  logic [PART_W-1:0] f_issued, f_n;
  logic              nb;             // bank of the next partition to start

  // --------------------------------------------------------- bank slots
  logic              slot_valid [2];
  logic              slot_launched [2];
  part_desc_t        slot_desc [2];
  logic [31:0]       slot_tgt [2];
  logic [PART_W-1:0] slot_ret [2];
  logic              lb;             // bank of the next partition to compute
  logic              cmp_busy;
  logic              cb;             // bank being computed

  logic [31:0]       kv_req_cnt, kv_ret_cnt;

  // ---------------------------------------------------------- decisions
  logic       push_op, take_op, close_kv, pf_adv, start_part;
  logic       want_op, pf_have, pf_room, want_pf, grant_op, grant_pf, fire;
  logic       slot_ready [2];
  logic       launch;
  op_desc_t   head_op;
  logic [HBM_AW-1:0] close_sent, start_n;

  always_comb begin
    head_op   = opq[oq_rp];
    op_ready  = (32'(oq_cnt) < OPQ_DEPTH) && (32'(kq_cnt) < KVQ_DEPTH);
    push_op   = op_valid && op_ready;
    take_op   = !f_active && !f_part_active && (oq_cnt != 0);
    close_kv  = take_op && (head_op.kind == OP_ATTN_DECODE);
    close_sent = kvq_sent[kq_head];

    start_part = f_active && !f_part_active && !slot_valid[nb];
    start_n    = (32'(f_rem) > BANK_WORDS) ? HBM_AW'(BANK_WORDS) : f_rem;

    want_op  = f_part_active;
    pf_have  = (pf_cnt != 0) && (kvq_sent[kq_pf] < kvq_beats[kq_pf]);
    pf_room  = (kvb_used < pf_limit) && (32'(kvb_used) < KV_WORDS);
    want_pf  = cmp_busy && pf_have && !take_op;
    grant_op = want_op;
    grant_pf = !want_op && want_pf && pf_room;
    pf_adv   = (pf_cnt != 0) && !pf_have;

    hbm_req_valid = grant_op || grant_pf;
    fire          = hbm_req_valid && hbm_req_ready;
    if (grant_op) begin
      hbm_req_addr = f_addr;
      hbm_req_tag  = '{to_kv: 1'b0, bank: f_bank, idx: IDX_W'(f_issued)};
    end else begin
      hbm_req_addr = kvq_addr[kq_pf] + kvq_sent[kq_pf];
      hbm_req_tag  = '{to_kv: 1'b1, bank: 1'b0, idx: kvb_resv_idx};
    end
    kvb_resv = fire && grant_pf;

    for (int b = 0; b < 2; b++)
      slot_ready[b] = slot_valid[b] && !slot_launched[b] &&
                      (slot_ret[b] == slot_desc[b].beats) &&
                      ($signed(kv_ret_cnt - slot_tgt[b]) >= 0);
    cmp_valid = !cmp_busy && slot_ready[lb];
    cmp_part  = slot_desc[lb];
    launch    = cmp_valid && cmp_ready;
  end

  // ---------------------------------------------------------- state
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      oq_wp <= '0; oq_rp <= '0; oq_cnt <= '0;
      kq_head <= '0; kq_pf <= '0; kq_tail <= '0; kq_cnt <= '0; pf_cnt <= '0;
      f_active <= 1'b0; f_op <= '0; f_addr <= '0; f_rem <= '0; f_kv_onchip <= '0;
      f_kv_tgt <= '0; f_first <= 1'b0; f_part_active <= 1'b0; f_bank <= 1'b0;
      f_issued <= '0; f_n <= '0; nb <= 1'b0;
      for (int b = 0; b < 2; b++) begin
        slot_valid[b] <= 1'b0; slot_launched[b] <= 1'b0; slot_desc[b] <= '0;
        slot_tgt[b] <= '0; slot_ret[b] <= '0;
      end
      lb <= 1'b0; cmp_busy <= 1'b0; cb <= 1'b0;
      kv_req_cnt <= '0; kv_ret_cnt <= '0;
      iter_done <= 1'b0;
      perf <= '0;
    end else begin
      iter_done <= 1'b0;

      // op queue and look-ahead table
      if (push_op) begin
        opq[oq_wp] <= op_desc;
        oq_wp <= oq_wp + 1'b1;
        if (op_desc.kind == OP_ATTN_DECODE) begin
          kvq_addr[kq_tail]  <= op_desc.addr;
          kvq_beats[kq_tail] <= op_desc.beats;
          kvq_sent[kq_tail]  <= '0;
          kq_tail <= kq_tail + 1'b1;
        end
      end
      oq_cnt <= oq_cnt + (OQW+1)'(push_op) - (OQW+1)'(take_op);
      kq_cnt <= kq_cnt + (KQW+1)'(push_op && op_desc.kind == OP_ATTN_DECODE)
                       - (KQW+1)'(close_kv);
      pf_cnt <= pf_cnt + (KQW+1)'(push_op && op_desc.kind == OP_ATTN_DECODE)
                       - (KQW+1)'((close_kv && pf_cnt == kq_cnt) || (!close_kv && pf_adv));
      if (close_kv) begin
        kq_head <= kq_head + 1'b1;
        if (pf_cnt == kq_cnt) kq_pf <= kq_pf + 1'b1;
      end else if (pf_adv) begin
        kq_pf <= kq_pf + 1'b1;
      end

      // take the next operation
      if (take_op) begin
        oq_rp    <= oq_rp + 1'b1;
        f_active <= 1'b1;
        f_op     <= head_op;
        f_first  <= 1'b1;
        f_kv_tgt <= kv_req_cnt;
        if (close_kv) begin
          f_addr      <= head_op.addr + close_sent;
          f_rem       <= head_op.beats - close_sent;
          f_kv_onchip <= close_sent;
          if (close_sent == head_op.beats) perf.attn_hit <= perf.attn_hit + 1'b1;
          else if (close_sent != 0)        perf.attn_partial <= perf.attn_partial + 1'b1;
        end else begin
          f_addr      <= head_op.addr;
          f_rem       <= head_op.beats;
          f_kv_onchip <= '0;
        end
      end

      // start a partition in the free bank
      if (start_part) begin
        slot_valid[nb]    <= 1'b1;
        slot_launched[nb] <= 1'b0;
        slot_ret[nb]      <= '0;
        slot_tgt[nb]      <= f_first ? f_kv_tgt : kv_ret_cnt;
        slot_desc[nb]     <= '{op: f_op, bank: nb, beats: PART_W'(start_n),
                               kv_onchip: f_first ? f_kv_onchip : '0,
                               first: f_first, last: (start_n == f_rem)};
        f_first       <= 1'b0;
        f_rem         <= f_rem - start_n;
        f_part_active <= (start_n != 0);
        f_bank        <= nb;
        f_issued      <= '0;
        f_n           <= PART_W'(start_n);
        nb            <= ~nb;
        if (start_n == f_rem) f_active <= 1'b0;
      end

      // HBM request accepted
      if (fire && grant_op) begin
        f_addr   <= f_addr + 1'b1;
        f_issued <= f_issued + 1'b1;
        if (f_issued + 1'b1 == f_n) f_part_active <= 1'b0;
        perf.operand_beats <= perf.operand_beats + 1'b1;
      end
      if (fire && grant_pf) begin
        kvq_sent[kq_pf] <= kvq_sent[kq_pf] + 1'b1;
        kv_req_cnt      <= kv_req_cnt + 1'b1;
        perf.prefetch_beats <= perf.prefetch_beats + 1'b1;
      end
      if (cmp_busy && pf_have && !want_op && !take_op && !pf_room)
        perf.pf_full_cycles <= perf.pf_full_cycles + 1'b1;

      // HBM returns
      if (hbm_rsp_valid) begin
        if (hbm_rsp_tag.to_kv) kv_ret_cnt <= kv_ret_cnt + 1'b1;
        else slot_ret[hbm_rsp_tag.bank] <= slot_ret[hbm_rsp_tag.bank] + 1'b1;
      end

      // compute side
      if (!cmp_busy && slot_valid[lb] && !slot_ready[lb])
        perf.stall_cycles <= perf.stall_cycles + 1'b1;
      if (launch) begin
        slot_launched[lb] <= 1'b1;
        cmp_busy <= 1'b1;
        cb       <= lb;
        lb       <= ~lb;
        perf.partitions <= perf.partitions + 1'b1;
      end
      if (cmp_done && cmp_busy) begin
        slot_valid[cb]    <= 1'b0;
        slot_launched[cb] <= 1'b0;
        cmp_busy          <= 1'b0;
        if (slot_desc[cb].last && slot_desc[cb].op.last_of_iter) iter_done <= 1'b1;
      end
    end
  end

  // ---------------------------------------------------------- rules
  // Operand fetch has priority: prefetch is never granted while operand
  // beats of the next partition are still to be requested.
  a_operand_priority: assert property (@(posedge clk) disable iff (!rst_n)
                                       kvb_resv |-> !f_part_active);
  // Prefetch stays within M.
  a_limit: assert property (@(posedge clk) disable iff (!rst_n)
                            kvb_resv |-> kvb_used < pf_limit);
  // A return for a compute bank must belong to a partition fetching there.
  a_rsp_bank: assert property (@(posedge clk) disable iff (!rst_n)
                               hbm_rsp_valid && !hbm_rsp_tag.to_kv |-> slot_valid[hbm_rsp_tag.bank]);
  a_done: assert property (@(posedge clk) disable iff (!rst_n) cmp_done |-> cmp_busy);

  initial begin
    assert ((1 << OQW) == OPQ_DEPTH && (1 << KQW) == KVQ_DEPTH)
      else $error("queue depths must be powers of two");
  end

endmodule
