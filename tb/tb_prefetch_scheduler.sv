// tb_prefetch_scheduler -- self-checking test of the packing-prefetch HBM
// scheduler with small buffers (8-beat banks, 16-beat prefetch buffer).
//
// Two layers of {packed linear (20 beats), decode attention A (12 beats),
// decode attention B (30 beats, larger than the prefetch buffer), packed
// linear (24 beats)} run twice: with prefetch space M = 16 beats and with
// M = 0 (packing only).  Checked: every beat the compute units see matches
// its HBM address, every operand beat is read from HBM exactly once
// (operand + prefetch = total), all partitions and the iteration end are
// delivered, with M = 16 KV is prefetched, one attention is fully hidden and
// one partially, the buffer limit is hit, and the run is faster than with
// M = 0; with M = 0 nothing is prefetched.
`timescale 1ns/1ps
module tb_prefetch_scheduler;
  import ppsched_pkg::*;

  localparam int BANK = 8, KVW = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [IDX_W:0]    pf_limit;
  logic              op_valid, op_ready;
  op_desc_t          op_desc;
  logic              hbm_req_valid, hbm_req_ready, hbm_rsp_valid;
  logic [HBM_AW-1:0] hbm_req_addr;
  hbm_tag_t          hbm_req_tag, hbm_rsp_tag;
  logic [DATA_W-1:0] hbm_rsp_data;
  logic              kvb_resv, kv_rd_en;
  logic [IDX_W-1:0]  kvb_resv_idx;
  logic [IDX_W:0]    kvb_used;
  logic [DATA_W-1:0] kv_rd_data, cb_rd_data;
  logic              cmp_valid, cmp_ready, cmp_done, iter_done;
  part_desc_t        cmp_part;
  perf_t             perf;
  logic              cb_rd_en, cb_rd_bank;
  logic [PART_W-1:0] cb_rd_addr;
  int                n_req, errors, n_part, n_kind [4];
  longint            n_beats;

  prefetch_scheduler #(.BANK_WORDS(BANK), .KV_WORDS(KVW), .OPQ_DEPTH(8), .KVQ_DEPTH(8)) dut (
    .clk, .rst_n, .pf_limit, .op_valid, .op_ready, .op_desc,
    .hbm_req_valid, .hbm_req_ready, .hbm_req_addr, .hbm_req_tag,
    .hbm_rsp_valid, .hbm_rsp_tag, .kvb_resv, .kvb_resv_idx, .kvb_used,
    .cmp_valid, .cmp_ready, .cmp_part, .cmp_done, .iter_done, .perf);

  hbm_model #(.LAT(6), .RATE_NUM(1), .RATE_DEN(1)) u_hbm (
    .clk, .rst_n, .req_valid(hbm_req_valid), .req_ready(hbm_req_ready),
    .req_addr(hbm_req_addr), .req_tag(hbm_req_tag), .rsp_valid(hbm_rsp_valid),
    .rsp_tag(hbm_rsp_tag), .rsp_data(hbm_rsp_data), .n_req);

  compute_buffer #(.BANK_WORDS(BANK)) u_cb (
    .clk, .wr_en(hbm_rsp_valid && !hbm_rsp_tag.to_kv), .wr_bank(hbm_rsp_tag.bank),
    .wr_addr(PART_W'(hbm_rsp_tag.idx)), .wr_data(hbm_rsp_data),
    .rd_en(cb_rd_en), .rd_bank(cb_rd_bank), .rd_addr(cb_rd_addr), .rd_data(cb_rd_data));

  kv_prefetch_buffer #(.WORDS(KVW)) u_kv (
    .clk, .rst_n, .resv(kvb_resv), .resv_idx(kvb_resv_idx),
    .wr_en(hbm_rsp_valid && hbm_rsp_tag.to_kv), .wr_idx(hbm_rsp_tag.idx),
    .wr_data(hbm_rsp_data), .rd_en(kv_rd_en), .rd_data(kv_rd_data), .used(kvb_used));

  compute_model #(.CYC_DIV(1)) u_cmp (
    .clk, .rst_n, .valid(cmp_valid), .ready(cmp_ready), .part(cmp_part), .done(cmp_done),
    .cb_rd_en, .cb_rd_bank, .cb_rd_addr, .cb_rd_data, .kv_rd_en, .kv_rd_data,
    .errors, .n_part, .n_beats, .n_kind);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  op_desc_t ops [8];
  int       n_iter_done;
  always_ff @(posedge clk) if (rst_n && iter_done) n_iter_done <= n_iter_done + 1;

  function automatic op_desc_t mk(op_kind_e k, int l, int req, int tok, int addr, int beats, bit last);
    op_desc_t o;
    o = '0;
    o.kind = k; o.layer = LAYER_W'(l); o.req = SLOT_W'(req); o.tokens = TOK_W'(tok);
    o.addr = HBM_AW'(addr); o.beats = HBM_AW'(beats); o.last_of_iter = last;
    return o;
  endfunction

  task automatic run(input int m, output longint cycles, output perf_t pf);
    longint t0;
    rst_n = 0; op_valid = 0; op_desc = '0; pf_limit = (IDX_W+1)'(m);
    n_iter_done = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    t0 = $time / 10;
    for (int i = 0; i < 8; i++) begin
      op_valid = 1; op_desc = ops[i];
      @(negedge clk);
      while (!op_ready) @(negedge clk);   // accepted at the edge before this negedge
    end
    op_valid = 0;
    while (n_iter_done == 0) @(negedge clk);
    cycles = $time / 10 - t0;
    pf = perf;
    repeat (5) @(negedge clk);
  endtask

  longint c_pf, c_nopf;
  perf_t  p_pf, p_nopf;
  int     total, e0, np0, req0;

  initial begin
    for (int l = 0; l < 2; l++) begin
      ops[l*4+0] = mk(OP_LIN_PRE,     l, 0, 4, 5000 + l*100, 20, 0);
      ops[l*4+1] = mk(OP_ATTN_DECODE, l, 0, 1, 1000 + l*100, 12, 0);
      ops[l*4+2] = mk(OP_ATTN_DECODE, l, 1, 1, 2000 + l*100, 30, 0);
      ops[l*4+3] = mk(OP_LIN_POST,    l, 0, 4, 6000 + l*100, 24, l == 1);
    end
    total = 2 * (20 + 12 + 30 + 24);

    run(16, c_pf, p_pf);
    e0 = errors; np0 = n_part; req0 = n_req;
    check(errors == 0, "data seen by compute matches HBM (M=16)");
    check(n_req == total, "each operand beat read from HBM once (M=16)");
    check(p_pf.operand_beats + p_pf.prefetch_beats == total, "operand + prefetch beats = total (M=16)");
    check(p_pf.prefetch_beats > 0, "KV prefetched while linear layers compute");
    check(p_pf.attn_hit >= 1, "a decode attention fully prefetched");
    check(p_pf.attn_partial >= 1, "a decode attention fetched a remainder");
    check(p_pf.pf_full_cycles > 0, "prefetch held back at limit M");
    check(n_kind[OP_ATTN_DECODE] == 4 && n_kind[OP_LIN_PRE] == 2 && n_kind[OP_LIN_POST] == 2,
          "every operation reached compute");
    // partitions: linear 20 -> 3, 24 -> 3, attentions at least 1 each
    check(p_pf.partitions == 32'(np0) && np0 >= 2*(3+3+1+1), "partition count");

    run(0, c_nopf, p_nopf);
    check(errors == e0, "data seen by compute matches HBM (M=0)");
    check(n_req == total, "each operand beat read from HBM once (M=0)");
    check(p_nopf.prefetch_beats == 0, "M=0: no prefetch");
    check(p_nopf.operand_beats == 32'(total), "M=0: everything fetched as operands");
    check(p_nopf.attn_hit == 0 && p_nopf.attn_partial == 0, "M=0: no attention finds KV on chip");
    check(n_kind[OP_ATTN_DECODE] == 8, "second run completed");
    check(c_pf < c_nopf, $sformatf("prefetch shortens the run (%0d < %0d cycles)", c_pf, c_nopf));
    $display("cycles with M=16: %0d, with M=0: %0d", c_pf, c_nopf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
