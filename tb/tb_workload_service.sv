// tb_workload_service -- service-level run of the packing-prefetch core:
// a batch of long-prompt requests served to completion, once with packing
// only (M = 0) and once with packing plus prefetch (M = 512 MB), on the
// default 80 MB / 512 MB core with Llama3.1-8B layer sizes but 2 layers.
//
// The six requests follow the shape of a long-document summarisation set
// (prompt median about 7K tokens, P90 about 13K, short answers), with every
// prompt divided by 4 so that both runs end in about a minute: prompts 1765,
// 2400, 1200, 3246, 1900 and 1500 tokens, outputs 6, 4, 8, 5, 3 and 7
// tokens, prefill chunks of 1024 tokens.  All six are admitted at once; the
// packer prefills them one after another and packs the decodes of finished
// prompts into the chunks of the later ones.  The sizes are this test's
// choice; only their shape follows the published dataset statistics.
//
// Checked in each run: all six requests finish; every beat the compute
// units consume is right; operand plus prefetch beats equal the HBM beats.
// Across the runs: both move exactly the same HBM traffic (prefetch moves
// data earlier, it adds none), the prefetch run fully prefetches decode
// attentions and finishes sooner, i.e. serves more tokens per cycle from
// the same HBM bandwidth.  Measured here: 30990017 cycles with packing only,
// 30841819 with prefetch, 44 decode attentions fully prefetched.  The gain
// is small because these shortened prompts give short KV-caches; it grows
// with the KV length (see tb_workload_packed_stage).
`timescale 1ns/1ps
module tb_workload_service;
  import ppsched_pkg::*;
  localparam int NL = 2;
  localparam int NREQ = 6;
  localparam longint LAYER_W_BEATS = 49152 + 376832;
  localparam int PROMPT [NREQ] = '{1765, 2400, 1200, 3246, 1900, 1500};
  localparam int OUTPUT [NREQ] = '{6, 4, 8, 5, 3, 7};

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [TOK_W-1:0]   chunk_tokens;
  logic [IDX_W:0]     pf_limit;
  logic               req_valid, req_ready;
  logic [TOK_W-1:0]   req_prompt, req_out;
  logic [HBM_AW-1:0]  req_kv_base;
  logic [SLOT_W-1:0]  req_slot;
  logic [MAX_REQ-1:0] req_fin;
  logic               iter_done;
  logic               hbm_req_valid, hbm_req_ready, hbm_rsp_valid;
  logic [HBM_AW-1:0]  hbm_req_addr;
  hbm_tag_t           hbm_req_tag, hbm_rsp_tag;
  logic [DATA_W-1:0]  hbm_rsp_data, cb_rd_data, kv_rd_data;
  logic               cmp_valid, cmp_ready, cmp_done, cb_rd_en, cb_rd_bank, kv_rd_en;
  part_desc_t         cmp_part;
  logic [PART_W-1:0]  cb_rd_addr;
  perf_t              perf;
  int                 n_req, errors, n_part, n_kind [4];
  longint             n_beats;

  ppsched_top #(.N_LAYERS(NL)) dut (.*);

  hbm_model u_hbm (
    .clk, .rst_n, .req_valid(hbm_req_valid), .req_ready(hbm_req_ready),
    .req_addr(hbm_req_addr), .req_tag(hbm_req_tag), .rsp_valid(hbm_rsp_valid),
    .rsp_tag(hbm_rsp_tag), .rsp_data(hbm_rsp_data), .n_req);

  compute_model u_cmp (
    .clk, .rst_n, .valid(cmp_valid), .ready(cmp_ready), .part(cmp_part), .done(cmp_done),
    .cb_rd_en, .cb_rd_bank, .cb_rd_addr, .cb_rd_data, .kv_rd_en, .kv_rd_data,
    .errors, .n_part, .n_beats, .n_kind);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [MAX_REQ-1:0] fin_seen;
  always_ff @(posedge clk)
    if (!rst_n) fin_seen <= '0;
    else        fin_seen <= fin_seen | req_fin;

  task automatic run(input int m, output longint cycles, output longint beats,
                     output longint hits);
    longint t0, nb0;
    rst_n = 0; req_valid = 0; req_prompt = '0; req_out = '0; req_kv_base = '0;
    chunk_tokens = TOK_W'(1024); pf_limit = (IDX_W+1)'(m);
    repeat (3) @(negedge clk);
    rst_n = 1;
    t0 = $time / 10; nb0 = n_beats;
    for (int i = 0; i < NREQ; i++) begin
      @(negedge clk);
      req_valid = 1; req_prompt = TOK_W'(PROMPT[i]); req_out = TOK_W'(OUTPUT[i]);
      req_kv_base = HBM_AW'(NL * LAYER_W_BEATS + i * NL * 4096 * 4);
      while (!req_ready) @(negedge clk);
    end
    @(negedge clk);
    req_valid = 0;
    while (fin_seen != MAX_REQ'((1 << NREQ) - 1)) @(negedge clk);
    while (dut.u_packer.busy) @(negedge clk);
    cycles = $time / 10 - t0;
    beats = longint'(n_req);
    hits = longint'(perf.attn_hit);
    check(errors == 0, $sformatf("M=%0d: compute saw the right data", m));
    check(n_beats - nb0 == beats, $sformatf("M=%0d: every beat consumed once", m));
    check(longint'(perf.operand_beats) + longint'(perf.prefetch_beats) == beats,
          $sformatf("M=%0d: operand + prefetch = HBM beats", m));
    $display("M=%0d beats: %0d cycles, %0d HBM beats, %0d beats prefetched, %0d attentions fully on chip",
             m, cycles, beats, perf.prefetch_beats, hits);
  endtask

  longint c0, c1, b0, b1, h0, h1, tokens;
  initial begin
    run(0,      c0, b0, h0);
    run(524288, c1, b1, h1);
    tokens = 0;
    for (int i = 0; i < NREQ; i++) tokens += PROMPT[i] + OUTPUT[i];
    $display("tokens per million cycles: packing only %0.1f, packing + prefetch %0.1f",
             1.0e6 * real'(tokens) / real'(c0), 1.0e6 * real'(tokens) / real'(c1));
    check(h0 == 0, "M = 0: no decode attention prefetched");
    check(h1 > 0, "M = 512 MB: decode attentions fully prefetched");
    check(b0 == b1, $sformatf("same HBM traffic in both runs (%0d, %0d)", b0, b1));
    check(c1 < c0, $sformatf("prefetch serves the batch sooner (%0d < %0d)", c1, c0));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
