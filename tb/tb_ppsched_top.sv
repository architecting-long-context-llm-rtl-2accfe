// tb_ppsched_top -- end-to-end test of the packing-prefetch core at reduced
// size: 2 layers, 64-beat compute banks, 128-beat prefetch buffer, 40/160
// weight beats per layer, 4 KV beats per token, 16-token prefill chunks.
//
// Three requests (A: prompt 16, 3 outputs; B: prompt 40, 2 outputs; C,
// arriving later: prompt 8, 2 outputs) run to completion twice: with the
// whole prefetch buffer as M and with M = 0 (packing only).  The compute
// units and the HBM are behavioural models.  Checked: every beat the compute
// units consume matches its HBM address; HBM traffic equals the traffic the
// iterations imply (weights per layer plus each attention's KV, worked out
// here from the packed iterations); every beat read is consumed exactly
// once; all requests finish; prefetch shortens the run.  Each mechanism of
// the design is counted and must occur: operand fetch, KV prefetch, limit M
// reached, compute stall, fully and partly prefetched decode attention,
// operand fetch overlapping compute (double buffering), chunked prefill,
// prefill packed with decode, prefill-to-decode hand-over, and the M = 0
// mode.
`timescale 1ns/1ps
module tb_ppsched_top;
  import ppsched_pkg::*;
  localparam int NL = 2, BANK = 64, KVW = 128, WPRE = 40, WPOST = 160, KVB = 4;

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

  ppsched_top #(.BANK_WORDS(BANK), .KV_WORDS(KVW), .N_LAYERS(NL), .W_PRE_BEATS(WPRE),
                .W_POST_BEATS(WPOST), .KV_BEATS_PER_TOK(KVB)) dut (.*);

  hbm_model #(.LAT(12), .RATE_NUM(1), .RATE_DEN(1)) u_hbm (
    .clk, .rst_n, .req_valid(hbm_req_valid), .req_ready(hbm_req_ready),
    .req_addr(hbm_req_addr), .req_tag(hbm_req_tag), .rsp_valid(hbm_rsp_valid),
    .rsp_tag(hbm_rsp_tag), .rsp_data(hbm_rsp_data), .n_req);

  compute_model #(.CYC_DIV(1)) u_cmp (
    .clk, .rst_n, .valid(cmp_valid), .ready(cmp_ready), .part(cmp_part), .done(cmp_done),
    .cb_rd_en, .cb_rd_bank, .cb_rd_addr, .cb_rd_data, .kv_rd_en, .kv_rd_data,
    .errors, .n_part, .n_beats, .n_kind);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---- observers: expected traffic and mechanism events
  longint exp_beats, overlap, chunked, packed_it, handover, iters;
  logic [MAX_REQ-1:0] fin_seen;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      exp_beats <= 0; overlap <= 0; chunked <= 0; packed_it <= 0; iters <= 0; fin_seen <= '0;
    end else begin
      fin_seen <= fin_seen | req_fin;
      if (dut.it_valid && dut.it_ready) begin
        longint b;
        b = WPRE + WPOST;
        if (dut.it_desc.has_pf) b += longint'(dut.it_desc.chunk_start) * KVB;
        for (int i = 0; i < MAX_REQ; i++)
          if (dut.it_desc.dec_mask[i]) b += longint'(dut.slot_kv_len[i]) * KVB;
        exp_beats <= exp_beats + NL * b;
        iters <= iters + 1;
        if (dut.it_desc.has_pf && dut.it_desc.chunk_start != 0) chunked <= chunked + 1;
        if (dut.it_desc.has_pf && dut.it_desc.dec_mask != '0) packed_it <= packed_it + 1;
      end
      if (hbm_req_valid && hbm_req_ready && !hbm_req_tag.to_kv && dut.u_sched.cmp_busy)
        overlap <= overlap + 1;
    end
  end
  // prefill-to-decode hand-over: a slot turns from prefill to decode
  always_ff @(posedge clk)
    if (!rst_n) handover <= 0;
    else if (dut.u_packer.pf_pop) handover <= handover + 1;

  task automatic admit(input int p, input int o, input int base);
    @(negedge clk);
    req_valid = 1; req_prompt = TOK_W'(p); req_out = TOK_W'(o); req_kv_base = HBM_AW'(base);
    while (!req_ready) @(negedge clk);
    @(negedge clk);
    req_valid = 0;
  endtask

  task automatic run(input int m, output longint cycles);
    longint t0, nb0;
    rst_n = 0; req_valid = 0; req_prompt = '0; req_out = '0; req_kv_base = '0;
    chunk_tokens = TOK_W'(16); pf_limit = (IDX_W+1)'(m);
    repeat (3) @(negedge clk);
    rst_n = 1;
    t0 = $time / 10; nb0 = n_beats;
    admit(16, 3, 1_000_000);
    admit(40, 2, 2_000_000);
    while (iters < 3) @(negedge clk);
    admit(8, 2, 3_000_000);
    while (fin_seen != 32'b111 && ($time / 10 - t0) < 400000) @(negedge clk);
    while (dut.u_packer.busy) @(negedge clk);
    repeat (20) @(negedge clk);
    cycles = $time / 10 - t0;
    check(fin_seen == 32'b111, $sformatf("M=%0d: all requests finished", m));
    check(errors == 0, $sformatf("M=%0d: compute saw the right data", m));
    check(longint'(n_req) == exp_beats,
          $sformatf("M=%0d: HBM beats %0d = expected %0d", m, n_req, exp_beats));
    check(n_beats - nb0 == longint'(n_req), $sformatf("M=%0d: every beat consumed once", m));
    check(longint'(perf.operand_beats) + longint'(perf.prefetch_beats) == longint'(n_req),
          $sformatf("M=%0d: operand + prefetch = HBM beats", m));
    check(dut.u_kvbuf.used == 0, $sformatf("M=%0d: prefetch buffer drained", m));
  endtask

  longint c_pf, c_nopf;
  int     ev_fail;
  initial begin
    run(KVW, c_pf);
    begin
      longint ev [string];
      ev["operand fetch"]           = perf.operand_beats;
      ev["KV prefetch"]             = perf.prefetch_beats;
      ev["prefetch held at M"]      = perf.pf_full_cycles;
      ev["compute stall"]           = perf.stall_cycles;
      ev["attention fully on chip"] = perf.attn_hit;
      ev["attention partly on chip"]= perf.attn_partial;
      ev["fetch overlaps compute"]  = overlap;
      ev["chunked prefill"]         = chunked;
      ev["prefill packed w/ decode"]= packed_it;
      ev["prefill-to-decode"]       = handover;
      foreach (ev[k]) begin
        $display("mechanism %-26s %0d", k, ev[k]);
        check(ev[k] > 0, {"mechanism occurred: ", k});
      end
    end
    run(0, c_nopf);
    $display("mechanism %-26s prefetch beats %0d", "M=0 (packing only)", perf.prefetch_beats);
    check(perf.prefetch_beats == 0, "M=0: nothing prefetched");
    check(c_pf < c_nopf, $sformatf("prefetch shortens the run: %0d < %0d cycles", c_pf, c_nopf));
    $display("cycles: M=%0d %0d, M=0 %0d", KVW, c_pf, c_nopf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
