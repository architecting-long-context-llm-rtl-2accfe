// tb_ppsched_full -- the core at its default (published) size: 80 MB compute
// buffer, 512 MB prefetch buffer, Llama3.1-8B layer sizes (32 layers).
//
// Two requests of 2048 prompt tokens and one output token, 2048-token
// chunks.  Iteration 1 prefills A; iteration 2 packs A's decode with B's
// 2048-token prefill chunk; iteration 3 decodes B alone.  The HBM model
// delivers 1.64 TB/s at 1.75 GHz (0.915 beat per cycle); the compute model
// runs at the TPUv6e-like peak, so 2049-token linear layers are
// compute-bound and leave HBM bandwidth for prefetch.
// Checked: data seen by compute; HBM traffic against the traffic the three
// iterations imply; A's 32 decode attentions (8192 KV beats each) all find
// their KV fully prefetched; iteration 2 takes less than half the time a
// direct fetch of that KV would add over iteration 1 (the decode attention
// is hidden); iteration 1 stays within 5 % of its pure compute time; both
// requests finish.  About 128 M cycles, two minutes of simulation.
`timescale 1ns/1ps
module tb_ppsched_full;
  import ppsched_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [TOK_W-1:0]   chunk_tokens;
  logic [IDX_W:0]     pf_limit = (IDX_W+1)'(524288);
  logic               req_valid = 0, req_ready;
  logic [TOK_W-1:0]   req_prompt = '0, req_out = '0;
  logic [HBM_AW-1:0]  req_kv_base = '0;
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

  ppsched_top dut (.*);

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

  localparam longint LAYER_W_BEATS = 49152 + 376832;
  localparam longint KVL = 2048 * 4;                  // KV beats per layer
  logic [MAX_REQ-1:0] fin_seen;
  int                 n_iter;
  longint             t_iter [4];
  always_ff @(posedge clk) begin
    if (!rst_n) begin fin_seen <= '0; n_iter <= 0; end
    else begin
      fin_seen <= fin_seen | req_fin;
      if (iter_done) begin
        n_iter <= n_iter + 1;
        t_iter[n_iter + 1] <= $time / 10;
      end
    end
  end

  longint cycles, exp_beats, lin2, it2;
  initial begin
    chunk_tokens = TOK_W'(2048);
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    t_iter[0] = $time / 10;
    req_valid = 1; req_prompt = 2048; req_out = 1; req_kv_base = HBM_AW'(32 * LAYER_W_BEATS);
    @(negedge clk);
    req_kv_base = req_kv_base + HBM_AW'(32 * 2049 * 4);
    @(negedge clk);
    req_valid = 0;
    while (fin_seen != 32'b11 && ($time / 10 - t_iter[0]) < 190_000_000) @(negedge clk);
    while (dut.u_packer.busy) @(negedge clk);
    repeat (20) @(negedge clk);
    cycles = $time / 10 - t_iter[0];
    // weights in every iteration; A's KV in iteration 2, B's in iteration 3
    exp_beats = 3 * 32 * LAYER_W_BEATS + 2 * 32 * KVL;
    check(n_iter == 3, $sformatf("three packed iterations: %0d", n_iter));
    check(fin_seen == 32'b11, "both requests finished");
    check(errors == 0, "compute saw the right data");
    check(longint'(n_req) == exp_beats, $sformatf("HBM beats %0d = expected %0d", n_req, exp_beats));
    check(n_beats == longint'(n_req), "every beat consumed once");
    check(perf.attn_hit >= 32, $sformatf("A's 32 decode attentions fully prefetched: %0d", perf.attn_hit));
    check(perf.prefetch_beats >= 32 * KVL, $sformatf("prefetched beats %0d", perf.prefetch_beats));
    // iterations 1 and 2 run the same packed linear layers (2048 and 2049
    // tokens); iteration 2 adds A's decode attention in all 32 layers.
    // Fetched directly, its KV alone would take 32 x 8192 / 0.915 cycles.
    lin2 = 2049 * 32 * LAYER_W_BEATS / 512;
    it2  = t_iter[2] - t_iter[1];
    check(real'(it2 - (t_iter[1] - t_iter[0])) < 0.5 * real'(32 * KVL) / 0.915,
          $sformatf("decode attention hidden: iteration 2 adds %0d cycles over iteration 1",
                    it2 - (t_iter[1] - t_iter[0])));
    check(real'(t_iter[1] - t_iter[0]) <= 1.05 * real'(lin2),
          $sformatf("compute-bound iteration within 5 %% of linear compute: %0d vs %0d",
                    t_iter[1] - t_iter[0], lin2));
    $display("cycles %0d (iterations %0d, %0d, %0d), HBM beats %0d, prefetched %0d",
             cycles, t_iter[1] - t_iter[0], it2, t_iter[3] - t_iter[2], n_req, perf.prefetch_beats);
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
