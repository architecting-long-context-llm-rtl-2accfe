// tb_workload_packed_stage -- packed-stage latency with and without
// KV prefetch, in the spirit of the published stage-level case studies
// (prefill chunk size against prefetch space), on the default 80 MB /
// 512 MB core with Llama3.1-8B layer sizes but only 2 layers to keep the
// run short.
//
// Request A (8192-token prompt) is prefilled in one iteration.  Request B
// (4096-token prompt) then runs in chunks packed with A's decode, whose
// KV-cache is 8192 tokens = 32768 beats per layer:
//   stage 1: chunk 1024, M = 0         stage 2: chunk 1024, M = 512 MB
//   stage 3: chunk 256,  M = 512 MB    stage 4: chunk 256,  M = 0
// Checked: with 1024-token chunks the linear layers are compute-bound, A's
// KV is fully prefetched in both layers and the stage is shorter than with
// M = 0; with 256-token chunks the linear layers are HBM-bound, so idle
// bandwidth exists only while a short remainder partition is fetched under
// a full one, less KV is prefetched and the gain is smaller than with
// 1024-token chunks (the published observation that short prefills limit
// the gain); every beat the compute units see is correct.  Measured here:
// 1024 tokens 1939997 -> 1884762 cycles, 256 tokens 1073528 -> 1036406.
`timescale 1ns/1ps
module tb_workload_packed_stage;
  import ppsched_pkg::*;
  localparam int NL = 2;
  localparam longint LAYER_W_BEATS = 49152 + 376832;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [TOK_W-1:0]   chunk_tokens;
  logic [IDX_W:0]     pf_limit;
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

  // the packer takes chunk_tokens when it issues an iteration, so the chunk
  // for the next stage is set early in the current one; M is set at the
  // iteration boundary, before the new iteration's compute can start
  task automatic wait_iter_end();
    while (!iter_done) @(negedge clk);
    @(negedge clk);
  endtask

  localparam int CH [5] = '{8192, 1024, 1024, 256, 256};
  localparam int MM [5] = '{0, 0, 524288, 524288, 0};
  longint c [5], pb [5], h [5];
  longint t0, p0, h0;
  initial begin
    chunk_tokens = TOK_W'(CH[0]); pf_limit = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    req_valid = 1; req_prompt = 8192; req_out = 8; req_kv_base = HBM_AW'(NL * LAYER_W_BEATS);
    @(negedge clk);
    req_prompt = 4096; req_out = 1;
    req_kv_base = HBM_AW'(NL * LAYER_W_BEATS + NL * 8200 * 4);
    @(negedge clk);
    req_valid = 0;
    repeat (20) @(negedge clk);
    chunk_tokens = TOK_W'(CH[1]);
    wait_iter_end();                               // A's whole prompt
    for (int k = 1; k < 5; k++) begin
      pf_limit = (IDX_W+1)'(MM[k]);
      t0 = $time / 10; p0 = perf.prefetch_beats; h0 = perf.attn_hit;
      repeat (20) @(negedge clk);
      chunk_tokens = TOK_W'(CH[(k < 4) ? k + 1 : k]);
      wait_iter_end();
      c[k]  = $time / 10 - t0;
      pb[k] = longint'(perf.prefetch_beats) - p0;
      h[k]  = longint'(perf.attn_hit) - h0;
      $display("stage %0d: chunk %0d, M %0d beats: %0d cycles, %0d beats prefetched, %0d attentions fully on chip",
               k, CH[k], MM[k], c[k], pb[k], h[k]);
    end
    check(errors == 0, "compute saw the right data");
    check(pb[1] == 0 && pb[4] == 0, "M = 0: nothing prefetched");
    check(h[2] == NL, "1024-token chunk: A's KV fully prefetched in every layer");
    check(c[2] < c[1], $sformatf("1024-token chunk: prefetch shortens the stage (%0d < %0d)", c[2], c[1]));
    check(pb[3] < pb[2], $sformatf("256-token chunk prefetches less (%0d < %0d beats)", pb[3], pb[2]));
    check(c[1] - c[2] > c[4] - c[3],
          $sformatf("the gain is larger with 1024-token chunks (%0d) than with 256 (%0d)",
                    c[1] - c[2], c[4] - c[3]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (60_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
