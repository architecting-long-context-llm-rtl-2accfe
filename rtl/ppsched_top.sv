// ppsched_top -- compute-core control and on-chip memories of the
// packing-prefetch LLM accelerator.
//
// The core runs chunked-prefill/decode packed iterations layer by layer and
// hides the decode-attention KV-cache traffic behind the compute-bound
// packed linear layers.  Data flow:
//
//   requests -> request_packer -> op_generator -> prefetch_scheduler
//                                                     |  HBM read port
//                     HBM returns (by tag) ----> compute_buffer (2 banks, 80 MB)
//                                          \---> kv_prefetch_buffer (512 MB)
//   compute units <- partitions (cmp_*) and read ports of both buffers
//
// The matrix and vector units and the HBM itself are outside this module:
// the compute units take one partition at a time (cmp_valid/ready, cmp_part),
// read its beats from the compute buffer (cb_rd_*, one-cycle latency),
// pop part.kv_onchip beats of prefetched KV from the prefetch buffer
// (kv_rd_en, one-cycle latency) for a decode attention, and pulse cmp_done.
// The HBM takes one beat read per cycle (hbm_req_valid/ready) and returns
// beats in request order with their tag (hbm_rsp_*).
//
// Run-time configuration: chunk_tokens (prefill chunk size, 512 or 1024 in
// the service-level runs) and pf_limit, the prefetch space M in beats (0
// turns the design into packing without prefetch, 512 MB = 524288 beats
// is the full buffer).
//
// Sizes follow the Llama3.1-8B / TPUv6e-like configuration: 80 MB compute
// buffer, 512 MB prefetch buffer, 32 GB HBM address space.  Everything in
// the per-block comments marked as this design's own choice applies here.
module ppsched_top
  import ppsched_pkg::*;
#(
  parameter int unsigned BANK_WORDS       = 40960,
  parameter int unsigned KV_WORDS         = 524288,
  parameter int unsigned N_LAYERS         = 32,
  parameter int unsigned W_PRE_BEATS      = 49152,
  parameter int unsigned W_POST_BEATS     = 376832,
  parameter int unsigned KV_BEATS_PER_TOK = 4,
  parameter int unsigned OPQ_DEPTH        = 64,
  parameter int unsigned KVQ_DEPTH        = 64
) (
  input  logic               clk,
  input  logic               rst_n,
  // configuration
  input  logic [TOK_W-1:0]   chunk_tokens,
  input  logic [IDX_W:0]     pf_limit,
  // request admission and completion
  input  logic               req_valid,
  output logic               req_ready,
  input  logic [TOK_W-1:0]   req_prompt,
  input  logic [TOK_W-1:0]   req_out,
  input  logic [HBM_AW-1:0]  req_kv_base,
  output logic [SLOT_W-1:0]  req_slot,
  output logic [MAX_REQ-1:0] req_fin,
  output logic               iter_done,
  // HBM read port
  output logic               hbm_req_valid,
  input  logic               hbm_req_ready,
  output logic [HBM_AW-1:0]  hbm_req_addr,
  output hbm_tag_t           hbm_req_tag,
  input  logic               hbm_rsp_valid,
  input  hbm_tag_t           hbm_rsp_tag,
  input  logic [DATA_W-1:0]  hbm_rsp_data,
  // compute units (systolic arrays and vector units)
  output logic               cmp_valid,
  input  logic               cmp_ready,
  output part_desc_t         cmp_part,
  input  logic               cmp_done,
  input  logic               cb_rd_en,
  input  logic               cb_rd_bank,
  input  logic [PART_W-1:0]  cb_rd_addr,
  output logic [DATA_W-1:0]  cb_rd_data,
  input  logic               kv_rd_en,
  output logic [DATA_W-1:0]  kv_rd_data,
  // mechanism counters
  output perf_t              perf
);

  logic               it_valid, it_ready;
  iter_desc_t         it_desc;
  logic [HBM_AW-1:0]  slot_kv_base [MAX_REQ];
  logic [TOK_W-1:0]   slot_kv_len  [MAX_REQ];
  logic [TOK_W-1:0]   slot_cap     [MAX_REQ];
  logic               op_valid, op_ready;
  op_desc_t           op_desc;
  logic               kvb_resv;
  logic [IDX_W-1:0]   kvb_resv_idx;
  logic [IDX_W:0]     kvb_used;

  request_packer u_packer (
    .clk, .rst_n, .chunk_tokens,
    .req_valid, .req_ready, .req_prompt, .req_out, .req_kv_base, .req_slot,
    .it_valid, .it_ready, .it_desc, .iter_done,
    .slot_kv_base, .slot_kv_len, .slot_cap, .fin(req_fin)
  );

  op_generator #(
    .N_LAYERS(N_LAYERS), .W_BASE('0), .W_PRE_BEATS(W_PRE_BEATS),
    .W_POST_BEATS(W_POST_BEATS), .KV_BEATS_PER_TOK(KV_BEATS_PER_TOK)
  ) u_opgen (
    .clk, .rst_n, .it_valid, .it_ready, .it_desc,
    .slot_kv_base, .slot_kv_len, .slot_cap,
    .op_valid, .op_ready, .op_desc
  );

  prefetch_scheduler #(
    .BANK_WORDS(BANK_WORDS), .KV_WORDS(KV_WORDS),
    .OPQ_DEPTH(OPQ_DEPTH), .KVQ_DEPTH(KVQ_DEPTH)
  ) u_sched (
    .clk, .rst_n, .pf_limit,
    .op_valid, .op_ready, .op_desc,
    .hbm_req_valid, .hbm_req_ready, .hbm_req_addr, .hbm_req_tag,
    .hbm_rsp_valid, .hbm_rsp_tag,
    .kvb_resv, .kvb_resv_idx, .kvb_used,
    .cmp_valid, .cmp_ready, .cmp_part, .cmp_done,
    .iter_done, .perf
  );

  compute_buffer #(.BANK_WORDS(BANK_WORDS)) u_cbuf (
    .clk,
    .wr_en   (hbm_rsp_valid && !hbm_rsp_tag.to_kv),
    .wr_bank (hbm_rsp_tag.bank),
    .wr_addr (PART_W'(hbm_rsp_tag.idx)),
    .wr_data (hbm_rsp_data),
    .rd_en   (cb_rd_en),
    .rd_bank (cb_rd_bank),
    .rd_addr (cb_rd_addr),
    .rd_data (cb_rd_data)
  );

  kv_prefetch_buffer #(.WORDS(KV_WORDS)) u_kvbuf (
    .clk, .rst_n,
    .resv     (kvb_resv),
    .resv_idx (kvb_resv_idx),
    .wr_en    (hbm_rsp_valid && hbm_rsp_tag.to_kv),
    .wr_idx   (hbm_rsp_tag.idx),
    .wr_data  (hbm_rsp_data),
    .rd_en    (kv_rd_en),
    .rd_data  (kv_rd_data),
    .used     (kvb_used)
  );

endmodule
