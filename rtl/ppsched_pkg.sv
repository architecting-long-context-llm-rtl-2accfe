// ppsched_pkg -- types and constants shared by the packing-prefetch accelerator.
//
// The accelerator streams LLM operations (packed linear layers, prefill
// attention, decode attention) through TPU-like compute units while an
// on-chip scheduler decides, cycle by cycle, what the single HBM read port
// fetches: operand partitions for the next computation first, KV-cache for a
// coming decode attention otherwise.  This package holds the descriptors that
// travel between the blocks and the widths that size them.
//
// Sizes that follow the published configuration (Llama3.1-8B on a
// TPUv6e-like core): 80 MB compute buffer, 512 MB KV prefetch buffer, 32 GB
// HBM.  Sizes that are this design's own choice: a 1 KiB HBM beat (one beat
// per core clock is about 1.8 TB/s at the 1.75 GHz implied by 918 TFLOPS on
// 16 arrays of 128x128, just above the 1.64 TB/s HBM), beat-granular HBM
// addresses, and the descriptor field widths below.
package ppsched_pkg;

  // ---- data path ---------------------------------------------------------
  localparam int unsigned BEAT_BYTES = 1024;             // bytes per HBM beat
  localparam int unsigned DATA_W     = BEAT_BYTES * 8;   // 8192-bit beat

  // ---- address and count widths -----------------------------------------
  localparam int unsigned HBM_AW  = 25;  // 32 GB / 1 KiB beats = 2^25 beats
  localparam int unsigned IDX_W   = 20;  // on-chip word index (512 MB / 1 KiB = 2^19 words)
  localparam int unsigned PART_W  = 17;  // beats in one compute-buffer bank (40960 < 2^17)
  localparam int unsigned TOK_W   = 18;  // token counts (128K context < 2^18)
  localparam int unsigned SLOT_W  = 5;   // request slot index
  localparam int unsigned MAX_REQ = 32;  // request slots in the packer
  localparam int unsigned LAYER_W = 7;   // up to 128 layers
  localparam int unsigned PERF_W  = 32;  // performance counters

  // ---- operations --------------------------------------------------------
  // Per layer, the compute units run the operations in this order
  // (compute row of the packing+prefetch time diagram):
  //   packed linear before attention -> prefill attention of the chunk ->
  //   decode attention of each decode request -> packed linear after attention
  typedef enum logic [1:0] {
    OP_LIN_PRE      = 2'd0,
    OP_ATTN_PREFILL = 2'd1,
    OP_ATTN_DECODE  = 2'd2,
    OP_LIN_POST     = 2'd3
  } op_kind_e;

  typedef struct packed {
    op_kind_e              kind;
    logic [LAYER_W-1:0]    layer;
    logic [SLOT_W-1:0]     req;           // request slot (attention operations)
    logic [TOK_W-1:0]      tokens;        // tokens (matrix rows) the operation processes
    logic [HBM_AW-1:0]     addr;          // first operand beat in HBM
    logic [HBM_AW-1:0]     beats;         // operand beats in HBM (weights or KV-cache)
    logic                  last_of_iter;  // last operation of the packed iteration
  } op_desc_t;

  // One operand partition handed to the compute units.  The partition's
  // beats sit in compute-buffer bank `bank` at word 0..beats-1.  For the
  // first partition of a decode attention, kv_onchip beats of the same
  // operation's KV-cache are waiting, in order, in the KV prefetch buffer.
  typedef struct packed {
    op_desc_t              op;
    logic                  bank;
    logic [PART_W-1:0]     beats;
    logic [HBM_AW-1:0]     kv_onchip;
    logic                  first;
    logic                  last;
  } part_desc_t;

  // HBM read tag: where the returning beat is written.
  typedef struct packed {
    logic              to_kv;   // 1: KV prefetch buffer, 0: compute buffer
    logic              bank;    // compute-buffer bank
    logic [IDX_W-1:0]  idx;     // word within the bank or the prefetch buffer
  } hbm_tag_t;

  // One packed iteration: every decode-phase request (dec_mask) plus, if
  // has_pf, one prefill chunk of request pf_slot covering prompt tokens
  // chunk_start .. chunk_start+chunk_len-1.
  typedef struct packed {
    logic [MAX_REQ-1:0]    dec_mask;
    logic                  has_pf;
    logic [SLOT_W-1:0]     pf_slot;
    logic [TOK_W-1:0]      chunk_start;
    logic [TOK_W-1:0]      chunk_len;
    logic [TOK_W-1:0]      n_tokens;    // decode tokens + chunk tokens
  } iter_desc_t;

  // Mechanism counters reported by the prefetch scheduler.
  typedef struct packed {
    logic [PERF_W-1:0] operand_beats;    // HBM beats granted to operand fetch
    logic [PERF_W-1:0] prefetch_beats;   // HBM beats granted to KV prefetch
    logic [PERF_W-1:0] pf_full_cycles;   // prefetch wanted, buffer at limit M
    logic [PERF_W-1:0] stall_cycles;     // compute idle waiting for operands
    logic [PERF_W-1:0] attn_hit;         // decode attentions found fully prefetched
    logic [PERF_W-1:0] attn_partial;     // decode attentions that fetch a remainder
    logic [PERF_W-1:0] partitions;       // partitions handed to compute
  } perf_t;

endpackage
