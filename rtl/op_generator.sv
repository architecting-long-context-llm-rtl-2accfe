// op_generator -- expands a packed iteration into the layer-by-layer
// operation stream.
//
// For every layer of the model it emits, in this order:
//   1. OP_LIN_PRE       packed linear layers before attention (QKV
//                       projection) over all tokens of the iteration;
//                       operand: the layer's QKV weights;
//   2. OP_ATTN_PREFILL  attention of the prefill chunk, if the iteration has
//                       one; operand: the KV-cache of the request's earlier
//                       chunks (the chunk's own K/V are produced on chip);
//   3. OP_ATTN_DECODE   one per decode request, lowest slot first; operand:
//                       that request's whole KV-cache for this layer;
//   4. OP_LIN_POST      packed linear layers after attention (output
//                       projection and feed-forward); operand: those weights.
// The last OP_LIN_POST of the last layer carries last_of_iter.
//
// HBM layout (this design's own): weights of layer l at
// W_BASE + l*(W_PRE_BEATS+W_POST_BEATS), pre-attention weights first.  KV of
// a request's layer l at kv_base + l*cap*KV_BEATS_PER_TOK, where cap is the
// request's prompt+output tokens.  The defaults are Llama3.1-8B in FP16
// (32 layers, hidden 4096, 32 query / 8 KV heads of 128, FFN 14336), sizes
// taken from the model's public configuration:
//   QKV weights      4096 x 6144 x 2 B                 = 48 MiB = 49152 beats
//   O + FFN weights  (4096x4096 + 3x4096x14336) x 2 B  = 368 MiB = 376832 beats
//   KV per token     2 x 8 x 128 x 2 B                 = 4 KiB  = 4 beats
// Interfaces: iteration in (valid/ready, accepted only when idle), operation
// out (valid/ready), one operation per accepted cycle.
module op_generator
  import ppsched_pkg::*;
#(
  parameter int unsigned       N_LAYERS         = 32,
  parameter logic [HBM_AW-1:0] W_BASE           = '0,
  parameter int unsigned       W_PRE_BEATS      = 49152,
  parameter int unsigned       W_POST_BEATS     = 376832,
  parameter int unsigned       KV_BEATS_PER_TOK = 4
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               it_valid,
  output logic               it_ready,
  input  iter_desc_t         it_desc,
  input  logic [HBM_AW-1:0]  slot_kv_base [MAX_REQ],
  input  logic [TOK_W-1:0]   slot_kv_len  [MAX_REQ],
  input  logic [TOK_W-1:0]   slot_cap     [MAX_REQ],
  output logic               op_valid,
  input  logic               op_ready,
  output op_desc_t           op_desc
);

  typedef enum logic [1:0] {ST_PRE, ST_PF, ST_DEC, ST_POST} step_e;

  logic               busy;
  iter_desc_t         cur;
  step_e              step;
  logic [LAYER_W-1:0] layer;
  logic [SLOT_W:0]    s;          // decode slot cursor

  logic               found;
  logic [SLOT_W-1:0]  nxt;
  logic               fire;

  function automatic logic [HBM_AW-1:0] kv_addr(input logic [HBM_AW-1:0] base,
                                                input logic [TOK_W-1:0] cap,
                                                input logic [LAYER_W-1:0] l);
    return base + HBM_AW'(l * cap * KV_BEATS_PER_TOK);
  endfunction

  always_comb begin
    found = 1'b0;
    nxt   = '0;
    for (int i = MAX_REQ - 1; i >= 0; i--)
      if (cur.dec_mask[i] && (i >= int'(s))) begin found = 1'b1; nxt = SLOT_W'(i); end

    it_ready = !busy;
    op_desc  = '0;
    op_desc.layer = layer;
    op_valid = busy;
    case (step)
      ST_PRE: begin
        op_desc.kind   = OP_LIN_PRE;
        op_desc.tokens = cur.n_tokens;
        op_desc.addr   = W_BASE + HBM_AW'(layer * (W_PRE_BEATS + W_POST_BEATS));
        op_desc.beats  = HBM_AW'(W_PRE_BEATS);
      end
      ST_PF: begin
        op_desc.kind   = OP_ATTN_PREFILL;
        op_desc.req    = cur.pf_slot;
        op_desc.tokens = cur.chunk_len;
        op_desc.addr   = kv_addr(slot_kv_base[cur.pf_slot], slot_cap[cur.pf_slot], layer);
        op_desc.beats  = HBM_AW'(cur.chunk_start * KV_BEATS_PER_TOK);
      end
      ST_DEC: begin
        op_desc.kind   = OP_ATTN_DECODE;
        op_desc.req    = nxt;
        op_desc.tokens = TOK_W'(1);
        op_desc.addr   = kv_addr(slot_kv_base[nxt], slot_cap[nxt], layer);
        op_desc.beats  = HBM_AW'(slot_kv_len[nxt] * KV_BEATS_PER_TOK);
        op_valid       = busy && found;
      end
      default: begin
        op_desc.kind   = OP_LIN_POST;
        op_desc.tokens = cur.n_tokens;
        op_desc.addr   = W_BASE + HBM_AW'(layer * (W_PRE_BEATS + W_POST_BEATS) + W_PRE_BEATS);
        op_desc.beats  = HBM_AW'(W_POST_BEATS);
        op_desc.last_of_iter = (32'(layer) == N_LAYERS - 1);
      end
    endcase
    fire = op_valid && op_ready;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; cur <= '0; step <= ST_PRE; layer <= '0; s <= '0;
    end else if (!busy) begin
      if (it_valid) begin
        busy  <= 1'b1;
        cur   <= it_desc;
        step  <= ST_PRE;
        layer <= '0;
        s     <= '0;
      end
    end else begin
      case (step)
        ST_PRE:  if (fire) begin step <= cur.has_pf ? ST_PF : ST_DEC; s <= '0; end
        ST_PF:   if (fire) step <= ST_DEC;
        ST_DEC:  if (!found)   step <= ST_POST;
                 else if (fire) s <= {1'b0, nxt} + 1'b1;
        default: if (fire) begin
                   if (32'(layer) == N_LAYERS - 1) busy <= 1'b0;
                   else begin layer <= layer + 1'b1; step <= ST_PRE; end
                 end
      endcase
    end
  end

endmodule
