// kv_prefetch_buffer -- the 512 MB KV-cache prefetch buffer (M3D BEOL memory).
//
// Holds KV-cache beats fetched from HBM ahead of the decode attention that
// will use them.  Prefetch runs in the order of the coming decode attentions
// and each attention consumes its beats in that same order, so the buffer is
// a ring: space is reserved when the scheduler issues the HBM read (so beats
// still in flight are counted against the limit), the beat is written when
// it returns, and the compute units pop beats from the oldest end.
//
// Interface:
//   resv            reserve the word at resv_idx for a read now being issued
//   wr_en/idx/data  HBM return beat written into its reserved word
//   rd_en           pop the oldest word; rd_data holds it the next cycle
//   used            reserved-but-not-popped words (what the scheduler holds
//                   against its prefetch limit M)
// A reservation and a pop may happen in the same cycle.
//
// Follows the published configuration: 512 MB of prefetch capacity for
// Llama3.1-8B on the TPUv6e-like core.  The gain-cell memory technology
// itself (refresh, sensing) is not modelled: the array here is its logical
// behaviour.  1 KiB words and the ring organisation are this design's own.
module kv_prefetch_buffer
  import ppsched_pkg::*;
#(
  parameter int unsigned WORDS = 524288,   // 512 MB / 1 KiB
  parameter int unsigned W     = DATA_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              resv,
  output logic [IDX_W-1:0]  resv_idx,
  input  logic              wr_en,
  input  logic [IDX_W-1:0]  wr_idx,
  input  logic [W-1:0]      wr_data,
  input  logic              rd_en,
  output logic [W-1:0]      rd_data,
  output logic [IDX_W:0]    used
);

  localparam int unsigned AW = (WORDS > 1) ? $clog2(WORDS) : 1;

  logic [W-1:0]     mem [WORDS];
  logic [IDX_W-1:0] rp;

  function automatic logic [IDX_W-1:0] incr(input logic [IDX_W-1:0] p);
    return (32'(p) == WORDS - 1) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      resv_idx <= '0;
      rp       <= '0;
      used     <= '0;
    end else begin
      if (resv)  resv_idx <= incr(resv_idx);
      if (rd_en) rp       <= incr(rp);
      case ({resv, rd_en})
        2'b10:   used <= used + 1'b1;
        2'b01:   used <= used - 1'b1;
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (wr_en) mem[AW'(wr_idx)] <= wr_data;
    if (rd_en) rd_data <= mem[AW'(rp)];
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n)
                                   resv && !rd_en |-> 32'(used) < WORDS);
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n)
                                   rd_en |-> used != 0);
  a_wr_range:     assert property (@(posedge clk) disable iff (!rst_n)
                                   wr_en |-> 32'(wr_idx) < WORDS);

endmodule
