// compute_buffer -- on-chip operand buffer (80 MB) for the compute units.
//
// Holds operand partitions (weights, or KV-cache that was not prefetched)
// fetched from HBM.  It is split into two banks used ping-pong: while the
// compute units read the partition in one bank, the HBM fills the next
// partition into the other bank.  That is the double buffering that lets
// compute and HBM transfer overlap.
//
// Interface: one write port (an HBM return beat, any bank, any word) and one
// read port for the compute units.  A read issued in cycle t returns its
// word on rd_data in cycle t+1.  Both ports may be used in the same cycle;
// the scheduler never lets them touch the same bank, so no bypass is needed.
//
// Follows the published configuration: 80 MB of compute buffer.  This
// design's own choices: 1 KiB words (the HBM beat), two equal banks, one
// read and one write port, no reset of the array (nothing reads a word
// before it was written).
module compute_buffer
  import ppsched_pkg::*;
#(
  parameter int unsigned BANK_WORDS = 40960,   // 2 x 40960 x 1 KiB = 80 MB
  parameter int unsigned W          = DATA_W
) (
  input  logic               clk,
  // write port (HBM return)
  input  logic               wr_en,
  input  logic               wr_bank,
  input  logic [PART_W-1:0]  wr_addr,
  input  logic [W-1:0]       wr_data,
  // read port (compute units)
  input  logic               rd_en,
  input  logic               rd_bank,
  input  logic [PART_W-1:0]  rd_addr,
  output logic [W-1:0]       rd_data
);

  localparam int unsigned WORDS = 2 * BANK_WORDS;
  localparam int unsigned AW    = $clog2(WORDS);

  logic [W-1:0] mem [WORDS];

  logic [AW-1:0] wa, ra;
  always_comb begin
    wa = AW'(wr_bank ? BANK_WORDS + 32'(wr_addr) : 32'(wr_addr));
    ra = AW'(rd_bank ? BANK_WORDS + 32'(rd_addr) : 32'(rd_addr));
  end

  always_ff @(posedge clk) begin
    if (wr_en) mem[wa] <= wr_data;
    if (rd_en) rd_data <= mem[ra];
  end

  // A bank holds BANK_WORDS words; nothing may address past it.
  a_wr_range: assert property (@(posedge clk) wr_en |-> 32'(wr_addr) < BANK_WORDS);
  a_rd_range: assert property (@(posedge clk) rd_en |-> 32'(rd_addr) < BANK_WORDS);

endmodule
