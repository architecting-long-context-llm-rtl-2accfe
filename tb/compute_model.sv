// compute_model -- behavioural model of the matrix/vector units (not RTL).
//
// Takes one partition at a time.  It pops the partition's kv_onchip beats
// from the prefetch buffer and reads the first and last beat of the
// partition from the compute buffer, checking every beat against the HBM
// pattern of the address it must have come from (prefetched KV first, then
// the partitions in order).  It then stays busy for
// tokens * (beats + kv_onchip) / CYC_DIV cycles (at least the reads it
// made) and pulses done.  CYC_DIV = 512 is the TPUv6e-like peak: 16 arrays
// of 128x128 do 524288 FLOP per cycle and one 1 KiB beat of FP16 weights is
// 1024 FLOP per token.  Counts data errors and partitions by kind.
module compute_model
  import ppsched_pkg::*;
#(
  parameter int CYC_DIV = 512
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              valid,
  output logic              ready,
  input  part_desc_t        part,
  output logic              done,
  output logic              cb_rd_en,
  output logic              cb_rd_bank,
  output logic [PART_W-1:0] cb_rd_addr,
  input  logic [DATA_W-1:0] cb_rd_data,
  output logic              kv_rd_en,
  input  logic [DATA_W-1:0] kv_rd_data,
  output int                errors,
  output int                n_part,
  output longint            n_beats,   // operand beats consumed (buffer + prefetched)
  output int                n_kind [4]
);
  logic [HBM_AW-1:0] off;   // operand beats of the current op already seen

  task automatic expect_beat(input logic [DATA_W-1:0] got, input logic [HBM_AW-1:0] a);
    if (got !== tb_pkg::beat_pattern(a)) begin
      errors++;
      if (errors < 5) $display("compute_model: data mismatch at HBM beat %0d (got word %h) t=%0t", a, got[31:0], $time);
    end
  endtask

  // All driving and sampling happens at the falling edge, half a cycle
  // away from the design's rising-edge updates.
  initial begin
    ready = 1'b0; done = 1'b0; cb_rd_en = 1'b0; cb_rd_bank = 1'b0; cb_rd_addr = '0;
    kv_rd_en = 1'b0; errors = 0; n_part = 0; n_beats = 0; off = '0;
    for (int k = 0; k < 4; k++) n_kind[k] = 0;
    forever begin
      part_desc_t p;
      longint     cycles, spent;
      @(negedge clk);
      if (!rst_n) continue;
      ready = 1'b1;
      while (!valid) @(negedge clk);
      p = part;                      // accepted at the next rising edge
      @(negedge clk);
      ready = 1'b0;
      n_part++;
      n_beats += longint'(p.beats) + longint'(p.kv_onchip);
      if (p.first) begin n_kind[p.op.kind]++; off = '0; end
      spent = 1;
      for (longint k = 0; k < longint'(p.kv_onchip); k++) begin
        kv_rd_en = 1'b1;
        @(negedge clk);
        kv_rd_en = 1'b0;
        expect_beat(kv_rd_data, p.op.addr + HBM_AW'(k));
        spent++;
      end
      off = off + p.kv_onchip;
      if (p.beats != 0) begin
        cb_rd_en = 1'b1; cb_rd_bank = p.bank; cb_rd_addr = '0;
        @(negedge clk);
        expect_beat(cb_rd_data, p.op.addr + off);
        cb_rd_addr = p.beats - 1'b1;
        @(negedge clk);
        cb_rd_en = 1'b0;
        expect_beat(cb_rd_data, p.op.addr + off + HBM_AW'(p.beats) - 1'b1);
        spent += 2;
      end
      off = off + HBM_AW'(p.beats);
      cycles = (longint'(p.op.tokens) * (longint'(p.beats) + longint'(p.kv_onchip))) / CYC_DIV;
      while (spent < cycles) begin @(negedge clk); spent++; end
      done = 1'b1;
      @(negedge clk);
      done = 1'b0;
    end
  end
endmodule
