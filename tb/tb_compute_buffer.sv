// tb_compute_buffer -- self-checking test of the two-bank operand buffer.
// Random writes into both banks, reads checked against a reference array,
// one-cycle read latency checked, and a read of one bank in the same cycle
// as a write to the other (the double-buffering case).
`timescale 1ns/1ps
module tb_compute_buffer;
  import ppsched_pkg::*;
  localparam int BANK = 16, W = 64;
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_en = 0, wr_bank = 0, rd_en = 0, rd_bank = 0;
  logic [PART_W-1:0] wr_addr = '0, rd_addr = '0;
  logic [W-1:0] wr_data = '0, rd_data;
  logic [W-1:0] ref_mem [2*BANK];

  compute_buffer #(.BANK_WORDS(BANK), .W(W)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    // fill both banks
    for (int b = 0; b < 2; b++)
      for (int a = 0; a < BANK; a++) begin
        @(negedge clk);
        wr_en = 1; wr_bank = b[0]; wr_addr = PART_W'(a);
        wr_data = {$urandom, $urandom};
        ref_mem[b*BANK + a] = wr_data;
      end
    @(negedge clk); wr_en = 0;
    // read everything back, check latency of exactly one cycle
    for (int b = 0; b < 2; b++)
      for (int a = 0; a < BANK; a++) begin
        rd_en = 1; rd_bank = b[0]; rd_addr = PART_W'(a);
        @(negedge clk);
        check(rd_data == ref_mem[b*BANK + a], $sformatf("read bank %0d word %0d", b, a));
      end
    rd_en = 0;
    // ping-pong: write bank 1 while reading bank 0
    for (int a = 0; a < BANK; a++) begin
      rd_en = 1; rd_bank = 0; rd_addr = PART_W'(a);
      wr_en = 1; wr_bank = 1; wr_addr = PART_W'(a); wr_data = ~ref_mem[a];
      ref_mem[BANK + a] = wr_data;
      @(negedge clk);
      check(rd_data == ref_mem[a], "read bank 0 while writing bank 1");
    end
    wr_en = 0;
    for (int a = 0; a < BANK; a++) begin
      rd_en = 1; rd_bank = 1; rd_addr = PART_W'(a);
      @(negedge clk);
      check(rd_data == ref_mem[BANK + a], "bank 1 holds the overlapped writes");
    end
    // read holds its value when rd_en is low
    rd_en = 0;
    @(negedge clk);
    check(rd_data == ref_mem[2*BANK - 1], "output held without rd_en");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
