// tb_kv_prefetch_buffer -- self-checking test of the KV prefetch ring.
// Reserves words (as the scheduler does when issuing HBM reads), writes them
// out of reservation order (returns of different reservations), pops them in
// order and checks data, the reservation index, the occupancy count with
// simultaneous reserve and pop, and wrap-around over several laps.
`timescale 1ns/1ps
module tb_kv_prefetch_buffer;
  import ppsched_pkg::*;
  localparam int WORDS = 8, W = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic resv = 0, wr_en = 0, rd_en = 0;
  logic [IDX_W-1:0] resv_idx, wr_idx = '0;
  logic [W-1:0] wr_data = '0, rd_data;
  logic [IDX_W:0] used;

  kv_prefetch_buffer #(.WORDS(WORDS), .W(W)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int q_val [$];      // values in reservation order
  int exp_idx = 0;
  int next_val = 100;
  int n_used = 0;

  // reserve n words then write them in reverse order
  task automatic fill(input int n);
    int idx [$];
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      check(32'(resv_idx) == exp_idx, "reservation index");
      idx.push_back(int'(resv_idx));
      resv = 1;
      exp_idx = (exp_idx + 1) % WORDS;
      @(negedge clk);
      resv = 0;
      n_used++;
      check(32'(used) == n_used, "used after reserve");
    end
    for (int i = n - 1; i >= 0; i--) begin
      wr_en = 1; wr_idx = IDX_W'(idx[i]); wr_data = W'(next_val + i);
      @(negedge clk);
    end
    wr_en = 0;
    for (int i = 0; i < n; i++) q_val.push_back(next_val + i);
    next_val += 100;
  endtask

  task automatic drain(input int n);
    for (int i = 0; i < n; i++) begin
      rd_en = 1;
      @(negedge clk);
      rd_en = 0;
      n_used--;
      check(rd_data == W'(q_val.pop_front()), "pop order and data");
      check(32'(used) == n_used, "used after pop");
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(used == 0 && resv_idx == 0, "reset state");
    fill(WORDS);          // full
    drain(3);
    fill(3);              // wraps
    drain(WORDS);
    for (int lap = 0; lap < 3; lap++) begin fill(5); drain(5); end
    // reserve and pop in the same cycle keeps the count
    fill(2);
    resv = 1; rd_en = 1;
    @(negedge clk);
    resv = 0; rd_en = 0;
    check(used == 2, "reserve and pop together");
    check(rd_data == W'(q_val.pop_front()), "pop during reserve");
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
