// tb_request_packer -- self-checking test of chunked-prefill/decode packing.
// Chunk size 4.  Requests A (prompt 4, 2 outputs) and B (4, 3) arrive first,
// C (10, 2) after the second iteration, D after A leaves.  The expected
// iteration sequence was worked out by hand:
//   it1: prefill A[0..4)                      tokens 4
//   it2: decode A      + prefill B[0..4)      tokens 5
//   it3: decode A,B    + prefill C[0..4)      tokens 6   (A finishes)
//   it4: decode B      + prefill C[4..8)      tokens 5
//   it5: decode B      + prefill C[8..10)     tokens 3   (B finishes)
//   it6: decode C, D   + -                    (D admitted, prefilled in it6)
// Checked: each descriptor, KV lengths, capacities, finish pulses, slot reuse.
`timescale 1ns/1ps
module tb_request_packer;
  import ppsched_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [TOK_W-1:0]   chunk_tokens = TOK_W'(4);
  logic               req_valid = 0, req_ready;
  logic [TOK_W-1:0]   req_prompt = '0, req_out = '0;
  logic [HBM_AW-1:0]  req_kv_base = '0;
  logic [SLOT_W-1:0]  req_slot;
  logic               it_valid, it_ready = 0, iter_done = 0;
  iter_desc_t         it_desc;
  logic [HBM_AW-1:0]  slot_kv_base [MAX_REQ];
  logic [TOK_W-1:0]   slot_kv_len  [MAX_REQ];
  logic [TOK_W-1:0]   slot_cap     [MAX_REQ];
  logic [MAX_REQ-1:0] fin;

  request_packer dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic [MAX_REQ-1:0] fin_seen;
  always_ff @(posedge clk) if (rst_n) fin_seen <= fin_seen | fin;

  task automatic admit(input int p, input int o, input int base, input int exp_slot);
    req_valid = 1; req_prompt = TOK_W'(p); req_out = TOK_W'(o); req_kv_base = HBM_AW'(base);
    check(req_ready && req_slot == SLOT_W'(exp_slot), $sformatf("admission slot %0d", exp_slot));
    @(negedge clk);
    req_valid = 0;
  endtask

  // take one iteration, compare it, then report it done
  task automatic iter(input logic [MAX_REQ-1:0] dec, input bit pf, input int pslot,
                      input int cstart, input int clen, input int ntok, input string name);
    int w = 0;
    while (!it_valid && w < 20) begin @(negedge clk); w++; end
    check(it_valid, {name, ": iteration offered"});
    check(it_desc.dec_mask == dec, {name, ": decode set"});
    check(it_desc.has_pf == pf, {name, ": prefill present"});
    if (pf) begin
      check(it_desc.pf_slot == SLOT_W'(pslot), {name, ": prefill slot"});
      check(it_desc.chunk_start == TOK_W'(cstart) && it_desc.chunk_len == TOK_W'(clen),
            {name, ": chunk"});
    end
    check(it_desc.n_tokens == TOK_W'(ntok), {name, ": packed tokens"});
    it_ready = 1;
    @(negedge clk);
    it_ready = 0;
    check(!it_valid, {name, ": one iteration in flight"});
    repeat (3) @(negedge clk);
    iter_done = 1;
    @(negedge clk);
    iter_done = 0;
    @(negedge clk);   // finish pulses are registered
  endtask

  initial begin
    fin_seen = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(!it_valid, "idle without requests");
    admit(4, 2, 1000, 0);   // A
    admit(4, 3, 2000, 1);   // B
    check(slot_cap[0] == 6 && slot_cap[1] == 7, "capacities prompt+output");
    check(slot_kv_base[1] == 2000, "KV base stored");
    iter(32'b000, 1, 0, 0, 4, 4, "it1");
    check(slot_kv_len[0] == 4, "A turns to decode with KV = prompt");
    iter(32'b001, 1, 1, 0, 4, 5, "it2");
    check(slot_kv_len[0] == 5 && slot_kv_len[1] == 4, "KV grows by one per decode");
    admit(10, 2, 3000, 2);  // C
    iter(32'b011, 1, 2, 0, 4, 6, "it3");
    check(fin_seen == 32'b001, "A finished after two outputs");
    iter(32'b010, 1, 2, 4, 4, 5, "it4");
    admit(3, 1, 4000, 0);   // D reuses A's slot
    iter(32'b010, 1, 2, 8, 2, 3, "it5");
    check(fin_seen == 32'b011, "B finished after three outputs");
    check(slot_kv_len[2] == 10, "C decodes with KV = prompt 10");
    iter(32'b100, 1, 0, 0, 3, 4, "it6");
    iter(32'b101, 0, 0, 0, 0, 2, "it7");
    check(fin_seen == 32'b111, "C and D finished");
    check(slot_kv_len[2] == 12, "C KV after its two decodes");
    repeat (2) @(negedge clk);
    check(!it_valid, "idle after all requests finished");
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
