// tb_op_generator -- self-checking test of the layer-by-layer expansion.
// Two layers, 3-beat pre-attention and 5-beat post-attention weights, 4 KV
// beats per token.  One iteration with decode requests in slots 1 and 3 and
// a prefill chunk of slot 2 (tokens 2..3).  The expected operation list is
// built independently in the testbench from the layout rules; operations
// are taken with random back-pressure and compared one by one.
`timescale 1ns/1ps
module tb_op_generator;
  import ppsched_pkg::*;
  localparam int NL = 2, WPRE = 3, WPOST = 5, KVB = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic              it_valid = 0, it_ready, op_valid, op_ready = 0;
  iter_desc_t        it_desc = '0;
  logic [HBM_AW-1:0] slot_kv_base [MAX_REQ];
  logic [TOK_W-1:0]  slot_kv_len  [MAX_REQ];
  logic [TOK_W-1:0]  slot_cap     [MAX_REQ];
  op_desc_t          op_desc;

  op_generator #(.N_LAYERS(NL), .W_BASE(HBM_AW'(100)), .W_PRE_BEATS(WPRE),
                 .W_POST_BEATS(WPOST), .KV_BEATS_PER_TOK(KVB)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  op_desc_t exp_q [$];
  function automatic op_desc_t mk(op_kind_e k, int l, int req, int tok, int addr, int beats, bit last);
    op_desc_t o;
    o = '0;
    o.kind = k; o.layer = LAYER_W'(l); o.req = SLOT_W'(req); o.tokens = TOK_W'(tok);
    o.addr = HBM_AW'(addr); o.beats = HBM_AW'(beats); o.last_of_iter = last;
    return o;
  endfunction

  int n_got = 0;
  initial begin
    for (int i = 0; i < MAX_REQ; i++) begin
      slot_kv_base[i] = HBM_AW'(10000 * (i + 1)); slot_kv_len[i] = TOK_W'(5 + i); slot_cap[i] = TOK_W'(20 + i);
    end
    it_desc.dec_mask = 32'b1010;
    it_desc.has_pf = 1; it_desc.pf_slot = 2; it_desc.chunk_start = 2; it_desc.chunk_len = 2;
    it_desc.n_tokens = 4;
    for (int l = 0; l < NL; l++) begin
      exp_q.push_back(mk(OP_LIN_PRE, l, 0, 4, 100 + l*(WPRE+WPOST), WPRE, 0));
      exp_q.push_back(mk(OP_ATTN_PREFILL, l, 2, 2, 30000 + l*22*KVB, 2*KVB, 0));
      exp_q.push_back(mk(OP_ATTN_DECODE, l, 1, 1, 20000 + l*21*KVB, 6*KVB, 0));
      exp_q.push_back(mk(OP_ATTN_DECODE, l, 3, 1, 40000 + l*23*KVB, 8*KVB, 0));
      exp_q.push_back(mk(OP_LIN_POST, l, 0, 4, 100 + l*(WPRE+WPOST) + WPRE, WPOST, l == NL-1));
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check(it_ready && !op_valid, "idle after reset");
    it_valid = 1;
    @(negedge clk);
    it_valid = 0;
    check(!it_ready, "busy with the iteration");
    while (exp_q.size() != 0 && n_got < 40) begin
      op_ready = ($urandom_range(0, 2) != 0);
      if (op_valid && op_ready) begin
        op_desc_t e;
        e = exp_q.pop_front();
        check(op_desc == e, $sformatf("op %0d: kind %0d layer %0d req %0d addr %0d beats %0d",
                                      n_got, op_desc.kind, op_desc.layer, op_desc.req,
                                      op_desc.addr, op_desc.beats));
        n_got++;
      end
      @(negedge clk);
    end
    op_ready = 0;
    check(n_got == 5 * NL, "all operations emitted");
    @(negedge clk);
    check(it_ready && !op_valid, "idle after the last layer");
    // an iteration without prefill skips the prefill attention
    it_desc.has_pf = 0; it_desc.dec_mask = 32'b1; it_desc.n_tokens = 1;
    it_valid = 1;
    @(negedge clk);
    it_valid = 0;
    op_ready = 1;
    for (int k = 0; k < 3 * NL; k++) begin
      while (!op_valid) @(negedge clk);
      if (k % 3 == 1) check(op_desc.kind == OP_ATTN_DECODE && op_desc.req == 0, "decode-only layer");
      if (k % 3 == 0) check(op_desc.kind == OP_LIN_PRE, "layer starts with linear");
      @(negedge clk);
    end
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
