// tb_prng: checks the keyed generator against an independent model, its one-cycle
// latency, that it only updates on in_valid, and that streams and counters differ.
`timescale 1ns/1ps
module tb_prng;
  import mpc_pkg::*;
  import tb_ref_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic in_valid = 0, out_valid;
  share_t key = '0, rnd, hold;
  logic [1:0] stream = '0;
  ctr_t ctr = '0;

  prng dut (.clk, .rst_n, .in_valid, .key, .stream, .ctr, .out_valid, .rnd);

  task automatic check(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    share_t exp, prev;
    // the model's mixer is SplitMix64: first output of seed 0 is 0xE220A8397B1DCDAF
    check(ref_mix64(64'h9E3779B97F4A7C15) == 64'hE220A8397B1DCDAF, "reference mix64");
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int t = 0; t < 300; t++) begin
      key = {$urandom, $urandom, $urandom, $urandom};
      stream = 2'($urandom);
      ctr = {$urandom, $urandom};
      in_valid = 1;
      exp = ref_prng(key, int'(stream), ctr);
      @(negedge clk);
      check(out_valid && rnd == exp, $sformatf("word %0d: got %h want %h", t, rnd, exp));
    end
    // no update without in_valid
    in_valid = 0; hold = rnd;
    key = ~key;
    @(negedge clk);
    check(!out_valid && rnd == hold, "holds when idle");
    // streams and neighbouring counters give different words
    in_valid = 1;
    for (int s = 0; s < 4; s++) begin
      stream = 2'(s); ctr = 64'd7;
      @(negedge clk);
      if (s > 0) check(rnd != prev, "streams differ");
      prev = rnd;
    end
    ctr = 64'd8;
    @(negedge clk);
    check(rnd != prev, "counters differ");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
