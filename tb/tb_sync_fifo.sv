// tb_sync_fifo: random pushes and pops against a queue model; checks order, count,
// full (in_ready low at DEPTH entries) and empty.
`timescale 1ns/1ps
module tb_sync_fifo;
  localparam int DEPTH = 16;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [31:0] in_data = '0, out_data;
  logic [$clog2(DEPTH):0] count;
  logic [31:0] model [$];
  int n_full = 0, n_empty = 0;

  sync_fifo #(.T(logic [31:0]), .DEPTH(DEPTH)) dut (
    .clk, .rst_n, .in_valid, .in_ready, .in_data, .out_valid, .out_ready, .out_data, .count);

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int t = 0; t < 6000; t++) begin
      // phases: fill-biased, drain-biased, balanced
      int bias;
      bias = (t / 500) % 3;
      in_valid  = ($urandom_range(9) < (bias == 0 ? 8 : bias == 1 ? 2 : 5));
      out_ready = ($urandom_range(9) < (bias == 1 ? 8 : bias == 0 ? 2 : 5));
      in_data   = $urandom;
      #0.5;
      checks++;
      if (count != $bits(count)'(model.size()) || in_ready != (model.size() < DEPTH) ||
          out_valid != (model.size() > 0)) begin
        failures++; $display("status mismatch at %0d: count %0d model %0d", t, count, model.size());
      end
      if (model.size() == DEPTH) n_full++;
      if (model.size() == 0) n_empty++;
      if (out_valid && out_ready) begin
        checks++;
        if (out_data != model[0]) begin failures++; $display("order mismatch at %0d", t); end
      end
      @(posedge clk);
      if (out_valid && out_ready) void'(model.pop_front());
      if (in_valid && in_ready) model.push_back(in_data);
      @(negedge clk);
    end
    checks++;
    if (n_full == 0 || n_empty == 0) begin failures++; $display("full/empty never reached"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
