// tb_mpc_stage2: back-to-back random elements with gaps; z = t + r lane by lane,
// one-cycle latency, one element per cycle.
`timescale 1ns/1ps
module tb_mpc_stage2;
  import mpc_pkg::*;

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
  triple_t t_in = '0, r_in = '0, z_out;
  triple_t expq [$];

  mpc_stage2 dut (.clk, .rst_n, .in_valid, .t_in, .r_in, .out_valid, .z_out);

  function automatic share_t r128(); return {$urandom, $urandom, $urandom, $urandom}; endfunction

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int t = 0; t < 400; t++) begin
      triple_t e;
      in_valid = (t < 200) ? 1'b1 : 1'($urandom_range(1));
      for (int l = 0; l < 3; l++) begin
        t_in[l] = r128(); r_in[l] = (t % 7 == 0) ? ~t_in[l] : r128();
        e[l] = t_in[l] + r_in[l];
      end
      if (in_valid) expq.push_back(e);
      @(negedge clk);
      // element pushed this cycle must appear now (latency 1)
      checks++;
      if (in_valid != out_valid) begin failures++; $display("valid mismatch at %0d", t); end
      if (out_valid) begin
        triple_t x;
        x = expq.pop_front();
        checks++;
        if (z_out != x) begin failures++; $display("data mismatch at %0d", t); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
