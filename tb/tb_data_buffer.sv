// tb_data_buffer: fills a buffer at random addresses, reads back against a model,
// checks the one-cycle read latency and that the output holds without rd_en.
`timescale 1ns/1ps
module tb_data_buffer;
  import mpc_pkg::*;
  localparam int DEPTH = 2048;
  localparam int AW = $clog2(DEPTH);

  int checks = 0, failures = 0;
  logic clk = 0;
  always #1 clk = ~clk;
  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic we = 0, rd_en = 0;
  logic [AW-1:0] wr_addr = '0, rd_addr = '0;
  triple_t wr_data = '0, rd_data, model [DEPTH], hold;

  data_buffer #(.DEPTH(DEPTH)) dut (.clk, .we, .wr_addr, .wr_data, .rd_en, .rd_addr, .rd_data);

  initial begin
    @(negedge clk);
    for (int a = 0; a < DEPTH; a++) begin
      we = 1; wr_addr = AW'(a);
      for (int l = 0; l < 3; l++) wr_data[l] = {$urandom, $urandom, $urandom, 32'(a)};
      model[a] = wr_data;
      @(negedge clk);
    end
    // random overwrites while reading other addresses
    for (int t = 0; t < 4000; t++) begin
      we = 1'($urandom_range(1));
      wr_addr = AW'($urandom);
      for (int l = 0; l < 3; l++) wr_data[l] = {$urandom, $urandom, $urandom, $urandom};
      rd_en = 1; rd_addr = AW'($urandom);
      if (we && wr_addr == rd_addr) we = 0;
      @(negedge clk);
      checks++;
      if (rd_data != model[rd_addr]) begin failures++; $display("read %0d mismatch", rd_addr); end
      if (we) model[wr_addr] = wr_data;
    end
    we = 0; hold = rd_data; rd_en = 0; rd_addr = rd_addr + 1'b1;
    @(negedge clk);
    checks++;
    if (rd_data != hold) begin failures++; $display("output changed without rd_en"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
