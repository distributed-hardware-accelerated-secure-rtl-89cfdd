// tb_la_dma: four requesters share the DMA's host port.  Each issues a random mix of
// reads and writes to its own address range (backed by host_mem_model with random
// back-pressure) and checks every read response against its own model, in order.
// Also checks that all requesters finish (round-robin, no starvation), that grants
// alternate when all request, and that reads are held back when MAX_RD reads are
// outstanding.
`timescale 1ns/1ps
module tb_la_dma;
  import mpc_pkg::*;
  localparam int NA = 4;
  localparam int NOPS = 400;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [NA-1:0] a_req_valid, a_req_ready, a_rsp_valid;
  mem_req_t a_req [NA];
  triple_t  a_rsp_data, h_rsp_data;
  logic h_req_valid, h_req_ready, h_rsp_valid;
  mem_req_t h_req;

  la_dma #(.NUM_ACC(NA), .MAX_RD(8)) dut (
    .clk, .rst_n, .a_req_valid, .a_req_ready, .a_req, .a_rsp_valid, .a_rsp_data,
    .h_req_valid, .h_req_ready, .h_req, .h_rsp_valid, .h_rsp_data);

  host_mem_model #(.RD_LAT(12), .STALL_PCT(20)) u_mem (
    .clk, .rst_n, .req_valid(h_req_valid), .req_ready(h_req_ready), .req(h_req),
    .rsp_valid(h_rsp_valid), .rsp_data(h_rsp_data));

  int done_ops [NA];
  int n_all_req = 0, n_switch = 0, n_rd_block = 0;
  int last_g = -1;

  for (genvar a = 0; a < NA; a++) begin : g_r
    triple_t model [64];
    triple_t expq [$];
    int issued = 0;
    initial for (int i = 0; i < 64; i++) model[i] = '0;

    always @(posedge clk) begin
      if (!rst_n) begin
        a_req_valid[a] <= 1'b0;
        a_req[a] <= '0;
      end else begin
        if (a_rsp_valid[a]) begin
          checks++;
          if (expq.size() == 0 || a_rsp_data != expq[0]) begin
            failures++; $display("requester %0d: wrong read data", a);
          end
          if (expq.size() > 0) void'(expq.pop_front());
        end
        if (a_req_valid[a] && a_req_ready[a]) begin
          issued++;
          if (a_req[a].we) model[a_req[a].addr[5:0]] = a_req[a].data;
          else expq.push_back(model[a_req[a].addr[5:0]]);
        end
        if (!(a_req_valid[a] && !a_req_ready[a])) begin   // keep a request until taken
          if (issued < NOPS && $urandom_range(9) < 8) begin
            mem_req_t r;
            r.we = 1'($urandom_range(1));
            r.addr = {24'(a + 1), 2'b00, 6'($urandom)};
            for (int l = 0; l < 3; l++) r.data[l] = {$urandom, $urandom, $urandom, $urandom};
            a_req[a] <= r;
            a_req_valid[a] <= 1'b1;
          end else a_req_valid[a] <= 1'b0;
        end
        done_ops[a] = issued;
      end
    end
    // the model is addressed by the low 6 bits of this requester's range
    always @(posedge clk) if (rst_n && a_req_valid[a] && a_req_ready[a])
      if (a_req[a].addr[31:8] != 24'(a + 1)) begin failures++; $display("bad address"); end
  end

  always @(posedge clk) if (rst_n) begin
    if (&a_req_valid) n_all_req++;
    if (h_req_valid && h_req_ready) begin
      for (int a = 0; a < NA; a++) if (a_req_ready[a]) begin
        if (last_g != -1 && last_g != a) n_switch++;
        last_g = a;
      end
      checks++;
      if ($countones(a_req_ready) != 1) begin failures++; $display("grant not one-hot"); end
    end
    if (dut.id_count == 8 && |a_req_valid) n_rd_block++;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (done_ops[0] == NOPS && done_ops[1] == NOPS && done_ops[2] == NOPS && done_ops[3] == NOPS);
    repeat (40) @(posedge clk);
    checks++;
    if (g_r[0].expq.size() + g_r[1].expq.size() + g_r[2].expq.size() + g_r[3].expq.size() != 0)
      begin failures++; $display("reads lost"); end
    checks++;
    if (n_all_req == 0 || n_switch == 0 || n_rd_block == 0) begin
      failures++; $display("arbitration cases not reached: %0d %0d %0d", n_all_req, n_switch, n_rd_block);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
