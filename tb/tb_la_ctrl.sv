// tb_la_ctrl: a command queue (sync_fifo) feeds the control unit, which drives four
// stub accelerators that hold each command for a random time.  Checks that every
// command reaches the accelerator named in it, in issue order per accelerator, never
// while that accelerator is busy; that every tag completes exactly once with the right
// accelerator number; that busy tracks the stubs; and that the queue head waits when
// its accelerator is busy while others work in parallel.
`timescale 1ns/1ps
module tb_la_ctrl;
  import mpc_pkg::*;
  localparam int NA = 4, NCMD = 300;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic in_valid = 0, in_ready, q_valid, q_ready;
  cmd_t in_cmd = '0, q_cmd, acc_cmd;
  logic [NA-1:0] acc_cmd_valid, acc_cmd_ready, acc_done_valid, acc_done_ready, busy;
  logic [TAG_W-1:0] acc_done_tag [NA];
  logic cpl_valid, cpl_ready;
  logic [TAG_W-1:0] cpl_tag;
  logic [1:0] cpl_acc;

  sync_fifo #(.T(cmd_t), .DEPTH(8)) u_q (
    .clk, .rst_n, .in_valid, .in_ready, .in_data(in_cmd),
    .out_valid(q_valid), .out_ready(q_ready), .out_data(q_cmd), .count());

  la_ctrl #(.NUM_ACC(NA)) dut (
    .clk, .rst_n, .q_valid, .q_ready, .q_cmd, .acc_cmd_valid, .acc_cmd_ready, .acc_cmd,
    .acc_done_valid, .acc_done_ready, .acc_done_tag, .cpl_valid, .cpl_ready, .cpl_tag,
    .cpl_acc, .busy);

  int exp_acc [256];           // accelerator each tag was sent to
  int cpl_seen [256];
  int n_hol = 0, n_par = 0, n_cpl = 0;

  for (genvar a = 0; a < NA; a++) begin : g_acc
    int exp_tags [$];          // tags issued to this accelerator, in order
    logic [TAG_W-1:0] tag;
    int left;
    typedef enum {IDLE, RUN, DONE} st_e;
    st_e st;
    assign acc_cmd_ready[a]  = (st == IDLE);
    assign acc_done_valid[a] = (st == DONE);
    assign acc_done_tag[a]   = tag;
    always @(posedge clk) begin
      if (!rst_n) begin st <= IDLE; tag <= '0; left <= 0; end
      else case (st)
        IDLE: if (acc_cmd_valid[a]) begin
          checks++;
          if (exp_tags.size() == 0 || acc_cmd.tag != TAG_W'(exp_tags[0]) || int'(acc_cmd.acc) != a) begin
            failures++; $display("acc %0d got tag %0d out of order", a, acc_cmd.tag);
          end
          if (exp_tags.size() > 0) void'(exp_tags.pop_front());
          checks++;
          if (busy[a]) begin failures++; $display("dispatch to busy acc %0d", a); end
          tag <= acc_cmd.tag; left <= $urandom_range(12); st <= RUN;
        end
        RUN:  if (left == 0) st <= DONE; else left <= left - 1;
        DONE: if (acc_done_ready[a]) st <= IDLE;
      endcase
    end
  end

  always @(posedge clk) if (rst_n) begin
    cpl_ready <= ($urandom_range(3) != 0);
    if (q_valid && !q_ready) n_hol++;
    if ($countones(busy) >= 2) n_par++;
    if (cpl_valid && cpl_ready) begin
      checks++;
      if (cpl_seen[cpl_tag] != 0 || exp_acc[cpl_tag] != int'(cpl_acc)) begin
        failures++; $display("bad completion tag %0d acc %0d", cpl_tag, cpl_acc);
      end
      cpl_seen[cpl_tag]++;
      n_cpl++;
    end
    for (int a = 0; a < NA; a++) begin
      checks++;
      if (busy[a] != (g_acc_st(a) != 0)) begin failures++; $display("busy mismatch acc %0d", a); end
    end
  end else cpl_ready <= 1'b0;

  function automatic int g_acc_st(int a);
    case (a)
      0: return int'(g_acc[0].st);
      1: return int'(g_acc[1].st);
      2: return int'(g_acc[2].st);
      default: return int'(g_acc[3].st);
    endcase
  endfunction

  task automatic push_exp(int a, int t);
    case (a)
      0: g_acc[0].exp_tags.push_back(t);
      1: g_acc[1].exp_tags.push_back(t);
      2: g_acc[2].exp_tags.push_back(t);
      default: g_acc[3].exp_tags.push_back(t);
    endcase
  endtask

  initial begin
    for (int t = 0; t < 256; t++) begin cpl_seen[t] = 0; exp_acc[t] = -1; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < NCMD; k++) begin
      int a;
      @(negedge clk);
      a = (k % 50 < 10) ? 1 : $urandom_range(NA - 1);   // bursts to one accelerator
      in_cmd = '0;
      in_cmd.acc = ACC_ID_W'(a);
      in_cmd.tag = TAG_W'(k % 200);
      in_cmd.op  = OP_ADD;
      in_valid = 1;
      // tags are reused only after their previous completion
      wait (k < 200 || cpl_seen[k % 200] == 1);
      if (k >= 200) cpl_seen[k % 200] = 0;
      exp_acc[k % 200] = a;
      push_exp(a, k % 200);
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      #0.1 in_valid = 0;
    end
    wait (n_cpl == NCMD);
    repeat (5) @(posedge clk);
    checks++;
    if (n_hol == 0 || n_par == 0) begin failures++; $display("no head wait / no parallelism"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
