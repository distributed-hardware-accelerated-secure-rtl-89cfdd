// tb_mul_batch: network throughput of the multiply stage against batch size, on one
// party's full-size lookaside block (default parameters).
//
// One command of n multiplies (MUL1) produces 3 x 128 bits of network data per element.
// The testbench runs single MUL1 commands of n = 1, 10, 100, 1000, 2048 and 4096
// elements on accelerator 0, one after another, with an always-ready network and a
// host memory that answers reads after 40 cycles and never stalls (both assumed).  For
// each it measures the cycles from command acceptance to completion and reports the
// network data rate at a 275 MHz clock.  Then all four accelerators run streams of
// multiplies at the same time, and the aggregate rate is reported; the first commands
// have different lengths so that one accelerator's loading overlaps another's sending.
// Checks: every element yields exactly three PUTs, one to each other party, with the
// word a_p - (own PRNG words) worked out by the reference model; the rate never falls as
// the batch grows; each command takes at most 5n cycles plus a fixed start-up (two
// host reads per element, then three PUTs per element through the 128-bit port); the
// largest batches reach at least 17.5 Gb/s, the saturation rate the paper reports for one
// accelerator; four accelerators together move more data per cycle than one.
`timescale 1ns/1ps
module tb_mul_batch;
  import mpc_pkg::*;
  import tb_ref_pkg::*;

  localparam int PARTY  = 1;
  localparam int RD_LAT = 40;
  localparam int NMAX   = 4096;
  localparam logic [ADDR_W-1:0] A_KEY = 32'h10, A_X = 32'h10000, A_Y = 32'h20000,
                                A_T = 32'h30000, A_N = 32'h40000;
  localparam real F_MHZ = 275.0;

  int checks = 0, failures = 0;
  int cyc = 0, n_put = 0, n_cpl = 0;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog: %0d completions", n_cpl);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  logic     cmd_valid, cmd_ready, cpl_valid, mreq_valid, mreq_ready, mrsp_valid;
  logic     net_valid, get_valid;
  cmd_t     cmd;
  cmd_t     cq [$];
  logic [TAG_W-1:0] cpl_tag;
  logic [1:0] cpl_acc, get_acc;
  logic [3:0] acc_busy;
  mem_req_t mreq;
  triple_t  mrsp_data;
  net_put_t net;
  net_get_t get;

  copa_lookaside u_top (
    .clk, .rst_n, .party(party_t'(PARTY)),
    .cmd_valid, .cmd_ready, .cmd,
    .rcmd_valid(1'b0), .rcmd_ready(), .rcmd('0),
    .cpl_valid, .cpl_ready(1'b1), .cpl_tag, .cpl_acc, .cpl_remote(),
    .acc_busy, .cmdq_count(),
    .mem_req_valid(mreq_valid), .mem_req_ready(mreq_ready), .mem_req(mreq),
    .mem_rsp_valid(mrsp_valid), .mem_rsp_data(mrsp_data),
    .net_valid, .net_ready(1'b1), .net,
    .get_valid, .get_ready(1'b0), .get, .get_acc,
    .get_done_valid(1'b0), .get_done_acc('0));

  host_mem_model #(.RD_LAT(RD_LAT), .STALL_PCT(0)) u_mem (
    .clk, .rst_n, .req_valid(mreq_valid), .req_ready(mreq_ready), .req(mreq),
    .rsp_valid(mrsp_valid), .rsp_data(mrsp_data));

  // clear shares of operand element e, share index j, generated rather than stored
  function automatic share_t sh(int which, int e, int j);
    logic [63:0] s;
    s = 64'(which) << 40 | 64'(e) << 4 | 64'(j);
    return {ref_mix64(s), ref_mix64(s ^ 64'h5555_0000_0000_0000)};
  endfunction

  share_t kx [4];
  share_t put_data [logic [ADDR_W+1:0]];       // {dest, addr} -> word
  int     put_lane [logic [ADDR_W+1:0]];

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && net_valid) begin
      n_put++;
      put_data[{net.dest, net.addr}] = net.data;
      put_lane[{net.dest, net.addr}] = int'(net.lane);
    end
    if (rst_n && cpl_valid) n_cpl++;
    // command source: the queue head, presented from a register
    if (!rst_n) begin
      cmd_valid <= 1'b0;
    end else begin
      if (cmd_valid && cmd_ready) void'(cq.pop_front());
      cmd_valid <= (cq.size() > 0);
      cmd       <= (cq.size() > 0) ? cq[0] : '0;
    end
  end

  function automatic void send(cmd_t c);
    cq.push_back(c);
  endfunction

  function automatic cmd_t mk(op_e op, int acc, int tag, int nonce, logic [ADDR_W-1:0] a,
                              logic [ADDR_W-1:0] b, logic [ADDR_W-1:0] d,
                              logic [ADDR_W-1:0] nd, int len);
    cmd_t c;
    c = '0;
    c.op = op; c.acc = ACC_ID_W'(acc); c.tag = TAG_W'(tag); c.nonce = 32'(nonce);
    c.src_a = a; c.src_b = b; c.dst = d; c.net_dst = nd; c.len = LEN_W'(len);
    return c;
  endfunction

  // check the three PUTs of elements [0, n) of a MUL1 with this nonce and net_dst
  task automatic check_puts(int n, int nonce, int xoff, logic [ADDR_W-1:0] nd);
    for (int e = 0; e < n; e++) begin
      share_t xa [4], yb [4], mask, want;
      mask = '0;
      for (int j = 0; j < 4; j++) begin
        xa[j] = (j == PARTY) ? '0 : sh(0, xoff + e, j);
        yb[j] = (j == PARTY) ? '0 : sh(1, xoff + e, j);
      end
      for (int i = 0; i < 4; i++)
        if (i != PARTY) mask += ref_prng(kx[i], PARTY, {32'(nonce), 32'(e)});
      want = ref_a(PARTY, xa, yb) - mask;
      for (int d = 0; d < 4; d++) begin
        if (d == PARTY) continue;
        chk(put_data.exists({2'(d), nd + ADDR_W'(e)}) &&
            put_data[{2'(d), nd + ADDR_W'(e)}] == want &&
            put_lane[{2'(d), nd + ADDR_W'(e)}] == ((PARTY < d) ? PARTY : PARTY - 1),
            $sformatf("nonce %0d element %0d word to party %0d", nonce, e, d));
      end
    end
  endtask

  localparam int NB = 6;
  int sizes [NB] = '{1, 10, 100, 1000, 2048, 4096};

  initial begin
    real gbps [NB], prev, agg;
    int  t0, cyc_n, p0, tot;
    int  plen [4][4];
    triple_t tk, tx, ty;

    for (int i = 0; i < 4; i++) kx[i] = {ref_mix64(64'(i) + 64'h100), ref_mix64(64'(i) + 64'h200)};
    for (int l = 0; l < 3; l++) tk[l] = kx[ref_idx(PARTY, l)];
    u_mem.poke(A_KEY, tk);
    for (int e = 0; e < NMAX; e++) begin
      for (int l = 0; l < 3; l++) begin
        tx[l] = sh(0, e, ref_idx(PARTY, l));
        ty[l] = sh(1, e, ref_idx(PARTY, l));
      end
      u_mem.poke(A_X + ADDR_W'(e), tx);
      u_mem.poke(A_Y + ADDR_W'(e), ty);
    end

    repeat (5) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int a = 0; a < 4; a++) send(mk(OP_KEYLOAD, a, a, 0, A_KEY, 0, 0, 0, 0));
    do @(posedge clk); while (n_cpl < 4);

    // one accelerator, growing batches
    for (int b = 0; b < NB; b++) begin
      put_data.delete(); put_lane.delete();
      p0 = n_put;
      t0 = cyc;
      send(mk(OP_MUL1, 0, 10 + b, 1000 + b, A_X, A_Y, A_T, A_N, sizes[b]));
      do @(posedge clk); while (n_cpl < 5 + b);
      cyc_n = cyc - t0;
      gbps[b] = real'(3 * 128 * sizes[b]) / real'(cyc_n) * F_MHZ / 1000.0;
      $display("batch %5d: %6d cycles, %6.2f bits/cycle, %6.2f Gb/s at %0.0f MHz",
               sizes[b], cyc_n, real'(3 * 128 * sizes[b]) / real'(cyc_n), gbps[b], F_MHZ);
      chk(n_put - p0 == 3 * sizes[b], $sformatf("batch %0d: %0d PUTs", sizes[b], n_put - p0));
      check_puts(sizes[b], 1000 + b, 0, A_N);
      chk(cyc_n <= 5 * sizes[b] + 2 * RD_LAT + 100 * ((sizes[b] + 2047) / 2048),
          $sformatf("batch %0d took %0d cycles", sizes[b], cyc_n));
      if (b > 0) chk(gbps[b] >= gbps[b - 1] - 0.01, $sformatf("rate fell at batch %0d", sizes[b]));
      @(posedge clk);
    end
    chk(gbps[3] >= 17.5 && gbps[NB - 1] >= 17.5, "large batches reach 17.5 Gb/s");

    // four accelerators in parallel: each runs a first command of 250(a+1) multiplies, so
    // that their load and compute phases fall out of step, then three of 1000
    put_data.delete(); put_lane.delete();
    p0 = n_put;
    t0 = cyc;
    tot = 0;
    for (int k = 0; k < 4; k++)
      for (int a = 0; a < 4; a++) begin
        plen[a][k] = (k == 0) ? 250 * (a + 1) : 1000;
        send(mk(OP_MUL1, a, 20 + 4 * k + a, 3000 + 4 * k + a, A_X, A_Y, A_T,
                A_N + ADDR_W'((4 * k + a) * 'h1000), plen[a][k]));
        tot += plen[a][k];
      end
    do @(posedge clk); while (n_cpl < 5 + NB + 15);
    cyc_n = cyc - t0;
    agg = real'(3 * 128 * tot) / real'(cyc_n) * F_MHZ / 1000.0;
    $display("4 accelerators, %0d multiplies: %0d cycles, %6.2f bits/cycle, %6.2f Gb/s aggregate at %0.0f MHz",
             tot, cyc_n, real'(3 * 128 * tot) / real'(cyc_n), agg, F_MHZ);
    chk(n_put - p0 == 3 * tot, "parallel PUT count");
    for (int k = 0; k < 4; k++)
      for (int a = 0; a < 4; a++)
        check_puts(plen[a][k], 3000 + 4 * k + a, 0, A_N + ADDR_W'((4 * k + a) * 'h1000));
    chk(agg > 1.3 * gbps[3], "four accelerators move more data than one");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
