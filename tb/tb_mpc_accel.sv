// tb_mpc_accel: one accelerator (DEPTH reduced to 8 so that commands span several
// chunks) of party PARTY against a host memory model and a network sink.
// Sequence: KEYLOAD, ADD (20 elements), a zero-length command, MUL1 (19 elements,
// random network back-pressure), MUL2 (11 elements), and an 8-element ADD with no
// back-pressure to measure the rate.  Checks, against tb_ref_pkg and clear shares:
//   ADD: dst = x + y; MUL1: dst lane l = sum of key l's three PRNG words, and exactly
//   three PUTs per element, one to each other party, at net_dst+index, in the lane
//   where the receiver keeps this party's share, holding a_p - own PRNG words;
//   MUL2: dst = src_a + src_b; each command completes once with its tag;
//   Data A/B are read one element per cycle (the paper's one result per cycle);
//   an ADD with remote sources issues two GETs (node, addresses, length) and waits for
//   both before loading; a MUL2 with a remote destination sends three PUTs per element
//   to dst_node and writes nothing to host memory.
`timescale 1ns/1ps
module tb_mpc_accel;
  import mpc_pkg::*;
  import tb_ref_pkg::*;
  localparam int DEPTH = 8;
  localparam int PARTY = 2;
  localparam int NE = 32;
  localparam logic [ADDR_W-1:0] A_KEY = 32'h5, A_X = 32'h100, A_Y = 32'h200, A_T = 32'h300,
                                A_R = 32'h400, A_Z = 32'h500, A_S = 32'h600, A_N = 32'h7000;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic cmd_valid = 0, cmd_ready, done_valid, done_ready = 0;
  cmd_t cmd = '0;
  logic [TAG_W-1:0] done_tag;
  logic mreq_valid, mreq_ready, mrsp_valid, net_valid, net_ready = 0;
  mem_req_t mreq;
  triple_t mrsp_data;
  net_put_t net;
  logic get_valid, get_ready = 0, get_done = 0;
  net_get_t get;

  mpc_accel #(.DEPTH(DEPTH), .OUTQ_DEPTH(16)) dut (
    .clk, .rst_n, .party(party_t'(PARTY)),
    .cmd_valid, .cmd_ready, .cmd, .done_valid, .done_ready, .done_tag,
    .mreq_valid, .mreq_ready, .mreq, .mrsp_valid, .mrsp_data,
    .net_valid, .net_ready, .net, .get_valid, .get_ready, .get, .get_done);

  host_mem_model #(.RD_LAT(3), .STALL_PCT(0)) u_mem (
    .clk, .rst_n, .req_valid(mreq_valid), .req_ready(mreq_ready), .req(mreq),
    .rsp_valid(mrsp_valid), .rsp_data(mrsp_data));

  share_t xs [NE][4], ys [NE][4], kx [4];
  net_put_t puts [$];
  int rd_cycles [$];
  int cyc = 0;
  bit rnd_net = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (net_valid && net_ready) puts.push_back(net);
    if (dut.buf_rd) rd_cycles.push_back(cyc);
    net_ready <= rnd_net ? 1'($urandom_range(2) != 0) : 1'b1;
  end

  // network GET model: copies from a remote memory after GET_LAT cycles, in order
  localparam int GET_LAT = 20;
  triple_t  remote [logic [ADDR_W-1:0]];
  net_get_t getq [$];
  int       get_due [$];
  int       n_gets = 0;
  always @(posedge clk) begin
    get_done <= 1'b0;
    get_ready <= 1'($urandom_range(1));
    if (get_valid && get_ready) begin
      getq.push_back(get); get_due.push_back(cyc + GET_LAT); n_gets++;
      if (get.node != 2'd1) begin failures++; $display("GET to wrong node"); end
    end
    if (get_due.size() > 0 && get_due[0] <= cyc) begin
      net_get_t g;
      g = getq.pop_front(); void'(get_due.pop_front());
      for (int k = 0; k < int'(g.len); k++)
        u_mem.poke(g.laddr + ADDR_W'(k), remote.exists(g.raddr + ADDR_W'(k)) ? remote[g.raddr + ADDR_W'(k)] : '0);
      get_done <= 1'b1;
    end
  end

  function automatic share_t r128(); return {$urandom, $urandom, $urandom, $urandom}; endfunction

  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; if (failures < 12) $display("FAIL: %s", m); end
  endtask

  bit src_rem = 0, dst_rem = 0;
  task automatic run(op_e op, int tag, int nonce, logic [ADDR_W-1:0] a, logic [ADDR_W-1:0] b,
                     logic [ADDR_W-1:0] d, int len);
    @(negedge clk);
    cmd = '0; cmd.op = op;
    cmd.src_remote = src_rem; cmd.src_node = 2'd1; cmd.dst_remote = dst_rem; cmd.dst_node = 2'd3; cmd.tag = TAG_W'(tag); cmd.nonce = 32'(nonce);
    cmd.src_a = a; cmd.src_b = b; cmd.dst = d; cmd.net_dst = A_N; cmd.len = LEN_W'(len);
    cmd_valid = 1;
    @(posedge clk);
    while (!cmd_ready) @(posedge clk);
    #0.1 cmd_valid = 0;
    done_ready = 1;
    @(posedge clk);
    while (!done_valid) @(posedge clk);
    chk(done_tag == TAG_W'(tag), "completion tag");
    #0.1 done_ready = 0;
    @(posedge clk);
    #0.1;
    chk(!done_valid, "done drops after handshake");
  endtask

  initial begin
    triple_t tx, ty, tk, got;
    int first, last;
    for (int i = 0; i < 4; i++) kx[i] = r128();
    for (int e = 0; e < NE; e++) for (int j = 0; j < 4; j++) begin xs[e][j] = r128(); ys[e][j] = r128(); end
    for (int e = 0; e < NE; e++) begin
      for (int l = 0; l < 3; l++) begin
        tx[l] = xs[e][ref_idx(PARTY, l)]; ty[l] = ys[e][ref_idx(PARTY, l)];
      end
      u_mem.poke(A_X + ADDR_W'(e), tx); u_mem.poke(A_Y + ADDR_W'(e), ty);
      for (int l = 0; l < 3; l++) tx[l] = r128();
      u_mem.poke(A_R + ADDR_W'(e), tx);
    end
    for (int l = 0; l < 3; l++) tk[l] = kx[ref_idx(PARTY, l)];
    u_mem.poke(A_KEY, tk);
    repeat (3) @(posedge clk);
    rst_n = 1;

    run(OP_KEYLOAD, 1, 0, A_KEY, 0, 0, 0);
    run(OP_ADD, 2, 0, A_X, A_Y, A_S, 20);
    for (int e = 0; e < 20; e++) begin
      got = u_mem.peek(A_S + ADDR_W'(e));
      for (int l = 0; l < 3; l++)
        chk(got[l] == xs[e][ref_idx(PARTY, l)] + ys[e][ref_idx(PARTY, l)], $sformatf("ADD %0d", e));
    end
    chk(u_mem.peek(A_S + 20) == '0, "ADD wrote past its length");
    run(OP_ADD, 3, 0, A_X, A_Y, A_S + 100, 0);
    chk(u_mem.peek(A_S + 100) == '0, "zero-length command wrote");

    rnd_net = 1;
    puts.delete();
    run(OP_MUL1, 4, 77, A_X, A_Y, A_T, 19);
    rnd_net = 0;
    chk(puts.size() == 3 * 19, $sformatf("MUL1 PUT count %0d", puts.size()));
    for (int e = 0; e < 19; e++) begin
      share_t mask, xa [4], yb [4];
      bit seen [4];
      mask = '0;
      for (int j = 0; j < 4; j++) begin xa[j] = xs[e][j]; yb[j] = ys[e][j]; seen[j] = 0; end
      got = u_mem.peek(A_T + ADDR_W'(e));
      for (int l = 0; l < 3; l++) begin
        int i;
        share_t t;
        i = ref_idx(PARTY, l); t = '0;
        for (int q = 0; q < 4; q++) if (q != i) t += ref_prng(kx[i], q, {32'd77, 32'(e)});
        chk(got[l] == t, $sformatf("MUL1 %0d intermediate lane %0d", e, l));
        mask += ref_prng(kx[i], PARTY, {32'd77, 32'(e)});
      end
      for (int k = 0; k < puts.size(); k++) if (puts[k].addr == A_N + ADDR_W'(e)) begin
        int d;
        d = int'(puts[k].dest);
        chk(d != PARTY && !seen[d], "PUT destinations distinct");
        seen[d] = 1;
        chk(int'(puts[k].lane) == ((PARTY < d) ? PARTY : PARTY - 1), "PUT lane");
        chk(puts[k].data == ref_a(PARTY, xa, yb) - mask, $sformatf("MUL1 %0d network word", e));
      end
    end

    run(OP_MUL2, 5, 0, A_T, A_R, A_Z, 11);
    for (int e = 0; e < 11; e++) begin
      triple_t t, r;
      t = u_mem.peek(A_T + ADDR_W'(e)); r = u_mem.peek(A_R + ADDR_W'(e));
      got = u_mem.peek(A_Z + ADDR_W'(e));
      for (int l = 0; l < 3; l++) chk(got[l] == t[l] + r[l], $sformatf("MUL2 %0d", e));
    end

    // remote sources: ADD whose operands lie at node 1 (fetched by two GETs first)
    for (int e = 0; e < 12; e++) begin
      for (int l = 0; l < 3; l++) begin tx[l] = r128(); ty[l] = r128(); end
      remote[32'h900 + ADDR_W'(e)] = tx; remote[32'hA00 + ADDR_W'(e)] = ty;
    end
    src_rem = 1;
    run(OP_ADD, 7, 0, 32'h900, 32'hA00, 32'hB00, 12);
    src_rem = 0;
    chk(n_gets == 2, $sformatf("two GETs for a remote-source command (%0d)", n_gets));
    for (int e = 0; e < 12; e++) begin
      tx = remote[32'h900 + ADDR_W'(e)]; ty = remote[32'hA00 + ADDR_W'(e)];
      got = u_mem.peek(32'hB00 + ADDR_W'(e));
      for (int l = 0; l < 3; l++) chk(got[l] == tx[l] + ty[l], $sformatf("remote-source ADD %0d", e));
    end

    // remote destination: MUL2 results go to node 3 as three PUTs each, nothing local
    dst_rem = 1;
    puts.delete();
    run(OP_MUL2, 8, 0, A_T, A_R, 32'hC00, 10);
    dst_rem = 0;
    chk(puts.size() == 30, $sformatf("remote-destination PUT count %0d", puts.size()));
    chk(u_mem.peek(32'hC00) == '0, "remote-destination command wrote locally");
    for (int k = 0; k < puts.size(); k++) begin
      triple_t t, r;
      int e;
      e = int'(puts[k].addr - 32'hC00);
      t = u_mem.peek(A_T + ADDR_W'(e)); r = u_mem.peek(A_R + ADDR_W'(e));
      chk(puts[k].dest == 2'd3 && e >= 0 && e < 10 &&
          puts[k].data == t[puts[k].lane] + r[puts[k].lane], $sformatf("remote-destination PUT %0d", k));
    end

    // rate: one Data A/B read per cycle over a full chunk
    rd_cycles.delete();
    run(OP_ADD, 6, 0, A_X, A_Y, A_S, DEPTH);
    first = rd_cycles[0]; last = rd_cycles[rd_cycles.size() - 1];
    chk(rd_cycles.size() == DEPTH && last - first == DEPTH - 1,
        $sformatf("compute rate: %0d reads in %0d cycles", rd_cycles.size(), last - first + 1));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
