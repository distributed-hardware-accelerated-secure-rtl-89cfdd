// tb_copa_lookaside: end-to-end test of four parties, each with a full-size lookaside
// accelerator (default parameters), its own host memory model and a network model.
//
// The testbench acts as the four hosts.  It secret-shares NE random pairs (x, y) into
// 3-of-4 replicated shares, loads each party's shares and PRNG keys into its host
// memory and queues, at every party:
//   KEYLOAD on all four accelerators,
//   MUL1 on accelerator 0 (2100 elements, more than one Data A/B buffer, so the
//   accelerator works in two chunks), MUL1 on accelerators 2 and 3 (200 each) and an
//   ADD of 300 elements on accelerator 1.
// The network model delivers every PUT into the destination party's memory and serves
// GETs by copying from the named node's memory.  When all first-phase commands have
// completed at all parties it queues the MUL2 commands.  The ADD and the second MUL2
// arrive on the network command port (remote invocation) and their completions must be
// marked as such; the last MUL2 (200 elements)
// sends its results to node p+1, and an ADD on accelerator 3 fetches its operands from
// a copy of the party's shares kept at node p+2.
// Checks, worked out only from the shares and the clear values: every share z_i is
// identical at its three holders, sum of z_i equals x*y (or x+y) mod 2^128, each
// completion carries a tag that was issued.  It also counts how often each mechanism
// occurred (chunk reload, DMA and network contention and back-pressure, command
// waiting for a busy accelerator, output-queue credit stall, parallel accelerators,
// remote fetch, remote destination, remote invocation, host and network commands
// offered in the same cycle).
`timescale 1ns/1ps
module tb_copa_lookaside;
  import mpc_pkg::*;

  localparam int NE     = 2500;    // multiply elements
  localparam int N_BIG  = 2100;    // first MUL1 command (> default DEPTH 2048)
  localparam int N_SM   = 200;
  localparam int N_ADD  = 300;
  localparam logic [ADDR_W-1:0] A_KEY = 32'h10,    A_X = 32'h10000, A_Y = 32'h20000,
                                A_T   = 32'h30000, A_R = 32'h40000, A_Z = 32'h50000,
                                A_S   = 32'h60000, A_XR = 32'h70000, A_YR = 32'h80000,
                                A_ZR  = 32'h90000, A_S2 = 32'hA0000;

  int checks = 0, failures = 0;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  // watchdog
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- clear values, shares, keys ----------------
  share_t xv [NE], yv [NE];
  share_t xs [NE][4], ys [NE][4];
  share_t kx [4];                       // kx[i]: key known to all parties but i
  share_t zres [4][NE][3];              // results read back from party memories
  share_t sres [4][N_ADD][3];
  share_t sres2 [4][N_ADD][3];

  function automatic share_t rnd128();
    return {$urandom, $urandom, $urandom, $urandom};
  endfunction

  // ---------------- per-party DUT, memory, host queues ----------------
  logic     cmd_valid [4], cmd_ready [4], rcmd_valid [4], rcmd_ready [4];
  cmd_t     rcmd [4];
  logic     cpl_remote [4];
  cmd_t     cmd [4];
  logic     cpl_valid [4], cpl_ready [4];
  logic [TAG_W-1:0] cpl_tag [4];
  logic [3:0] busy [4];
  logic     mreq_valid [4], mreq_ready [4], mrsp_valid [4];
  mem_req_t mreq [4];
  triple_t  mrsp [4];
  logic     nv [4], nr [4];
  net_put_t np [4];
  logic     gv [4], gr [4], gdv [4];
  net_get_t gq [4];
  logic [1:0] gacc [4], gda [4];

  cmd_t cq [4][$];
  cmd_t rq [4][$];            // commands arriving over the network (remote invocation)
  int   n_cpl [4];
  logic [255:0] tag_open [4];
  logic [255:0] tag_remote [4];
  logic do_load = 0, do_collect = 0;

  // mechanism counters
  int m_chunk = 0, m_dma_contend = 0, m_dma_stall = 0, m_net_contend = 0, m_net_stall = 0,
      m_hol = 0, m_credit = 0, m_parallel = 0, m_add = 0, m_mul1 = 0, m_mul2 = 0, m_key = 0,
      m_get = 0, m_rdst = 0, m_rinv = 0, m_src_contend = 0;

  function automatic triple_t peek_any(int node, logic [ADDR_W-1:0] a);
    case (node)
      0: return g_party[0].u_mem.peek(a);
      1: return g_party[1].u_mem.peek(a);
      2: return g_party[2].u_mem.peek(a);
      default: return g_party[3].u_mem.peek(a);
    endcase
  endfunction

  for (genvar p = 0; p < 4; p++) begin : g_party
    copa_lookaside u_top (
      .clk, .rst_n, .party(party_t'(p)),
      .cmd_valid(cmd_valid[p]), .cmd_ready(cmd_ready[p]), .cmd(cmd[p]),
      .cpl_valid(cpl_valid[p]), .cpl_ready(cpl_ready[p]), .cpl_tag(cpl_tag[p]), .cpl_acc(),
      .rcmd_valid(rcmd_valid[p]), .rcmd_ready(rcmd_ready[p]), .rcmd(rcmd[p]),
      .cpl_remote(cpl_remote[p]),
      .acc_busy(busy[p]),
      .mem_req_valid(mreq_valid[p]), .mem_req_ready(mreq_ready[p]), .mem_req(mreq[p]),
      .mem_rsp_valid(mrsp_valid[p]), .mem_rsp_data(mrsp[p]),
      .net_valid(nv[p]), .net_ready(nr[p]), .net(np[p]), .cmdq_count(),
      .get_valid(gv[p]), .get_ready(gr[p]), .get(gq[p]), .get_acc(gacc[p]),
      .get_done_valid(gdv[p]), .get_done_acc(gda[p]));

    // network model, GET side: copy the range from the remote node after 30 cycles
    net_get_t pend [$];
    logic [1:0] pend_acc [$];
    int pend_due [$];
    int gcyc = 0;
    always @(posedge clk) begin
      gcyc <= gcyc + 1;
      gdv[p] <= 1'b0;
      gr[p]  <= rst_n && ($urandom_range(3) != 0);
      if (rst_n && gv[p] && gr[p]) begin
        pend.push_back(gq[p]); pend_acc.push_back(gacc[p]); pend_due.push_back(gcyc + 30);
        m_get++;
      end
      if (pend_due.size() > 0 && pend_due[0] <= gcyc) begin
        net_get_t g;
        g = pend.pop_front(); void'(pend_due.pop_front());
        for (int k = 0; k < int'(g.len); k++)
          u_mem.poke(g.laddr + ADDR_W'(k), peek_any(int'(g.node), g.raddr + ADDR_W'(k)));
        gdv[p] <= 1'b1;
        gda[p] <= pend_acc.pop_front();
      end
    end

    host_mem_model u_mem (
      .clk, .rst_n,
      .req_valid(mreq_valid[p]), .req_ready(mreq_ready[p]), .req(mreq[p]),
      .rsp_valid(mrsp_valid[p]), .rsp_data(mrsp[p]));

    // host: load shares and keys
    always @(posedge do_load) begin
      triple_t tx, ty, tk;
      for (int e = 0; e < NE; e++) begin
        for (int l = 0; l < 3; l++) begin
          tx[l] = xs[e][share_of_lane(party_t'(p), 2'(l))];
          ty[l] = ys[e][share_of_lane(party_t'(p), 2'(l))];
        end
        u_mem.poke(A_X + ADDR_W'(e), tx);
        u_mem.poke(A_Y + ADDR_W'(e), ty);
      end
      for (int l = 0; l < 3; l++) tk[l] = kx[share_of_lane(party_t'(p), 2'(l))];
      u_mem.poke(A_KEY, tk);
    end
    // a copy of party p's x and y shares kept at node p+2, fetched over the network
    always @(posedge do_load) begin
      triple_t tx, ty;
      #0.1;
      for (int e = 0; e < N_ADD; e++) begin
        for (int l = 0; l < 3; l++) begin
          tx[l] = xs[e][share_of_lane(party_t'((p + 2) % 4), 2'(l))];
          ty[l] = ys[e][share_of_lane(party_t'((p + 2) % 4), 2'(l))];
        end
        u_mem.poke(A_XR + ADDR_W'(((p + 2) % 4) * 'h1000) + ADDR_W'(e), tx);
        u_mem.poke(A_YR + ADDR_W'(((p + 2) % 4) * 'h1000) + ADDR_W'(e), ty);
      end
    end

    // host: read back results
    always @(posedge do_collect) begin
      triple_t t;
      for (int e = 0; e < NE; e++) begin
        if (e >= N_BIG + N_SM)     // sent to node p+1 by a remote-destination MUL2
          t = peek_any((p + 1) % 4, A_ZR + ADDR_W'(p * 'h1000) + ADDR_W'(e - N_BIG - N_SM));
        else
          t = u_mem.peek(A_Z + ADDR_W'(e));
        for (int l = 0; l < 3; l++) zres[p][e][l] = t[l];
      end
      for (int e = 0; e < N_ADD; e++) begin
        t = u_mem.peek(A_S + ADDR_W'(e));
        for (int l = 0; l < 3; l++) sres[p][e][l] = t[l];
        t = u_mem.peek(A_S2 + ADDR_W'(e));
        for (int l = 0; l < 3; l++) sres2[p][e][l] = t[l];
      end
    end

    // network model: deliver PUTs addressed to this party
    always @(posedge clk)
      for (int s = 0; s < 4; s++)
        if (rst_n && nv[s] && nr[s] && np[s].dest == party_t'(p)) begin
          u_mem.put(np[s].addr, np[s].lane, np[s].data);
          if (np[s].addr >= A_ZR && np[s].addr < A_ZR + 'h10000) m_rdst++;
        end

    // host command submission and completion
    assign cmd_valid[p] = (cq[p].size() > 0);
    assign cmd[p]       = (cq[p].size() > 0) ? cq[p][0] : '0;
    assign rcmd_valid[p] = (rq[p].size() > 0);
    assign rcmd[p]       = (rq[p].size() > 0) ? rq[p][0] : '0;
    always @(posedge clk) begin
      if (rst_n) begin
        if (cmd_valid[p] && cmd_ready[p]) void'(cq[p].pop_front());
        if (rcmd_valid[p] && rcmd_ready[p]) begin
          void'(rq[p].pop_front());
          if (p == 0) m_rinv++;
        end
        if (cmd_valid[p] && rcmd_valid[p]) m_src_contend++;
        if (cpl_valid[p] && cpl_ready[p]) begin
          checks++;
          if (!tag_open[p][cpl_tag[p]]) begin
            failures++;
            $display("party %0d: completion with unknown tag %0d", p, cpl_tag[p]);
          end
          checks++;
          if (cpl_remote[p] != tag_remote[p][cpl_tag[p]]) begin
            failures++;
            $display("party %0d: tag %0d completion has the wrong origin", p, cpl_tag[p]);
          end
          tag_open[p][cpl_tag[p]] = 1'b0;
          n_cpl[p]++;
        end
        cpl_ready[p] <= ($urandom_range(9) != 0);
        nr[p]        <= ($urandom_range(9) >= 2);
        // mechanism observation
        if ($countones(u_top.m_valid) >= 2) m_dma_contend++;
        if (mreq_valid[p] && !mreq_ready[p]) m_dma_stall++;
        if ($countones(u_top.n_valid) >= 2) m_net_contend++;
        if (nv[p] && !nr[p]) m_net_stall++;
        if (u_top.q_valid && !u_top.q_ready) m_hol++;
        if ($countones(busy[p]) >= 2) m_parallel++;
        if (u_top.g_acc[0].u_accel.base != '0) m_chunk++;
        if (32'(u_top.g_acc[0].u_accel.inflight) + 32'(u_top.g_acc[0].u_accel.q_count) >= 16)
          m_credit++;
      end else begin
        cpl_ready[p] <= 1'b0;
        nr[p]        <= 1'b0;
      end
    end
  end

  bit src_rem = 0, dst_rem = 0;
  function automatic cmd_t mk(op_e op, int acc, int tag, int nonce, logic [ADDR_W-1:0] a,
                              logic [ADDR_W-1:0] b, logic [ADDR_W-1:0] d,
                              logic [ADDR_W-1:0] nd, int len);
    cmd_t c;
    c.op = op; c.acc = ACC_ID_W'(acc); c.tag = TAG_W'(tag); c.nonce = 32'(nonce);
    c.src_remote = src_rem; c.dst_remote = dst_rem; c.src_node = '0; c.dst_node = '0;
    c.src_a = a; c.src_b = b; c.dst = d; c.net_dst = nd; c.len = LEN_W'(len);
    return c;
  endfunction

  function automatic void issue(int p, cmd_t c, bit remote = 0);
    if (remote) rq[p].push_back(c);
    else        cq[p].push_back(c);
    tag_open[p][c.tag] = 1'b1;
    tag_remote[p][c.tag] = remote;
    case (c.op)
      OP_KEYLOAD: if (p == 0) m_key++;
      OP_ADD:     if (p == 0) m_add++;
      OP_MUL1:    if (p == 0) m_mul1++;
      default:    if (p == 0) m_mul2++;
    endcase
  endfunction

  function automatic void check_mech(string name, int cnt);
    checks++;
    $display("mechanism %-28s : %0d", name, cnt);
    if (cnt == 0) begin
      failures++;
      $display("  never happened");
    end
  endfunction

  longint t0, t_mul1, t_mul2;

  initial begin
    for (int p = 0; p < 4; p++) begin n_cpl[p] = 0; tag_open[p] = '0; tag_remote[p] = '0; end
    for (int e = 0; e < NE; e++) begin
      xv[e] = rnd128(); yv[e] = rnd128();
      xs[e][3] = xv[e]; ys[e][3] = yv[e];
      for (int j = 0; j < 3; j++) begin
        xs[e][j] = rnd128(); ys[e][j] = rnd128();
        xs[e][3] -= xs[e][j]; ys[e][3] -= ys[e][j];
      end
    end
    for (int i = 0; i < 4; i++) kx[i] = rnd128();

    repeat (5) @(posedge clk);
    do_load = 1;
    #0;
    rst_n = 1;
    @(posedge clk);

    // ---- phase 1 ----
    t0 = $time;
    for (int p = 0; p < 4; p++) begin
      for (int a = 0; a < 4; a++) issue(p, mk(OP_KEYLOAD, a, a, 0, A_KEY, 0, 0, 0, 0));
      issue(p, mk(OP_MUL1, 0, 10, 101, A_X, A_Y, A_T, A_R, N_BIG));
      issue(p, mk(OP_ADD,  1, 11, 0,   A_X, A_Y, A_S, 0,   N_ADD), 1);   // invoked remotely
      issue(p, mk(OP_MUL1, 2, 12, 102, A_X + N_BIG, A_Y + N_BIG, A_T + N_BIG, A_R + N_BIG, N_SM));
      issue(p, mk(OP_MUL1, 3, 13, 103, A_X + N_BIG + N_SM, A_Y + N_BIG + N_SM,
                  A_T + N_BIG + N_SM, A_R + N_BIG + N_SM, N_SM));
    end
    wait (n_cpl[0] == 8 && n_cpl[1] == 8 && n_cpl[2] == 8 && n_cpl[3] == 8);
    t_mul1 = ($time - t0) / 2;
    @(posedge clk);

    // ---- phase 2 (all communication has arrived) ----
    t0 = $time;
    for (int p = 0; p < 4; p++) begin
      issue(p, mk(OP_MUL2, 0, 20, 0, A_T, A_R, A_Z, 0, N_BIG));
      issue(p, mk(OP_MUL2, 1, 21, 0, A_T + N_BIG, A_R + N_BIG, A_Z + N_BIG, 0, N_SM), 1);
      begin
        cmd_t c;
        dst_rem = 1;
        c = mk(OP_MUL2, 2, 22, 0, A_T + N_BIG + N_SM, A_R + N_BIG + N_SM,
               A_ZR + ADDR_W'(p * 'h1000), 0, N_SM);
        c.dst_node = party_t'((p + 1) % 4);
        dst_rem = 0;
        issue(p, c);
        src_rem = 1;
        c = mk(OP_ADD, 3, 23, 0, A_XR + ADDR_W'(p * 'h1000), A_YR + ADDR_W'(p * 'h1000), A_S2, 0, N_ADD);
        c.src_node = party_t'((p + 2) % 4);
        src_rem = 0;
        issue(p, c);
      end
    end
    wait (n_cpl[0] == 12 && n_cpl[1] == 12 && n_cpl[2] == 12 && n_cpl[3] == 12);
    t_mul2 = ($time - t0) / 2;
    repeat (4) @(posedge clk);
    do_collect = 1;
    #1;

    // ---- checks ----
    for (int e = 0; e < NE; e++) begin
      share_t z [4];
      share_t sum, v;
      bit ok, first;
      ok = 1;
      for (int i = 0; i < 4; i++) begin
        first = 1;
        for (int p = 0; p < 4; p++) if (p != i) begin
          v = zres[p][e][lane_of_share(party_t'(p), party_t'(i))];
          if (first) begin z[i] = v; first = 0; end
          else if (v != z[i]) ok = 0;
        end
      end
      sum = z[0] + z[1] + z[2] + z[3];
      checks += 2;
      if (!ok) begin
        failures++;
        if (failures < 10) $display("mul element %0d: holders disagree on a share", e);
      end
      if (sum != xv[e] * yv[e]) begin
        failures++;
        if (failures < 10) $display("mul element %0d: got %h want %h", e, sum, xv[e] * yv[e]);
      end
    end
    for (int e = 0; e < N_ADD; e++) begin
      share_t sum;
      sum = '0;
      for (int i = 0; i < 4; i++)
        sum += sres[(i + 1) % 4][e][lane_of_share(party_t'((i + 1) % 4), party_t'(i))];
      checks++;
      if (sum != xv[e] + yv[e]) begin
        failures++;
        if (failures < 10) $display("add element %0d: got %h want %h", e, sum, xv[e] + yv[e]);
      end
    end
    for (int e = 0; e < N_ADD; e++) begin
      share_t sum;
      sum = '0;
      for (int i = 0; i < 4; i++)
        sum += sres2[(i + 1) % 4][e][lane_of_share(party_t'((i + 1) % 4), party_t'(i))];
      checks++;
      if (sum != xv[e] + yv[e]) begin
        failures++;
        if (failures < 10) $display("remote-source add element %0d wrong", e);
      end
    end
    for (int p = 0; p < 4; p++) begin
      checks++;
      if (tag_open[p] != '0) begin failures++; $display("party %0d: tags never completed", p); end
    end

    $display("phase 1 (keys, MUL1, ADD): %0d cycles; phase 2 (MUL2): %0d cycles", t_mul1, t_mul2);
    check_mech("KEYLOAD command", m_key);
    check_mech("ADD command", m_add);
    check_mech("MUL1 command", m_mul1);
    check_mech("MUL2 command", m_mul2);
    check_mech("chunked command (len>DEPTH)", m_chunk);
    check_mech("DMA port contention", m_dma_contend);
    check_mech("host memory back-pressure", m_dma_stall);
    check_mech("network port contention", m_net_contend);
    check_mech("network back-pressure", m_net_stall);
    check_mech("queue head waits for busy acc", m_hol);
    check_mech("output queue credit stall", m_credit);
    check_mech("accelerators in parallel", m_parallel);
    check_mech("remote source fetch (GET)", m_get);
    check_mech("remote destination PUT", m_rdst);
    check_mech("remote invocation (network command)", m_rinv);
    check_mech("host and network commands contend", m_src_contend);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
