// copa_lookaside: the MPC lookaside accelerator block of one party's COPA FPGA (Fig. 1).
//
// The host queues lookaside commands (source, destination, length, operation) into the
// command queue; commands that arrive over the COPA network from a remote node (remote
// invocation) enter the same queue, taking turns with the host when both offer one.
// The control unit hands each to one of NUM_ACC two-stage MPC accelerators
// (mpc_accel), which fetch their operands from host memory through the
// shared DMA, compute, write results back through the same DMA and send masked
// multiplication data towards the other parties through the network port.  Completions
// (command tag, accelerator number and whether the command came from the network)
// return one per cycle; forwarding a remote command's completion back over the network
// is left to the network side.
// Ports: the host memory port stands for the PCIe connection to host DDR; the network
// port stands for the COPA network's PUT interface (a unicast remote write of one
// 128-bit word into one lane of a beat at another party); the GET port asks the network
// to copy a range of beats from a remote node into local host memory and reports each
// completion with the accelerator number that asked.  party is this FPGA's party
// number (0..3) in the four-party protocol and must be static.
// Four accelerators (Fig. 1), 128-bit shares and four parties follow the paper; the
// queue and buffer depths, the port formats and the round-robin sharing of the DMA and
// network ports are this design's choices.
module copa_lookaside
  import mpc_pkg::*;
#(
  parameter int unsigned NUM_ACC    = 4,
  parameter int unsigned DEPTH      = 2048,
  parameter int unsigned CMDQ_DEPTH = 16,
  parameter int unsigned OUTQ_DEPTH = 16,
  parameter int unsigned MAX_RD     = 64,
  localparam int unsigned IW = (NUM_ACC > 1) ? $clog2(NUM_ACC) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  party_t           party,
  // command submission (host -> command queue)
  input  logic             cmd_valid,
  output logic             cmd_ready,
  input  cmd_t             cmd,
  // command submission from the COPA network (remote invocation)
  input  logic             rcmd_valid,
  output logic             rcmd_ready,
  input  cmd_t             rcmd,
  // completions (to host)
  output logic             cpl_valid,
  input  logic             cpl_ready,
  output logic [TAG_W-1:0] cpl_tag,
  output logic [IW-1:0]    cpl_acc,
  output logic             cpl_remote,
  output logic [NUM_ACC-1:0] acc_busy,
  output logic [$clog2(CMDQ_DEPTH):0] cmdq_count,
  // host memory (PCIe / DDR side)
  output logic             mem_req_valid,
  input  logic             mem_req_ready,
  output mem_req_t         mem_req,
  input  logic             mem_rsp_valid,
  input  triple_t          mem_rsp_data,
  // COPA network PUT port
  output logic             net_valid,
  input  logic             net_ready,
  output net_put_t         net,
  // COPA network GET port (remote source fetch), tagged with the accelerator number
  output logic             get_valid,
  input  logic             get_ready,
  output net_get_t         get,
  output logic [IW-1:0]    get_acc,
  input  logic             get_done_valid,
  input  logic [IW-1:0]    get_done_acc
);

  // ---------------- command queue ----------------
  typedef struct packed {
    logic from_net;
    cmd_t cmd;
  } q_ent_t;

  logic       q_valid, q_ready, qi_valid, qi_ready;
  q_ent_t     q_ent, qi_ent;
  cmd_t       q_cmd;
  logic [1:0] s_grant;
  logic       s_idx;

  // host (0) and network (1) take turns at the queue input
  rr_arbiter #(.N(2)) u_src_arb (
    .clk, .rst_n, .req({rcmd_valid, cmd_valid}), .advance(qi_valid && qi_ready),
    .grant(s_grant), .grant_idx(s_idx));

  assign qi_valid   = |s_grant;
  assign qi_ent     = s_idx ? q_ent_t'{from_net: 1'b1, cmd: rcmd}
                            : q_ent_t'{from_net: 1'b0, cmd: cmd};
  assign cmd_ready  = s_grant[0] && qi_ready;
  assign rcmd_ready = s_grant[1] && qi_ready;

  sync_fifo #(.T(q_ent_t), .DEPTH(CMDQ_DEPTH)) u_cmd_queue (
    .clk, .rst_n,
    .in_valid (qi_valid), .in_ready(qi_ready), .in_data(qi_ent),
    .out_valid(q_valid), .out_ready(q_ready), .out_data(q_ent),
    .count    (cmdq_count));

  assign q_cmd = q_ent.cmd;

  // ---------------- control unit ----------------
  logic [NUM_ACC-1:0] a_cmd_valid, a_cmd_ready, a_done_valid, a_done_ready;
  cmd_t               a_cmd;
  logic [TAG_W-1:0]   a_done_tag [NUM_ACC];

  la_ctrl #(.NUM_ACC(NUM_ACC)) u_ctrl (
    .clk, .rst_n,
    .q_valid, .q_ready, .q_cmd,
    .acc_cmd_valid (a_cmd_valid), .acc_cmd_ready(a_cmd_ready), .acc_cmd(a_cmd),
    .acc_done_valid(a_done_valid), .acc_done_ready(a_done_ready), .acc_done_tag(a_done_tag),
    .cpl_valid, .cpl_ready, .cpl_tag, .cpl_acc, .busy(acc_busy));

  // origin of the command each accelerator holds, reported with its completion
  logic [NUM_ACC-1:0] from_net;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                 from_net <= '0;
    else if (q_valid && q_ready) from_net[IW'(q_cmd.acc)] <= q_ent.from_net;
  end

  assign cpl_remote = from_net[cpl_acc];

  // ---------------- accelerators ----------------
  logic [NUM_ACC-1:0] m_valid, m_ready, r_valid, n_valid, n_ready;
  mem_req_t           m_req [NUM_ACC];
  logic [NUM_ACC-1:0] g_valid, g_ready, g_done;
  net_get_t           g_req [NUM_ACC];
  net_put_t           n_put [NUM_ACC];
  triple_t            r_data;

  for (genvar a = 0; a < int'(NUM_ACC); a++) begin : g_acc
    mpc_accel #(.DEPTH(DEPTH), .OUTQ_DEPTH(OUTQ_DEPTH)) u_accel (
      .clk, .rst_n, .party,
      .cmd_valid (a_cmd_valid[a]), .cmd_ready(a_cmd_ready[a]), .cmd(a_cmd),
      .done_valid(a_done_valid[a]), .done_ready(a_done_ready[a]), .done_tag(a_done_tag[a]),
      .mreq_valid(m_valid[a]), .mreq_ready(m_ready[a]), .mreq(m_req[a]),
      .mrsp_valid(r_valid[a]), .mrsp_data(r_data),
      .net_valid (n_valid[a]), .net_ready(n_ready[a]), .net(n_put[a]),
      .get_valid (g_valid[a]), .get_ready(g_ready[a]), .get(g_req[a]), .get_done(g_done[a]));
  end

  // ---------------- DMA to host memory ----------------
  la_dma #(.NUM_ACC(NUM_ACC), .MAX_RD(MAX_RD)) u_dma (
    .clk, .rst_n,
    .a_req_valid(m_valid), .a_req_ready(m_ready), .a_req(m_req),
    .a_rsp_valid(r_valid), .a_rsp_data(r_data),
    .h_req_valid(mem_req_valid), .h_req_ready(mem_req_ready), .h_req(mem_req),
    .h_rsp_valid(mem_rsp_valid), .h_rsp_data(mem_rsp_data));

  // ---------------- link to the COPA network ----------------
  logic [NUM_ACC-1:0] n_grant;
  logic [IW-1:0]      n_gidx;

  rr_arbiter #(.N(NUM_ACC)) u_net_arb (
    .clk, .rst_n, .req(n_valid), .advance(net_valid && net_ready),
    .grant(n_grant), .grant_idx(n_gidx));

  assign net_valid = |n_grant;
  assign net       = n_put[n_gidx];
  assign n_ready   = n_grant & {NUM_ACC{net_ready}};

  logic [NUM_ACC-1:0] g_grant;

  rr_arbiter #(.N(NUM_ACC)) u_get_arb (
    .clk, .rst_n, .req(g_valid), .advance(get_valid && get_ready),
    .grant(g_grant), .grant_idx(get_acc));

  assign get_valid = |g_grant;
  assign get       = g_req[get_acc];
  assign g_ready   = g_grant & {NUM_ACC{get_ready}};

  always_comb begin
    g_done = '0;
    if (get_done_valid) g_done[get_done_acc] = 1'b1;
  end

  // a PUT never targets the sending party itself
  assert property (@(posedge clk) disable iff (!rst_n) net_valid |-> net.dest != party);

endmodule
