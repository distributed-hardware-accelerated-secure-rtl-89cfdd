// la_ctrl: global control unit of the lookaside accelerator (Fig. 1, CTRL).
//
// Takes commands from the head of the command queue and hands each to the accelerator
// named in its `acc` field, in queue order: the head waits while its accelerator is
// busy (in-order dispatch, so a host sees its commands to one accelerator executed in
// the order issued).  When accelerators finish, a round-robin arbiter returns their
// completions (tag and accelerator number) one per cycle to the host.  busy shows
// which accelerators hold a command.
// The paper states that a global control unit assigns queued commands to appropriate
// accelerators; selection by an explicit field, in-order dispatch and the completion
// path are this design's choices.
// Timing: a command leaves the queue in the cycle its accelerator accepts it.
module la_ctrl
  import mpc_pkg::*;
#(
  parameter int unsigned NUM_ACC = 4,
  localparam int unsigned IW = (NUM_ACC > 1) ? $clog2(NUM_ACC) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  // command queue head
  input  logic               q_valid,
  output logic               q_ready,
  input  cmd_t               q_cmd,
  // accelerators
  output logic [NUM_ACC-1:0] acc_cmd_valid,
  input  logic [NUM_ACC-1:0] acc_cmd_ready,
  output cmd_t               acc_cmd,
  input  logic [NUM_ACC-1:0] acc_done_valid,
  output logic [NUM_ACC-1:0] acc_done_ready,
  input  logic [TAG_W-1:0]   acc_done_tag [NUM_ACC],
  // completions to the host
  output logic               cpl_valid,
  input  logic               cpl_ready,
  output logic [TAG_W-1:0]   cpl_tag,
  output logic [IW-1:0]      cpl_acc,
  output logic [NUM_ACC-1:0] busy
);

  logic [IW-1:0] target;
  logic [NUM_ACC-1:0] cgrant;

  assign target  = IW'(q_cmd.acc);
  assign acc_cmd = q_cmd;

  always_comb begin
    acc_cmd_valid = '0;
    if (q_valid) acc_cmd_valid[target] = 1'b1;
  end
  assign q_ready = q_valid && acc_cmd_ready[target];

  rr_arbiter #(.N(NUM_ACC)) u_cpl_arb (
    .clk, .rst_n, .req(acc_done_valid), .advance(cpl_valid && cpl_ready),
    .grant(cgrant), .grant_idx(cpl_acc));

  assign cpl_valid      = |cgrant;
  assign cpl_tag        = acc_done_tag[cpl_acc];
  assign acc_done_ready = cgrant & {NUM_ACC{cpl_ready}};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) busy <= '0;
    else
      for (int a = 0; a < int'(NUM_ACC); a++)
        if (acc_cmd_valid[a] && acc_cmd_ready[a]) busy[a] <= 1'b1;
        else if (acc_done_valid[a] && acc_done_ready[a]) busy[a] <= 1'b0;
  end

  // a command is never handed to an accelerator that already holds one
  assert property (@(posedge clk) disable iff (!rst_n)
    (q_valid && q_ready) |-> !busy[target]);

endmodule
