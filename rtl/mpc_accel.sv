// mpc_accel: one two-stage MPC lookaside accelerator (Fig. 1 "Accelerator n", Fig. 2).
//
// The accelerator executes one lookaside command at a time:
//   OP_KEYLOAD  read one triple at src_a: the party's three PRNG keys (lane l = key
//               known to all parties except share_of_lane(party,l)).
//   OP_ADD      z = x + y on len elements (stage 1 only).
//   OP_MUL1     first half of a multiply: intermediate shares to dst, one masked word
//               per element to each of the three other parties (net_dst at the peer).
//   OP_MUL2     second half: z = intermediate (src_a) + received words (src_b).
// If the command's sources are on a remote node (src_remote), the accelerator first
//   FETCH   issues two network GETs (src_a and src_b ranges of len beats at src_node,
//           copied to the same addresses locally) and waits for both to complete.
// Elements are processed in chunks of at most DEPTH.  For each chunk the accelerator
//   LOAD    reads 2*n triples through the DMA port: the first n responses are steered
//           into Data A, the next n into Data B (the input demultiplexer of Fig. 2);
//   COMPUTE reads A[k], B[k] one element per cycle into stage 1 or stage 2; the output
//           multiplexer of Fig. 2 puts the selected stage's result in an output queue;
//   DRAIN   (overlapped with COMPUTE) writes each result to dst+index through the DMA
//           port, or for a remote destination (dst_remote) sends its three lanes as
//           PUTs to dst_node, and, for OP_MUL1, sends the network word as three PUTs.
// A credit counter admits an element into the pipeline only if the output queue
// has room for it, so the stages never stall.  When the last result has left, the
// accelerator raises done_valid with the command's tag until done_ready.
// The split into load, stage 1 / stage 2, writeback to host and send to the network
// follows the paper, as do fetching remote sources over the network before the DMA and
// sending results to a remote destination over the network; chunking, the credit
// scheme, the PRNG counter ({nonce, element index}) and all port formats are this
// design's own.
// Interfaces: cmd (valid/ready, accepted only when idle), host memory port (valid/
// ready requests, in-order read responses that are always accepted), network port
// (valid/ready PUTs), GET (valid/ready request, one-cycle get_done pulse per completed
// GET, in order), done (valid/ready).
module mpc_accel
  import mpc_pkg::*;
#(
  parameter int unsigned DEPTH      = 2048,
  parameter int unsigned OUTQ_DEPTH = 16
) (
  input  logic     clk,
  input  logic     rst_n,
  input  party_t   party,

  input  logic     cmd_valid,
  output logic     cmd_ready,
  input  cmd_t     cmd,

  output logic     done_valid,
  input  logic     done_ready,
  output logic [TAG_W-1:0] done_tag,

  output logic     mreq_valid,
  input  logic     mreq_ready,
  output mem_req_t mreq,
  input  logic     mrsp_valid,
  input  triple_t  mrsp_data,

  output logic     net_valid,
  input  logic     net_ready,
  output net_put_t net,

  output logic     get_valid,
  input  logic     get_ready,
  output net_get_t get,
  input  logic     get_done
);

  localparam int unsigned AW = $clog2(DEPTH);
  localparam int unsigned CW = AW + 2;          // element counters within a chunk
  localparam int unsigned QW = $clog2(OUTQ_DEPTH) + 1;

  typedef enum logic [2:0] {S_IDLE, S_KEY, S_FETCH, S_LOAD, S_COMPUTE, S_DONE} state_e;

  typedef struct packed {
    logic [LEN_W-1:0] idx;
    logic             has_net;
    share_t           netw;
    triple_t          res;
  } outq_t;

  state_e           state;
  cmd_t             c;
  triple_t          keys;
  logic [LEN_W-1:0] base;          // index of the first element of this chunk
  logic [CW-1:0]    n;             // elements in this chunk
  logic [CW-1:0]    rd_issued;     // LOAD: read requests issued (0..2n)
  logic [CW-1:0]    rd_got;        // LOAD: read responses received
  logic [CW-1:0]    issued;        // COMPUTE: elements sent into the pipeline
  logic [CW-1:0]    pushed;        // COMPUTE: results put in the output queue
  logic [CW-1:0]    written;       // COMPUTE: results drained
  logic [1:0]       get_sent;      // FETCH: GETs issued (A, B)
  logic [1:0]       get_got;       // FETCH: GETs completed

  // ---------------- Data A / Data B with the input demultiplexer ----------------
  logic     a_we, b_we, buf_rd;
  logic [AW-1:0] wr_addr, rd_addr;
  triple_t  a_q, b_q;

  always_comb begin
    a_we = 1'b0; b_we = 1'b0; wr_addr = '0;
    if (state == S_LOAD && mrsp_valid) begin
      if (rd_got < n) begin a_we = 1'b1; wr_addr = AW'(rd_got); end
      else            begin b_we = 1'b1; wr_addr = AW'(rd_got - n); end
    end
  end

  data_buffer #(.DEPTH(DEPTH)) u_data_a (
    .clk, .we(a_we), .wr_addr, .wr_data(mrsp_data), .rd_en(buf_rd), .rd_addr, .rd_data(a_q));
  data_buffer #(.DEPTH(DEPTH)) u_data_b (
    .clk, .we(b_we), .wr_addr, .wr_data(mrsp_data), .rd_en(buf_rd), .rd_addr, .rd_data(b_q));

  // ---------------- stages ----------------
  logic    st_valid;                 // buffer data valid this cycle
  logic [LEN_W-1:0] st_idx;
  logic    s1_ov, s1_nv, s2_ov;
  triple_t s1_res, s2_res;
  share_t  s1_net;

  logic [QW-1:0] q_count;
  logic          q_in_ready, q_out_valid, q_pop;
  outq_t         q_in, q_out;
  logic [QW-1:0] inflight;

  assign rd_addr = AW'(issued);
  assign buf_rd  = (state == S_COMPUTE) && (issued < n) &&
                   (inflight + q_count < QW'(OUTQ_DEPTH));

  mpc_stage1 u_stage1 (
    .clk, .rst_n, .party, .keys,
    .in_valid (st_valid && c.op != OP_MUL2),
    .op       (c.op),
    .ctr      ({c.nonce, st_idx}),
    .x_in     (a_q),
    .y_in     (b_q),
    .out_valid(s1_ov),
    .res_out  (s1_res),
    .net_valid(s1_nv),
    .net_out  (s1_net)
  );

  mpc_stage2 u_stage2 (
    .clk, .rst_n,
    .in_valid (st_valid && c.op == OP_MUL2),
    .t_in     (a_q),
    .r_in     (b_q),
    .out_valid(s2_ov),
    .z_out    (s2_res)
  );

  // output multiplexer (Fig. 2): stage 1 or stage 2 result towards the DMA
  logic             q_push;
  logic [LEN_W-1:0] out_idx;
  always_comb begin
    q_push = s1_ov || s2_ov;
    q_in.idx     = out_idx;
    q_in.has_net = s1_ov && s1_nv;
    q_in.netw    = s1_net;
    q_in.res     = s2_ov ? s2_res : s1_res;
  end

  sync_fifo #(.T(outq_t), .DEPTH(OUTQ_DEPTH)) u_outq (
    .clk, .rst_n,
    .in_valid (q_push), .in_ready(q_in_ready), .in_data(q_in),
    .out_valid(q_out_valid), .out_ready(q_pop), .out_data(q_out),
    .count    (q_count)
  );

  // ---------------- drain: host write or remote PUTs, plus network words ----------------
  // Per queue entry: one host write (local destination) or three PUTs of the result
  // lanes to dst_node (remote destination), then, for MUL1, the masked word to each of
  // the three other parties.  put_cnt counts the PUTs of the head entry.
  logic       wr_sent;
  logic [2:0] put_cnt, put_total;
  logic       wr_fire, net_fire;
  logic       drain_wr, drain_net, need_wr;
  logic       put_res;             // current PUT carries a result lane
  logic [1:0] put_k;               // result lane, or index of the peer

  assign need_wr   = !c.dst_remote;
  assign put_total = (c.dst_remote ? 3'd3 : 3'd0) + (q_out.has_net ? 3'd3 : 3'd0);
  assign drain_wr  = q_out_valid && need_wr && !wr_sent;
  assign drain_net = q_out_valid && (put_cnt < put_total);
  assign q_pop     = q_out_valid && (!need_wr || wr_sent || wr_fire) &&
                     (put_cnt == put_total || (put_cnt == put_total - 3'd1 && net_fire));
  assign put_res   = c.dst_remote && put_cnt < 3'd3;
  assign put_k     = put_res ? put_cnt[1:0] : 2'(put_cnt - (c.dst_remote ? 3'd3 : 3'd0));

  always_comb begin
    mreq_valid = 1'b0;
    mreq       = '0;
    if (state == S_KEY && rd_issued == '0) begin
      mreq_valid = 1'b1;
      mreq.addr  = c.src_a;
    end else if (state == S_LOAD && rd_issued < 2 * n) begin
      mreq_valid = 1'b1;
      mreq.addr  = (rd_issued < n) ? c.src_a + base + ADDR_W'(rd_issued)
                                   : c.src_b + base + ADDR_W'(rd_issued - n);
    end else if (state == S_COMPUTE && drain_wr) begin
      mreq_valid = 1'b1;
      mreq.we    = 1'b1;
      mreq.addr  = c.dst + ADDR_W'(q_out.idx);
      mreq.data  = q_out.res;
    end
  end
  assign wr_fire = (state == S_COMPUTE) && drain_wr && mreq_ready;

  always_comb begin
    net_valid = (state == S_COMPUTE) && drain_net;
    if (put_res) begin
      net.dest = c.dst_node;
      net.addr = c.dst + ADDR_W'(q_out.idx);
      net.lane = put_k;
      net.data = q_out.res[put_k];
    end else begin
      net.dest = share_of_lane(party, put_k);
      net.addr = c.net_dst + ADDR_W'(q_out.idx);
      net.lane = lane_of_share(share_of_lane(party, put_k), party);
      net.data = q_out.netw;
    end
  end

  // ---------------- fetch of remote sources ----------------
  always_comb begin
    get_valid = (state == S_FETCH) && (get_sent != 2'd2);
    get.node  = c.src_node;
    get.raddr = (get_sent == 2'd0) ? c.src_a : c.src_b;
    get.laddr = get.raddr;
    get.len   = c.len;
  end
  assign net_fire = net_valid && net_ready;

  // ---------------- control ----------------
  assign cmd_ready  = (state == S_IDLE);
  assign done_valid = (state == S_DONE);
  assign done_tag   = c.tag;

  logic [LEN_W-1:0] next_base;
  assign next_base = base + LEN_W'(n);

  function automatic logic [CW-1:0] chunk_of(logic [LEN_W-1:0] rem);
    return (rem > LEN_W'(DEPTH)) ? CW'(DEPTH) : CW'(rem);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; c <= '0; keys <= '0; base <= '0; n <= '0;
      rd_issued <= '0; rd_got <= '0; issued <= '0; pushed <= '0; written <= '0;
      st_valid <= 1'b0; st_idx <= '0; out_idx <= '0; inflight <= '0;
      wr_sent <= 1'b0; put_cnt <= '0;
      get_sent <= '0; get_got <= '0;
    end else begin
      st_valid <= buf_rd;
      st_idx   <= base + LEN_W'(issued);
      inflight <= inflight + QW'(buf_rd) - QW'(q_push);
      if (q_push) out_idx <= out_idx + 1'b1;

      // drain bookkeeping
      if (q_pop) begin
        wr_sent <= 1'b0; put_cnt <= '0;
      end else begin
        if (wr_fire)  wr_sent <= 1'b1;
        if (net_fire) put_cnt <= put_cnt + 1'b1;
      end

      unique case (state)
        S_IDLE: if (cmd_valid) begin
          c <= cmd;
          base <= '0;
          rd_issued <= '0; rd_got <= '0;
          if (cmd.op == OP_KEYLOAD)   state <= S_KEY;
          else if (cmd.len == '0)     state <= S_DONE;
          else begin
            n        <= chunk_of(cmd.len);
            get_sent <= '0; get_got <= '0;
            state    <= cmd.src_remote ? S_FETCH : S_LOAD;
          end
        end
        S_FETCH: begin
          if (get_valid && get_ready) get_sent <= get_sent + 1'b1;
          if (get_done) get_got <= get_got + 1'b1;
          if (get_done && get_got == 2'd1) state <= S_LOAD;
        end
        S_KEY: begin
          if (mreq_valid && mreq_ready) rd_issued <= rd_issued + 1'b1;
          if (mrsp_valid) begin
            keys  <= mrsp_data;
            state <= S_DONE;
          end
        end
        S_LOAD: begin
          if (mreq_valid && mreq_ready) rd_issued <= rd_issued + 1'b1;
          if (mrsp_valid) rd_got <= rd_got + 1'b1;
          if (mrsp_valid && rd_got == 2 * n - 1) begin
            state   <= S_COMPUTE;
            issued  <= '0; pushed <= '0; written <= '0;
            out_idx <= base;
          end
        end
        S_COMPUTE: begin
          if (buf_rd) issued  <= issued + 1'b1;
          if (q_push) pushed  <= pushed + 1'b1;
          if (q_pop)  written <= written + 1'b1;
          if (q_pop && written == n - 1) begin
            if (next_base == c.len) state <= S_DONE;
            else begin
              base      <= next_base;
              n         <= chunk_of(c.len - next_base);
              rd_issued <= '0; rd_got <= '0;
              state     <= S_LOAD;
            end
          end
        end
        S_DONE: if (done_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // Read responses only come while reads are outstanding.
  assert property (@(posedge clk) disable iff (!rst_n)
    mrsp_valid |-> (state == S_KEY) || (state == S_LOAD && rd_got < rd_issued));
  // GET completions only for GETs this accelerator issued.
  assert property (@(posedge clk) disable iff (!rst_n) get_done |-> (state == S_FETCH && get_got < get_sent));
  // Credits keep the output queue from overflowing.
  assert property (@(posedge clk) disable iff (!rst_n) q_push |-> q_in_ready);
  // A chunk's results leave in order, one write per element.
  assert property (@(posedge clk) disable iff (!rst_n) (state == S_COMPUTE) |-> pushed <= issued);

endmodule
