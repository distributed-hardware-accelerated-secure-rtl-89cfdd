// mpc_stage1: local computation stage of the MPC accelerator (Fig. 2, Stage 1).
//
// Party p holds the triples x and y of its three shares of two values (lane l holds
// share index share_of_lane(p,l)).  Two operations:
//   OP_ADD : res[l] = x[l] + y[l]; the sum is complete, nothing is sent.
//   OP_MUL1: first half of a multiplication.  Of the sixteen products x_j*y_k, party p
//            computes the four given by mpc_pkg::term_owner and sums them into a_p, its
//            additive share of x*y.  It holds three PRNG keys, key[l] being the key known
//            to every party except i = share_of_lane(p,l).  With g(l,q) = PRNG(key[l],
//            stream q, ctr) it outputs
//              res[l] = sum over q != i of g(l,q)        (intermediate share, to host)
//              net    = a_p - sum over l of g(l,p)       (sent to all three others)
//            Every receiver lacks one of p's keys, so net reveals nothing about a_p.
//            Stage 2 adds the received net words to the intermediate shares, which
//            leaves each party with three of the four shares z_i of x*y (see README).
// All arithmetic is mod 2^128.  The 128-bit ring, PRNG-based local computation, the
// four-party 3-of-4 sharing and the three 128-bit network words per multiply follow
// the paper; the term assignment and masking scheme are this design's own, since the
// paper refers to the protocol of Dalskov et al. without giving it.
// Timing: fully pipelined, one element per cycle, fixed latency S1_LAT = 3 cycles.
// party must be stable while elements are in flight.
module mpc_stage1
  import mpc_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  party_t  party,
  input  triple_t keys,
  input  logic    in_valid,
  input  op_e     op,            // OP_ADD or OP_MUL1
  input  ctr_t    ctr,           // PRNG counter of this element
  input  triple_t x_in,          // Data A
  input  triple_t y_in,          // Data B
  output logic    out_valid,
  output triple_t res_out,       // to DMA (host memory)
  output logic    net_valid,     // net_out must be sent to the three other parties
  output share_t  net_out
);

  // ---------------- cycle 1: products, sums, PRNG words ----------------
  share_t  g [LANES][LANES];      // g[l][m]: key lane l, m-th party other than i
  logic    g_valid [LANES][LANES];
  share_t  prod_q [4];
  triple_t sum_q;
  logic    v1, mul1;

  for (genvar l = 0; l < int'(LANES); l++) begin : g_key
    for (genvar m = 0; m < int'(LANES); m++) begin : g_stream
      party_t i_idx;
      assign i_idx = share_of_lane(party, 2'(l));
      prng u_prng (
        .clk, .rst_n,
        .in_valid (in_valid && op == OP_MUL1),
        .key      (keys[l]),
        .stream   (share_of_lane(i_idx, 2'(m))),
        .ctr,
        .out_valid(g_valid[l][m]),
        .rnd      (g[l][m])
      );
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; mul1 <= 1'b0; sum_q <= '0;
      for (int n = 0; n < 4; n++) prod_q[n] <= '0;
    end else begin
      v1   <= in_valid;
      mul1 <= (op == OP_MUL1);
      if (in_valid) begin
        for (int n = 0; n < 4; n++) begin
          automatic logic [3:0] tl = term_lanes(party, 2'(n));
          prod_q[n] <= x_in[tl[3:2]] * y_in[tl[1:0]];
        end
        for (int l = 0; l < int'(LANES); l++) sum_q[l] <= x_in[l] + y_in[l];
      end
    end
  end

  // ---------------- cycle 2: additive share, masks ----------------
  share_t  a_q, mask_q;
  triple_t t_q;
  logic    v2, mul2;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v2 <= 1'b0; mul2 <= 1'b0; a_q <= '0; mask_q <= '0; t_q <= '0;
    end else begin
      v2   <= v1;
      mul2 <= mul1;
      if (v1) begin
        if (mul1) begin
          automatic share_t msk = '0;
          a_q <= prod_q[0] + prod_q[1] + prod_q[2] + prod_q[3];
          for (int l = 0; l < int'(LANES); l++) begin
            t_q[l] <= g[l][0] + g[l][1] + g[l][2];
            msk = msk + g[l][lane_of_share(share_of_lane(party, 2'(l)), party)];
          end
          mask_q <= msk;
        end else begin
          t_q <= sum_q;
        end
      end
    end
  end

  // ---------------- cycle 3: outputs ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; net_valid <= 1'b0; res_out <= '0; net_out <= '0;
    end else begin
      out_valid <= v2;
      net_valid <= v2 && mul2;
      if (v2) begin
        res_out <= t_q;
        net_out <= mul2 ? a_q - mask_q : '0;
      end
    end
  end

  // The PRNG words must arrive together with the products they mask.
  assert property (@(posedge clk) disable iff (!rst_n) (v1 && mul1) |-> g_valid[0][0]);

endmodule
