// mpc_pkg: types and constants shared by the four-party MPC lookaside accelerator.
//
// Arithmetic is on 128-bit ring elements (mod 2^128).  A value x is split into four
// additive shares x0..x3 (x = x0+x1+x2+x3); party p holds the three shares x_j with
// j != p (3-out-of-4 replicated sharing).  A party stores its three shares as one
// "triple", lane l holding share index share_of_lane(p, l) in ascending order.
// The ring size, the share width and the 3-of-4 sharing follow the paper; the
// triple layout, the command format and the memory/network port formats are this
// design's own choices.
package mpc_pkg;

  localparam int unsigned SHARE_W = 128;          // ring Z_{2^128}
  localparam int unsigned NPARTY  = 4;            // four-party protocol
  localparam int unsigned LANES   = NPARTY - 1;   // shares held per party
  localparam int unsigned BEAT_W  = LANES * SHARE_W;
  localparam int unsigned ADDR_W  = 32;           // host address in beats
  localparam int unsigned LEN_W   = 32;
  localparam int unsigned TAG_W   = 8;
  localparam int unsigned ACC_ID_W = 2;           // up to four accelerators (Fig. 1)

  typedef logic [SHARE_W-1:0] share_t;
  typedef share_t [LANES-1:0] triple_t;
  typedef logic [1:0]         party_t;
  typedef logic [63:0]        ctr_t;

  // Fixed pipeline latencies (cycles from input valid to output valid).
  localparam int unsigned PRNG_LAT = 1;
  localparam int unsigned S1_LAT   = 3;
  localparam int unsigned S2_LAT   = 1;

  typedef enum logic [1:0] {
    OP_KEYLOAD = 2'd0,   // load the party's three PRNG keys from src_a
    OP_ADD     = 2'd1,   // z = x + y, stage 1 only
    OP_MUL1    = 2'd2,   // multiply, stage 1: local products, masks, network data
    OP_MUL2    = 2'd3    // multiply, stage 2: intermediate + received data
  } op_e;

  // Lookaside command: source, destination, length and type of operation (paper),
  // plus accelerator select, tag, PRNG nonce and remote buffer (this design).
  // src_remote: the sources lie at node src_node and are first fetched over the
  // network into the same addresses locally; dst_remote: results are sent to node
  // dst_node instead of being written to local host memory.
  typedef struct packed {
    op_e                 op;
    logic                src_remote;
    party_t              src_node;
    logic                dst_remote;
    party_t              dst_node;
    logic [ACC_ID_W-1:0] acc;
    logic [TAG_W-1:0]    tag;
    logic [31:0]         nonce;
    logic [ADDR_W-1:0]   src_a;
    logic [ADDR_W-1:0]   src_b;
    logic [ADDR_W-1:0]   dst;
    logic [ADDR_W-1:0]   net_dst;
    logic [LEN_W-1:0]    len;
  } cmd_t;

  // Host memory request (one beat = one share triple).  Reads return in order.
  typedef struct packed {
    logic              we;
    logic [ADDR_W-1:0] addr;
    triple_t           data;
  } mem_req_t;

  // Network PUT of one 128-bit word into lane `lane` of beat `addr` at party `dest`.
  typedef struct packed {
    party_t            dest;
    logic [ADDR_W-1:0] addr;
    logic [1:0]        lane;
    share_t            data;
  } net_put_t;

  // Network GET: copy len beats from raddr at node `node` to laddr in local host
  // memory, then report completion.
  typedef struct packed {
    party_t            node;
    logic [ADDR_W-1:0] raddr;
    logic [ADDR_W-1:0] laddr;
    logic [LEN_W-1:0]  len;
  } net_get_t;

  // Share index held in lane l by party p (ascending, skipping p).
  function automatic party_t share_of_lane(party_t p, logic [1:0] l);
    return (l >= p) ? l + 2'd1 : party_t'(l);
  endfunction

  // Lane in which party p holds share index j (j != p).
  function automatic logic [1:0] lane_of_share(party_t p, party_t j);
    return (j > p) ? 2'(j - 1) : 2'(j);
  endfunction

  // Which party computes the product term x_j*y_k.  Term (j,k) can be computed by the
  // two parties u<v outside {j,k} (for j==k, by the three parties other than j).
  // Diagonal terms go to party j+1; cross terms go to u if j<k, else to v.  Every
  // party gets four of the sixteen terms.
  function automatic party_t term_owner(party_t j, party_t k);
    party_t u, v;
    logic found;
    if (j == k) return j + 2'd1;
    u = '0; v = '0; found = 1'b0;
    for (int m = 0; m < 4; m++) begin
      if (party_t'(m) != j && party_t'(m) != k) begin
        if (!found) begin u = party_t'(m); found = 1'b1; end
        else v = party_t'(m);
      end
    end
    return (j < k) ? u : v;
  endfunction

  // The n-th (0..3) product term of party p, as lanes {lane of x_j, lane of y_k}.
  function automatic logic [3:0] term_lanes(party_t p, logic [1:0] n);
    int cnt;
    logic [3:0] r;
    cnt = 0; r = '0;
    for (int j = 0; j < 4; j++)
      for (int k = 0; k < 4; k++)
        if (term_owner(party_t'(j), party_t'(k)) == p) begin
          if (cnt == int'(n)) r = {lane_of_share(p, party_t'(j)), lane_of_share(p, party_t'(k))};
          cnt++;
        end
    return r;
  endfunction

endpackage
