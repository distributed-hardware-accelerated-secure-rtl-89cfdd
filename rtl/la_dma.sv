// la_dma: DMA of the lookaside accelerator (Fig. 1, "DMA" in the lookaside block).
//
// Moves data between host memory and the NUM_ACC accelerators over one host port
// (the PCIe side).  Each accelerator presents beat-sized read or write requests; a
// round-robin arbiter grants one per cycle to the host port.  Host reads complete in
// order, so the DMA remembers, for every outstanding read, which accelerator issued it
// (a FIFO of MAX_RD entries) and steers each response back to it.  New reads are held
// back while that FIFO is full.  Writes are posted.
// The paper says only that accelerators fetch source data from host memory and
// return results by DMA; the shared port, the arbitration and the in-order response
// steering are this design's choices.
// Timing: a granted request reaches the host port in the same cycle (combinational
// path); a response reaches its accelerator in the cycle it arrives.
module la_dma
  import mpc_pkg::*;
#(
  parameter int unsigned NUM_ACC = 4,
  parameter int unsigned MAX_RD  = 64,
  localparam int unsigned IW = (NUM_ACC > 1) ? $clog2(NUM_ACC) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  // accelerator side
  input  logic [NUM_ACC-1:0] a_req_valid,
  output logic [NUM_ACC-1:0] a_req_ready,
  input  mem_req_t           a_req [NUM_ACC],
  output logic [NUM_ACC-1:0] a_rsp_valid,
  output triple_t            a_rsp_data,
  // host side
  output logic               h_req_valid,
  input  logic               h_req_ready,
  output mem_req_t           h_req,
  input  logic               h_rsp_valid,
  input  triple_t            h_rsp_data
);

  localparam int unsigned FW = $clog2(MAX_RD) + 1;

  logic [NUM_ACC-1:0] grant;
  logic [IW-1:0]      gidx;
  logic [NUM_ACC-1:0] eligible;
  logic               id_in_ready, id_out_valid;
  logic [IW-1:0]      id_out;
  logic [FW-1:0]      id_count;
  logic               fire;

  // a read may only be granted while its id can be remembered
  always_comb
    for (int a = 0; a < int'(NUM_ACC); a++)
      eligible[a] = a_req_valid[a] && (a_req[a].we || id_in_ready);

  rr_arbiter #(.N(NUM_ACC)) u_arb (
    .clk, .rst_n, .req(eligible), .advance(fire), .grant, .grant_idx(gidx));

  assign h_req_valid = |grant;
  assign h_req       = a_req[gidx];
  assign fire        = h_req_valid && h_req_ready;
  assign a_req_ready = grant & {NUM_ACC{h_req_ready}};

  sync_fifo #(.T(logic [IW-1:0]), .DEPTH(MAX_RD)) u_ids (
    .clk, .rst_n,
    .in_valid (fire && !h_req.we), .in_ready(id_in_ready), .in_data(gidx),
    .out_valid(id_out_valid), .out_ready(h_rsp_valid), .out_data(id_out),
    .count    (id_count));

  always_comb begin
    a_rsp_valid = '0;
    if (h_rsp_valid) a_rsp_valid[id_out] = 1'b1;
  end
  assign a_rsp_data = h_rsp_data;

  // every response belongs to a read this DMA issued
  assert property (@(posedge clk) disable iff (!rst_n) h_rsp_valid |-> id_out_valid);

endmodule
