// data_buffer: on-chip operand memory of an MPC accelerator (Fig. 2, Data A / Data B).
//
// A simple dual-port RAM of DEPTH triples: one write port filled by the DMA, one
// synchronous read port feeding the computation stages.  A read returns the word at
// rd_addr one cycle after rd_en.  The paper gives the two memories and their role but
// not their size or ports; DEPTH = 2048 and the one-cycle read are this design's
// choices.  Written as an array so that synthesis maps it to block RAM.
module data_buffer
  import mpc_pkg::*;
#(
  parameter int unsigned DEPTH = 2048,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] wr_addr,
  input  triple_t       wr_data,
  input  logic          rd_en,
  input  logic [AW-1:0] rd_addr,
  output triple_t       rd_data
);

  triple_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end

endmodule
