// sync_fifo: single-clock FIFO of DEPTH entries of type T.
//
// Used as the lookaside command queue (Fig. 1, Cmd Queue) and as small internal
// queues.  Standard valid/ready on both sides: an entry is written when in_valid &&
// in_ready and removed when out_valid && out_ready.  The head is presented from the
// storage array (first-word fall-through), so out_valid rises the cycle after the
// first write.  count gives the occupancy.  The paper only names the queue; depth and
// handshake are this design's choices.
module sync_fifo #(
  parameter type         T     = logic [7:0],
  parameter int unsigned DEPTH = 16,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      in_valid,
  output logic      in_ready,
  input  T          in_data,
  output logic      out_valid,
  input  logic      out_ready,
  output T          out_data,
  output logic [AW:0] count
);

  T mem [DEPTH];
  logic [AW-1:0] wp, rp;

  wire push = in_valid && in_ready;
  wire pop  = out_valid && out_ready;

  assign in_ready  = (count < (AW+1)'(DEPTH));
  assign out_valid = (count != '0);
  assign out_data  = mem[rp];

  always_ff @(posedge clk) if (push) mem[wp] <= in_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (push) wp <= (wp == AW'(DEPTH-1)) ? '0 : wp + 1'b1;
      if (pop)  rp <= (rp == AW'(DEPTH-1)) ? '0 : rp + 1'b1;
      count <= count + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  // A pop of an empty queue or a push into a full one cannot happen by construction.
  assert property (@(posedge clk) disable iff (!rst_n) count <= (AW+1)'(DEPTH));

endmodule
