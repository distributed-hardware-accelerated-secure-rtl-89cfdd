// rr_arbiter: round-robin arbiter over N requesters.
//
// grant is one-hot (or zero) and combinational from req; the priority pointer moves
// past the granted requester when `advance` is high (the granted transfer completed),
// so every requester is served within N grants.  Used by the DMA for the host memory
// port, by the control unit for completions and by the top for the network port.
module rr_arbiter #(
  parameter int unsigned N = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] req,
  input  logic         advance,
  output logic [N-1:0] grant,
  output logic [(N>1?$clog2(N):1)-1:0] grant_idx
);

  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;
  logic [IW-1:0] ptr;

  always_comb begin
    grant = '0;
    grant_idx = '0;
    for (int k = N - 1; k >= 0; k--) begin
      // scan from ptr upwards; the last hit in this loop is the first after ptr
      automatic int idx = (int'(ptr) + k) % int'(N);
      if (req[idx]) begin
        grant = '0;
        grant[idx] = 1'b1;
        grant_idx = IW'(idx);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ptr <= '0;
    else if (advance && (grant != '0))
      ptr <= (grant_idx == IW'(N-1)) ? '0 : grant_idx + 1'b1;
  end

endmodule
