// mpc_stage2: post-communication accumulation of a multiplication (Fig. 2, Stage 2).
//
// Party p holds, per element, an intermediate triple t (written to host memory by
// stage 1) and a triple r of words received from the three other parties, lane l of r
// coming from the party whose share index is held in lane l.  The final replicated
// shares of the product are z[l] = t[l] + r[l] mod 2^128.  That stage 2 combines the
// local intermediate shares with the ingress data follows the paper; the lane-wise
// addition is what the masking scheme of mpc_stage1 requires.
// Timing: fully pipelined, one element per cycle, S2_LAT = 1 cycle latency.
module mpc_stage2
  import mpc_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    in_valid,
  input  triple_t t_in,       // intermediate shares (Data A)
  input  triple_t r_in,       // received data (Data B)
  output logic    out_valid,
  output triple_t z_out
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      z_out     <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid)
        for (int l = 0; l < int'(LANES); l++) z_out[l] <= t_in[l] + r_in[l];
    end
  end

endmodule
