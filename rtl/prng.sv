// prng: keyed, counter-based pseudo random generator, one 128-bit word per cycle.
//
// Parties that hold the same key must draw identical random words without talking to
// each other, so the generator is a pure function of (key, stream, counter):
//   m0  = mix64(key[63:0]  ^ ctr ^ (stream << 60))
//   m1  = mix64(key[127:64] ^ m0 ^ 64'h9E3779B97F4A7C15)
//   rnd = { m1, mix64(m0 + key[127:64]) }
// where mix64 is the SplitMix64 finaliser (two xor-shift / multiply rounds).  The
// stream number separates the words that different parties add with the same key.
// A counter-based generator needs no state to resynchronise between parties.
// The paper asks for a PRNG with shared keys but does not give its construction; this
// mixer is this design's choice and is not a cryptographic PRF.
// Timing: one cycle; rnd/out_valid follow in_valid by PRNG_LAT = 1 cycle.
module prng
  import mpc_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  input  share_t     key,
  input  logic [1:0] stream,
  input  ctr_t       ctr,
  output logic       out_valid,
  output share_t     rnd
);

  function automatic logic [63:0] mix64(logic [63:0] z_in);
    logic [63:0] z;
    z = z_in;
    z = (z ^ (z >> 30)) * 64'hBF58476D1CE4E5B9;
    z = (z ^ (z >> 27)) * 64'h94D049BB133111EB;
    return z ^ (z >> 31);
  endfunction

  logic [63:0] m0, m1;
  always_comb begin
    m0 = mix64(key[63:0] ^ ctr ^ ({62'd0, stream} << 60));
    m1 = mix64(key[127:64] ^ m0 ^ 64'h9E3779B97F4A7C15);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      rnd       <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) rnd <= {m1, mix64(m0 + key[127:64])};
    end
  end

endmodule
