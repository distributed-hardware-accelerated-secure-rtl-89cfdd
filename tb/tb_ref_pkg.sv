// tb_ref_pkg: reference models used by the testbenches, written from the algorithm
// descriptions and not from the RTL.
//   ref_mix64   SplitMix64 finaliser (checked against its published first output).
//   ref_prng    the keyed generator: {mix64(k_hi ^ m0 ^ C), mix64(m0 + k_hi)} with
//               m0 = mix64(k_lo ^ ctr ^ stream<<60), C = 0x9E3779B97F4A7C15.
//   ref_owner   which party computes x_j*y_k: j==k -> j+1 mod 4, otherwise the lower
//               (j<k) or higher (j>k) of the two parties outside {j,k}.
//   ref_a       the additive share a_p = sum of the products party p owns, from the
//               four clear shares of x and y.
package tb_ref_pkg;
  import mpc_pkg::*;

  function automatic logic [63:0] ref_mix64(logic [63:0] z);
    z = (z ^ (z >> 30)) * 64'hBF58476D1CE4E5B9;
    z = (z ^ (z >> 27)) * 64'h94D049BB133111EB;
    return z ^ (z >> 31);
  endfunction

  function automatic share_t ref_prng(share_t key, int stream, logic [63:0] ctr);
    logic [63:0] m0;
    m0 = ref_mix64(key[63:0] ^ ctr ^ (64'(stream) << 60));
    return {ref_mix64(key[127:64] ^ m0 ^ 64'h9E3779B97F4A7C15), ref_mix64(m0 + key[127:64])};
  endfunction

  function automatic int ref_owner(int j, int k);
    int others [$];
    if (j == k) return (j + 1) % 4;
    for (int m = 0; m < 4; m++) if (m != j && m != k) others.push_back(m);
    return (j < k) ? others[0] : others[1];
  endfunction

  function automatic share_t ref_a(int p, share_t xs [4], share_t ys [4]);
    share_t a = '0;
    for (int j = 0; j < 4; j++)
      for (int k = 0; k < 4; k++)
        if (ref_owner(j, k) == p) a += xs[j] * ys[k];
    return a;
  endfunction

  // party p's lane l holds share index (l < p ? l : l+1)
  function automatic int ref_idx(int p, int l);
    return (l < p) ? l : l + 1;
  endfunction
endpackage
