// tb_mpc_stage1: four stage-1 instances, one per party, fed the same secret-shared
// elements every cycle (a mix of OP_MUL1 and OP_ADD) with consistent keys.
// Checks against tb_ref_pkg:
//   - latency S1_LAT = 3 and one element per cycle;
//   - ADD: res = x + y lane by lane, no network word;
//   - MUL1: intermediate lane l = sum of the three PRNG words of key l, network word =
//     a_p - sum of p's own PRNG words;
//   - end to end: with z_i = t_i (any holder) + net word of party i, sum z_i = x*y.
`timescale 1ns/1ps
module tb_mpc_stage1;
  import mpc_pkg::*;
  import tb_ref_pkg::*;

  localparam int NEL = 300;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  share_t  kx [4];
  triple_t keys [4], x_in [4], y_in [4], res [4];
  logic    in_valid = 0, out_valid [4], net_valid [4];
  op_e     op = OP_MUL1;
  ctr_t    ctr = '0;
  share_t  net [4];

  for (genvar p = 0; p < 4; p++) begin : g_p
    mpc_stage1 dut (
      .clk, .rst_n, .party(party_t'(p)), .keys(keys[p]), .in_valid, .op, .ctr,
      .x_in(x_in[p]), .y_in(y_in[p]), .out_valid(out_valid[p]), .res_out(res[p]),
      .net_valid(net_valid[p]), .net_out(net[p]));
  end

  function automatic share_t r128(); return {$urandom, $urandom, $urandom, $urandom}; endfunction

  // per-element stimulus record
  share_t xs [NEL][4], ys [NEL][4];
  op_e    ops [NEL];
  int     sent_cyc [NEL];
  int     cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic chk(bit c, string m);
    checks++;
    if (!c) begin failures++; if (failures < 12) $display("FAIL: %s", m); end
  endtask

  int out_n = 0;
  // output checker
  always @(negedge clk) if (rst_n && out_valid[0]) begin
    automatic int e = out_n;
    automatic share_t z [4];
    automatic share_t xa [4], yb [4];
    automatic share_t sum;
    for (int j = 0; j < 4; j++) begin xa[j] = xs[e][j]; yb[j] = ys[e][j]; end
    chk(cyc - sent_cyc[e] == int'(S1_LAT), $sformatf("latency %0d", cyc - sent_cyc[e]));
    for (int p = 0; p < 4; p++) begin
      chk(out_valid[p], "all parties valid together");
      if (ops[e] == OP_ADD) begin
        chk(!net_valid[p], "no network word for ADD");
        for (int l = 0; l < 3; l++)
          chk(res[p][l] == xs[e][ref_idx(p, l)] + ys[e][ref_idx(p, l)], "ADD lane");
      end else begin
        share_t mask;
        mask = '0;
        chk(net_valid[p], "network word for MUL1");
        for (int l = 0; l < 3; l++) begin
          int i;
          share_t t;
          i = ref_idx(p, l);
          t = '0;
          for (int q = 0; q < 4; q++) if (q != i) t += ref_prng(kx[i], q, {32'd5, 32'(e)});
          chk(res[p][l] == t, $sformatf("el %0d party %0d lane %0d intermediate", e, p, l));
          mask += ref_prng(kx[i], p, {32'd5, 32'(e)});
        end
        chk(net[p] == ref_a(p, xa, yb) - mask, $sformatf("el %0d party %0d network word", e, p));
      end
    end
    if (ops[e] == OP_MUL1) begin
      for (int i = 0; i < 4; i++) begin
        int h;
        h = (i + 1) % 4;                // a holder of z_i
        z[i] = res[h][(i < h) ? i : i - 1] + net[i];
      end
      sum = z[0] + z[1] + z[2] + z[3];
      chk(sum == (xs[e][0] + xs[e][1] + xs[e][2] + xs[e][3]) *
                 (ys[e][0] + ys[e][1] + ys[e][2] + ys[e][3]), $sformatf("el %0d reconstruct", e));
    end
    out_n <= out_n + 1;
  end

  initial begin
    for (int i = 0; i < 4; i++) kx[i] = r128();
    for (int p = 0; p < 4; p++)
      for (int l = 0; l < 3; l++) keys[p][l] = kx[ref_idx(p, l)];
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int e = 0; e < NEL; e++) begin
      for (int j = 0; j < 4; j++) begin xs[e][j] = r128(); ys[e][j] = r128(); end
      if (e < 8) begin                       // corner values
        xs[e][0] = '1; ys[e][3] = (e < 4) ? '0 : '1;
      end
      ops[e] = ($urandom_range(3) == 0) ? OP_ADD : OP_MUL1;
      for (int p = 0; p < 4; p++)
        for (int l = 0; l < 3; l++) begin
          x_in[p][l] = xs[e][ref_idx(p, l)];
          y_in[p][l] = ys[e][ref_idx(p, l)];
        end
      op = ops[e]; ctr = {32'd5, 32'(e)}; in_valid = 1;
      sent_cyc[e] = cyc;
      @(negedge clk);
    end
    in_valid = 0;
    repeat (6) @(negedge clk);
    chk(out_n == NEL, $sformatf("one output per element (%0d)", out_n));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
