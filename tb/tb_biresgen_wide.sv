// tb_biresgen_wide -- the bi-residue generator at sizes other than its
// default, with random inputs:
//   N = 4,  P = 16   p = 4n: q = 2 blocks, the CSA tree is empty
//   N = 5,  P = 33   q = 4 blocks, the top block zero-padded (7 of 10 bits)
//   N = 16, P = 256  q = 8 blocks, a four-level CSA tree (6 rows)
// Every tenth input is all ones, which drives end-around carries out of every
// tree row. Outputs are compared with |x| mod 2^N-1 and with the D1 word of
// |x| mod 2^N+1, both from plain wide-integer %. On the largest instance it
// counts end-around carries on each tree level and zero results, and fails a
// mechanism never seen. One input per clock; cycle-count watchdog.
module tb_biresgen_wide;
  import tb_rns_ref_pkg::*;
  int unsigned checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog: simulation did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [15:0]  xb;  logic [3:0]  mb;  logic [4:0]  pb;
  logic [32:0]  xc;  logic [4:0]  mc;  logic [5:0]  pc;
  logic [255:0] xd;  logic [15:0] md;  logic [16:0] pd;

  biresgen_mod2n_pm1 #(.N(4),  .P(16))  u_b (.x(xb), .res_m1(mb), .res_p1_d1(pb));
  biresgen_mod2n_pm1 #(.N(5),  .P(33))  u_c (.x(xc), .res_m1(mc), .res_p1_d1(pc));
  biresgen_mod2n_pm1 #(.N(16), .P(256)) u_d (.x(xd), .res_m1(md), .res_p1_d1(pd));

  int unsigned ev_eac_l0 = 0, ev_eac_l1 = 0, ev_eac_l2 = 0, ev_zero_b = 0;

  task automatic check(int unsigned n, wide_t x, int unsigned got_m1, int unsigned got_p1);
    int unsigned e_m1, e_p1;
    e_m1 = mod_u(x, (32'd1 << n) - 1);
    e_p1 = d1_word(mod_u(x, (32'd1 << n) + 1), n);
    checks++;
    if (e_m1 != got_m1 || e_p1 != got_p1) begin
      failures++;
      if (failures < 10)
        $display("FAIL n=%0d x=%0h m1 exp=%0d got=%0d  p1_d1 exp=%0d got=%0d",
                 n, x, e_m1, got_m1, e_p1, got_p1);
    end
  endtask

  task automatic need(string what, int unsigned count);
    $display("  %-44s %0d", what, count);
    if (count == 0) begin
      failures++;
      $display("FAIL: mechanism never exercised: %s", what);
    end
  endtask

  initial begin
    for (int i = 0; i < 50000; i++) begin
      @(posedge clk);
      xb = 16'($urandom);
      xc = 33'(rand_bits(33));
      xd = rand_bits(256);
      if (i % 10 == 0) begin xb = '1; xc = '1; xd = '1; end
      if (i % 10 == 5) xb = 16'(17 * ($urandom % 3856));   // multiples of 17
      @(negedge clk);
      check(4, 256'(xb), 32'(mb), 32'(pb));
      check(5, 256'(xc), 32'(mc), 32'(pc));
      check(16, xd, 32'(md), 32'(pd));
      if (u_d.u_p1.u_tree.g_lev[0].g_csa[0].u_csa.cy[31]) ev_eac_l0++;
      if (u_d.u_p1.u_tree.g_lev[1].g_csa[0].u_csa.cy[31]) ev_eac_l1++;
      if (u_d.u_p1.u_tree.g_lev[2].g_csa[0].u_csa.cy[31]) ev_eac_l2++;
      if (pb[4]) ev_zero_b++;
    end
    $display("mechanisms exercised:");
    need("EAC out of tree level 0 (N=16, P=256)", ev_eac_l0);
    need("EAC out of tree level 1 (N=16, P=256)", ev_eac_l1);
    need("EAC out of tree level 2 (N=16, P=256)", ev_eac_l2);
    need("zero indication set (N=4, P=16)", ev_zero_b);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
