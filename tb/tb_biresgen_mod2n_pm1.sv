// tb_biresgen_mod2n_pm1 -- end-to-end test of the bi-residue generator for
// the conjugate moduli 2^N-1 and 2^N+1.
//
// The generator is built with its default parameters (N = 3, P = 18: moduli 7
// and 9, 18-bit input) and taken through every one of its 2^18 inputs. Each
// output is compared with |x| mod 2^N-1 and with the D1 word of |x| mod 2^N+1,
// both computed with plain wide-integer %. (Other sizes: tb_biresgen_wide.)
//
// It also counts, on the default instance, that each mechanism of the design
// was exercised: an end-around carry leaving the mod 2^(2N)-1 CSA row, both
// values of the inverted end-around carry in each mod 2^N+1 CSA row, both
// values of the carry out of the D1 adder, a zero result (zero-indication
// bit set), a zero residue mod 2^N-1 and the all-ones fold in the mod 2^N-1
// adder. A mechanism never seen counts as a failure.
module tb_biresgen_mod2n_pm1;
  import tb_rns_ref_pkg::*;
  int unsigned checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog: simulation did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [17:0]  xa;  logic [2:0]  ma;  logic [3:0]  pa;

  biresgen_mod2n_pm1                    u_a (.x(xa), .res_m1(ma), .res_p1_d1(pa));

  // Mechanism counters (default instance).
  int unsigned ev_tree_eac = 0;                  // top carry of the shared CSA row = 1
  int unsigned ev_row1_ieac0 = 0, ev_row1_ieac1 = 0;
  int unsigned ev_row2_ieac0 = 0, ev_row2_ieac1 = 0;
  int unsigned ev_d1_cout0 = 0, ev_d1_cout1 = 0;
  int unsigned ev_zero_p1 = 0, ev_zero_m1 = 0, ev_m1_fold = 0;

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
    for (int i = 0; i < (1 << 18); i++) begin
      @(posedge clk);
      xa = 18'(i);
      @(negedge clk);
      check(3, 256'(xa), 32'(ma), 32'(pa));
      if (u_a.u_p1.u_tree.g_lev[0].g_csa[0].u_csa.cy[5]) ev_tree_eac++;
      if (u_a.u_p1.u_final.u_csa4.u_row1.cy[2]) ev_row1_ieac1++; else ev_row1_ieac0++;
      if (u_a.u_p1.u_final.u_csa4.u_row2.cy[2]) ev_row2_ieac1++; else ev_row2_ieac0++;
      if (u_a.u_p1.u_final.u_add.cout) ev_d1_cout1++; else ev_d1_cout0++;
      if (pa[3]) ev_zero_p1++;
      if (ma == 0) ev_zero_m1++;
      if (&u_a.u_m1.u_add.s) ev_m1_fold++;
    end
    $display("mechanisms exercised (default instance):");
    need("end-around carry in shared CSA mod 2^2n-1", ev_tree_eac);
    need("row 1 inverted EAC, carry 0 (re-enters 1)", ev_row1_ieac0);
    need("row 1 inverted EAC, carry 1 (re-enters 0)", ev_row1_ieac1);
    need("row 2 inverted EAC, carry 0 (re-enters 1)", ev_row2_ieac0);
    need("row 2 inverted EAC, carry 1 (re-enters 0)", ev_row2_ieac1);
    need("D1 adder carry out 0 (+1 re-enters)", ev_d1_cout0);
    need("D1 adder carry out 1", ev_d1_cout1);
    need("zero indication set (x = 0 mod 2^n+1)", ev_zero_p1);
    need("zero residue mod 2^n-1", ev_zero_m1);
    need("all-ones fold in mod 2^n-1 adder", ev_m1_fold);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
