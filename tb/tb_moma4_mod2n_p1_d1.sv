// tb_moma4_mod2n_p1_d1 -- test of the 4-operand adder mod 2^N+1 with D1
// output: exhaustive for N = 3, random for N = 8. The operands are the halves
// of D_C = {dch, dcl} and D_S = {dsh, dsl}; expected x_star is the D1 word of
// |D_C + D_S|_(2^N+1), i.e. {1, 0..0} for zero and {0, value-1} otherwise.
// One vector per clock, with a cycle-count watchdog.
module tb_moma4_mod2n_p1_d1;
  import tb_rns_ref_pkg::*;
  int unsigned checks = 0, failures = 0;
  int unsigned n_zero = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("watchdog: simulation did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [2:0] a0, a1, a2, a3;  logic [3:0] ax;
  logic [7:0] b0, b1, b2, b3;  logic [8:0] bx;

  moma4_mod2n_p1_d1 #(.N(3)) u_a (.dcl(a0), .dch(a1), .dsl(a2), .dsh(a3), .x_star(ax));
  moma4_mod2n_p1_d1 #(.N(8)) u_b (.dcl(b0), .dch(b1), .dsl(b2), .dsh(b3), .x_star(bx));

  task automatic check(int unsigned n, int unsigned cl, int unsigned ch, int unsigned sl,
                       int unsigned sh, int unsigned got);
    int unsigned m, e;
    m = (32'd1 << n) + 1;
    e = d1_word((((ch << n) + cl) + ((sh << n) + sl)) % m, n);
    checks++;
    if (e == (32'd1 << n)) n_zero++;
    if (e != got) begin
      failures++;
      if (failures < 10) $display("FAIL n=%0d exp=%0d got=%0d", n, e, got);
    end
  endtask

  initial begin
    for (int i = 0; i < 20000; i++) begin
      @(posedge clk);
      {a3, a2, a1, a0} = 12'(i);
      {b3, b2, b1, b0} = 32'($urandom);
      @(negedge clk);
      if (i < 4096) check(3, 32'(a0), 32'(a1), 32'(a2), 32'(a3), 32'(ax));
      check(8, 32'(b0), 32'(b1), 32'(b2), 32'(b3), 32'(bx));
    end
    if (n_zero == 0) begin failures++; $display("FAIL: zero residue never seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
