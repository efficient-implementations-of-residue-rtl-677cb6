// tb_example_mod9 -- the worked mod-9 sizes: bi-residue generators for the
// moduli 7 and 9 (n = 3) with p = 16, 17 and 18 input bits, each run over
// every input value. The point of these sizes is that a generator built by
// complementing odd-numbered n-bit blocks needs a different correction
// constant for each p (8, 6 and 2 for p = 16, 17, 18), whereas here the same
// final block serves all three with no correction at all. The test also checks
// that the shared CSA tree of the p = 18 build costs p - 4n = 6 full adders.
// One input per clock; cycle-count watchdog.
module tb_example_mod9;
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

  logic [15:0] x16;  logic [2:0] m16;  logic [3:0] d16;
  logic [16:0] x17;  logic [2:0] m17;  logic [3:0] d17;
  logic [17:0] x18;  logic [2:0] m18;  logic [3:0] d18;

  biresgen_mod2n_pm1 #(.N(3), .P(16)) u_16 (.x(x16), .res_m1(m16), .res_p1_d1(d16));
  biresgen_mod2n_pm1 #(.N(3), .P(17)) u_17 (.x(x17), .res_m1(m17), .res_p1_d1(d17));
  biresgen_mod2n_pm1 #(.N(3), .P(18)) u_18 (.x(x18), .res_m1(m18), .res_p1_d1(d18));

  task automatic check(int unsigned p, int unsigned x, int unsigned gm, int unsigned gd);
    int unsigned em, ed;
    em = x % 7;
    ed = d1_word(x % 9, 3);
    checks++;
    if (em != gm || ed != gd) begin
      failures++;
      if (failures < 10) $display("FAIL p=%0d x=%0d mod7 %0d/%0d d1 %0d/%0d", p, x, em, gm, ed, gd);
    end
  endtask

  initial begin
    checks++;
    if (rns_pkg::csa_full_adders(rns_pkg::num_blocks(18, 6), 6) != 18 - 4 * 3) begin
      failures++;
      $display("FAIL: shared tree full-adder count is not p - 4n");
    end
    for (int i = 0; i < (1 << 18); i++) begin
      @(posedge clk);
      x16 = 16'(i); x17 = 17'(i); x18 = 18'(i);
      @(negedge clk);
      if (i < (1 << 16)) check(16, i & 32'hFFFF, 32'(m16), 32'(d16));
      if (i < (1 << 17)) check(17, i & 32'h1FFFF, 32'(m17), 32'(d17));
      check(18, i, 32'(m18), 32'(d18));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
