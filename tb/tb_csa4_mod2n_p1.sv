// tb_csa4_mod2n_p1 -- test of the two-row inverted-EAC CSA mod 2^N+1:
// exhaustive over all 4096 operand sets for N = 3, random for N = 7.
// Expected: |d3 + d4 + 2|_(2^N+1) = |dcl - dch + dsl - dsh|_(2^N+1).
// One vector per clock, with a cycle-count watchdog.
module tb_csa4_mod2n_p1;
  int unsigned checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("watchdog: simulation did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [2:0] a0, a1, a2, a3, a4, a5;
  logic [6:0] b0, b1, b2, b3, b4, b5;

  csa4_mod2n_p1 #(.N(3)) u_a (.dcl(a0), .dch(a1), .dsl(a2), .dsh(a3), .d3(a4), .d4(a5));
  csa4_mod2n_p1 #(.N(7)) u_b (.dcl(b0), .dch(b1), .dsl(b2), .dsh(b3), .d3(b4), .d4(b5));

  task automatic check(int unsigned n, int unsigned cl, int unsigned ch, int unsigned sl,
                       int unsigned sh, int unsigned d3, int unsigned d4);
    int unsigned m, e, g;
    m = (32'd1 << n) + 1;
    e = (cl + sl + 2 * m - ch - sh) % m;
    g = (d3 + d4 + 2) % m;
    checks++;
    if (e != g) begin
      failures++;
      if (failures < 10) $display("FAIL n=%0d exp=%0d got=%0d", n, e, g);
    end
  endtask

  initial begin
    for (int i = 0; i < 20000; i++) begin
      @(posedge clk);
      {a3, a2, a1, a0} = 12'(i);
      {b3, b2, b1, b0} = 28'($urandom);
      @(negedge clk);
      if (i < 4096) check(3, 32'(a0), 32'(a1), 32'(a2), 32'(a3), 32'(a4), 32'(a5));
      check(7, 32'(b0), 32'(b1), 32'(b2), 32'(b3), 32'(b4), 32'(b5));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
