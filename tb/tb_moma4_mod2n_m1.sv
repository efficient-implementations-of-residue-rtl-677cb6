// tb_moma4_mod2n_m1 -- test of the 4-operand adder mod 2^N-1: exhaustive for
// N = 3, random for N = 8 (with all-ones operands mixed in). Expected:
// r = |dch + dcl + dsh + dsl|_(2^N-1), always in [0, 2^N-2].
// One vector per clock, with a cycle-count watchdog.
module tb_moma4_mod2n_m1;
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

  logic [2:0] a0, a1, a2, a3, ar;
  logic [7:0] b0, b1, b2, b3, br;

  moma4_mod2n_m1 #(.N(3)) u_a (.dcl(a0), .dch(a1), .dsl(a2), .dsh(a3), .r(ar));
  moma4_mod2n_m1 #(.N(8)) u_b (.dcl(b0), .dch(b1), .dsl(b2), .dsh(b3), .r(br));

  task automatic check(int unsigned n, int unsigned s, int unsigned got);
    int unsigned e;
    e = s % ((32'd1 << n) - 1);
    checks++;
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
      if (i % 9 == 0) b1 = '1;
      if (i % 11 == 0) b2 = '1;
      @(negedge clk);
      if (i < 4096) check(3, 32'(a0) + 32'(a1) + 32'(a2) + 32'(a3), 32'(ar));
      check(8, 32'(b0) + 32'(b1) + 32'(b2) + 32'(b3), 32'(br));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
