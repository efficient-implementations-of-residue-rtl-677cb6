// tb_adder_mod2n_m1 -- exhaustive test of the end-around-carry adder mod
// 2^N-1 for N = 3 and N = 8 (every operand pair, including the all-ones
// codes), random pairs for N = 16. Expected: r = |x + y|_(2^N-1), always in
// [0, 2^N-2]. One vector per clock, with a cycle-count watchdog.
module tb_adder_mod2n_m1;
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

  logic [2:0]  xa, ya, ra;
  logic [7:0]  xb, yb, rb;
  logic [15:0] xc, yc, rc;

  adder_mod2n_m1 #(.N(3))  u_a (.x(xa), .y(ya), .r(ra));
  adder_mod2n_m1 #(.N(8))  u_b (.x(xb), .y(yb), .r(rb));
  adder_mod2n_m1 #(.N(16)) u_c (.x(xc), .y(yc), .r(rc));

  task automatic check(int unsigned n, int unsigned x, int unsigned y, int unsigned r);
    int unsigned expv;
    expv = (x + y) % ((32'd1 << n) - 1);
    checks++;
    if (r != expv) begin
      failures++;
      if (failures < 10) $display("FAIL n=%0d x=%0d y=%0d got=%0d exp=%0d", n, x, y, r, expv);
    end
  endtask

  initial begin
    for (int i = 0; i < 65536; i++) begin
      @(posedge clk);
      xa = 3'(i); ya = 3'(i >> 3);
      xb = 8'(i); yb = 8'(i >> 8);
      xc = 16'($urandom); yc = 16'($urandom);
      if (i % 5 == 0) yc = ~xc;
      if (i == 77) begin xc = '1; yc = '1; end
      @(negedge clk);
      if (i < 64) check(3, 32'(xa), 32'(ya), 32'(ra));
      check(8, 32'(xb), 32'(yb), 32'(rb));
      check(16, 32'(xc), 32'(yc), 32'(rc));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
