// tb_d1_adder_mod2n_p1 -- exhaustive test of the D1 output adder mod 2^N+1
// for N = 3 and N = 8 (all operand pairs), and random pairs for N = 13.
// Expected: {z, m} = |x + y + 1|_(2^N+1) and cout = (x + y >= 2^N).
// One vector per clock; a watchdog ends the run after a fixed cycle count.
module tb_d1_adder_mod2n_p1;
  import tb_rns_ref_pkg::*;

  int unsigned checks = 0, failures = 0;
  int unsigned n_zero = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog: simulation did not finish");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [2:0]  xa, ya, ma;  logic za, ca;
  logic [7:0]  xb, yb, mb;  logic zb, cb;
  logic [12:0] xc, yc, mc;  logic zc, cc;

  d1_adder_mod2n_p1 #(.N(3))  u_a (.x(xa), .y(ya), .z(za), .m(ma), .cout(ca));
  d1_adder_mod2n_p1 #(.N(8))  u_b (.x(xb), .y(yb), .z(zb), .m(mb), .cout(cb));
  d1_adder_mod2n_p1 #(.N(13)) u_c (.x(xc), .y(yc), .z(zc), .m(mc), .cout(cc));

  task automatic check(int unsigned n, int unsigned x, int unsigned y,
                       logic z, int unsigned m, logic c);
    int unsigned expv, got;
    expv = (x + y + 1) % ((32'd1 << n) + 1);
    got  = (int'(z) << n) | m;
    checks++;
    if (got != expv || c != ((x + y) >= (32'd1 << n))) begin
      failures++;
      if (failures < 10)
        $display("FAIL n=%0d x=%0d y=%0d got=%0d exp=%0d cout=%0b", n, x, y, got, expv, c);
    end
    if (z) n_zero++;
  endtask

  initial begin
    for (int i = 0; i < 65536; i++) begin
      @(posedge clk);
      xa = 3'(i); ya = 3'(i >> 3);
      xb = 8'(i); yb = 8'(i >> 8);
      xc = 13'($urandom); yc = 13'($urandom);
      if (i % 7 == 0) yc = ~xc;  // x + y = 2^N - 1: zero result
      @(negedge clk);
      if (i < 64) check(3, 32'(xa), 32'(ya), za, 32'(ma), ca);
      check(8, 32'(xb), 32'(yb), zb, 32'(mb), cb);
      check(13, 32'(xc), 32'(yc), zc, 32'(mc), cc);
    end
    if (n_zero == 0) begin
      failures++;
      $display("FAIL: zero result never produced");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
