// tb_resgen_mod2n_p1_d1 -- test of the p-input residue generator mod 2^N+1
// with D1 output. The default instance (N = 3, P = 18, modulus 9) is run
// over all 2^18 inputs; further instances cover an empty CSA tree
// (N = 3, P = 12), a zero-padded top block (N = 4, P = 37), and wider
// moduli (N = 8, P = 64; N = 16, P = 200) with random inputs.
// Expected: x_star = D1 word of |x|_(2^N+1), and the shared outputs obey
// |dc + ds|_(2^(2N)-1) = |x|_(2^(2N)-1). One vector per clock; watchdog.
module tb_resgen_mod2n_p1_d1;
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

  logic [17:0]  xa;  logic [3:0]  za;  logic [5:0]  ca, sa;
  logic [11:0]  xb;  logic [3:0]  zb;  logic [5:0]  cb, sb;
  logic [36:0]  xc;  logic [4:0]  zc;  logic [7:0]  cc, sc;
  logic [63:0]  xd;  logic [8:0]  zd;  logic [15:0] cd, sd;
  logic [199:0] xe;  logic [16:0] ze;  logic [31:0] ce, se;

  resgen_mod2n_p1_d1                   u_a (.x(xa), .x_star(za), .dc(ca), .ds(sa));
  resgen_mod2n_p1_d1 #(.N(3),  .P(12))  u_b (.x(xb), .x_star(zb), .dc(cb), .ds(sb));
  resgen_mod2n_p1_d1 #(.N(4),  .P(37))  u_c (.x(xc), .x_star(zc), .dc(cc), .ds(sc));
  resgen_mod2n_p1_d1 #(.N(8),  .P(64))  u_d (.x(xd), .x_star(zd), .dc(cd), .ds(sd));
  resgen_mod2n_p1_d1 #(.N(16), .P(200)) u_e (.x(xe), .x_star(ze), .dc(ce), .ds(se));

  task automatic check(int unsigned n, wide_t x, int unsigned got,
                       longint unsigned c, longint unsigned s);
    int unsigned e;
    longint unsigned m2, e2, g2;
    e  = d1_word(mod_u(x, (32'd1 << n) + 1), n);
    m2 = (64'd1 << (2 * n)) - 1;
    e2 = 64'(x % wide_t'(m2));
    g2 = (c + s) % m2;
    checks++;
    if (e != got || e2 != g2) begin
      failures++;
      if (failures < 10) $display("FAIL n=%0d x=%0h exp=%0d got=%0d", n, x, e, got);
    end
  endtask

  initial begin
    for (int i = 0; i < (1 << 18); i++) begin
      @(posedge clk);
      xa = 18'(i);
      xb = 12'($urandom);
      xc = 37'(rand_bits(37));
      xd = 64'(rand_bits(64));
      xe = 200'(rand_bits(200));
      if (i % 13 == 0) xe = '1;
      @(negedge clk);
      check(3, 256'(xa), 32'(za), 64'(ca), 64'(sa));
      if (i < 20000) begin
        check(3, 256'(xb), 32'(zb), 64'(cb), 64'(sb));
        check(4, 256'(xc), 32'(zc), 64'(cc), 64'(sc));
        check(8, 256'(xd), 32'(zd), 64'(cd), 64'(sd));
        check(16, 256'(xe), 32'(ze), 64'(ce), 64'(se));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
