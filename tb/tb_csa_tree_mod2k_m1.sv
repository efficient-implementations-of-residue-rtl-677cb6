// tb_csa_tree_mod2k_m1 -- random test of the Q-operand CSA tree with
// end-around carry for several shapes: (W, Q) = (6, 3), (6, 7), (8, 4),
// (4, 13), (5, 2), (5, 1). Expected: |dc + ds|_(2^W-1) = |sum of ops|_(2^W-1).
// Every tenth vector uses all-ones operands to force end-around carries on
// every row. One vector per clock, with a cycle-count watchdog.
module tb_csa_tree_mod2k_m1;
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

  logic [2:0][5:0]  oa;  logic [5:0] ca, sa;
  logic [6:0][5:0]  ob;  logic [5:0] cb, sb;
  logic [3:0][7:0]  oc;  logic [7:0] cc, sc;
  logic [12:0][3:0] od;  logic [3:0] cd, sd;
  logic [1:0][4:0]  oe;  logic [4:0] ce, se;
  logic [0:0][4:0]  of;  logic [4:0] cf, sf;

  csa_tree_mod2k_m1 #(.W(6), .Q(3))  u_a (.ops(oa), .dc(ca), .ds(sa));
  csa_tree_mod2k_m1 #(.W(6), .Q(7))  u_b (.ops(ob), .dc(cb), .ds(sb));
  csa_tree_mod2k_m1 #(.W(8), .Q(4))  u_c (.ops(oc), .dc(cc), .ds(sc));
  csa_tree_mod2k_m1 #(.W(4), .Q(13)) u_d (.ops(od), .dc(cd), .ds(sd));
  csa_tree_mod2k_m1 #(.W(5), .Q(2))  u_e (.ops(oe), .dc(ce), .ds(se));
  csa_tree_mod2k_m1 #(.W(5), .Q(1))  u_f (.ops(of), .dc(cf), .ds(sf));

  task automatic check(string name, int unsigned w, longint unsigned sum,
                       longint unsigned c, longint unsigned s);
    longint unsigned m, e, g;
    m = (64'd1 << w) - 1;
    e = sum % m;
    g = (c + s) % m;
    checks++;
    if (e != g) begin
      failures++;
      if (failures < 10) $display("FAIL %s: sum mod=%0d got=%0d (c=%0d s=%0d)", name, e, g, c, s);
    end
  endtask

  function automatic longint unsigned sum_ops(logic [255:0] v, int unsigned w, int unsigned q);
    longint unsigned t = 0;
    for (int unsigned j = 0; j < q; j++) t += 64'((v >> (j * w)) & ((256'd1 << w) - 1));
    return t;
  endfunction

  initial begin
    for (int i = 0; i < 20000; i++) begin
      @(posedge clk);
      oa = 18'({$urandom, $urandom});
      ob = 42'({$urandom, $urandom});
      oc = 32'($urandom);
      od = 52'({$urandom, $urandom});
      oe = 10'($urandom);
      of = 5'($urandom);
      if (i % 10 == 0) begin
        oa = '1; ob = '1; oc = '1; od = '1; oe = '1; of = '1;
      end
      @(negedge clk);
      check("W6Q3", 6, sum_ops(256'(oa), 6, 3), 64'(ca), 64'(sa));
      check("W6Q7", 6, sum_ops(256'(ob), 6, 7), 64'(cb), 64'(sb));
      check("W8Q4", 8, sum_ops(256'(oc), 8, 4), 64'(cc), 64'(sc));
      check("W4Q13", 4, sum_ops(256'(od), 4, 13), 64'(cd), 64'(sd));
      check("W5Q2", 5, sum_ops(256'(oe), 5, 2), 64'(ce), 64'(se));
      check("W5Q1", 5, sum_ops(256'(of), 5, 1), 64'(cf), 64'(sf));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
