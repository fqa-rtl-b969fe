// tb_concat_adder: self-checking testbench of concat_adder.
//
// Three instances cover the three FWL relations: equal FWLs (8/8), a product
// finer than the coefficient (16/14, the arrangement where the product's
// surplus bits bypass the adder), and a coefficient finer than the product
// (8/16, where the coefficient's surplus bits bypass the adder). Each is fed
// random operands; the expected sum is both operands aligned to the finer FWL
// and added as ordinary integers.
module tb_concat_adder;
  // Equal FWLs.
  logic signed [10:0] p0;
  logic signed [9:0]  c0;
  logic signed [11:0] s0;
  concat_adder #(.P_W(11), .P_F(8), .C_W(10), .C_F(8), .S_W(12))
    u_eq (.p(p0), .c(c0), .s(s0));

  // Product finer: P 4.16, C 2.14 -> S 5.16.
  logic signed [19:0] p1;
  logic signed [15:0] c1;
  logic signed [20:0] s1;
  concat_adder #(.P_W(20), .P_F(16), .C_W(16), .C_F(14), .S_W(21))
    u_pf (.p(p1), .c(c1), .s(s1));

  // Coefficient finer: P 3.8, C 2.16 -> S 4.16.
  logic signed [10:0] p2;
  logic signed [17:0] c2;
  logic signed [19:0] s2;
  concat_adder #(.P_W(11), .P_F(8), .C_W(18), .C_F(16), .S_W(20))
    u_cf (.p(p2), .c(c2), .s(s2));

  int checks = 0, failures = 0;

  initial begin
    #1_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string tag, longint got, longint expv);
    checks++;
    if (got != expv) begin
      failures++;
      if (failures < 10) $display("%s: got %0d expected %0d", tag, got, expv);
    end
  endtask

  initial begin
    for (int n = 0; n < 20000; n++) begin
      p0 = 11'($urandom); c0 = 10'($urandom);
      p1 = 20'($urandom); c1 = 16'($urandom);
      p2 = 11'($urandom); c2 = 18'($urandom);
      #1;
      check("equal", longint'(s0), longint'(p0) + longint'(c0));
      check("prod_finer", longint'(s1), longint'(p1) + longint'(c1) * 4);
      check("coef_finer", longint'(s2), longint'(p2) * 256 + longint'(c2));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
