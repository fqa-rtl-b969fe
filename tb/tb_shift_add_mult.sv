// tb_shift_add_mult: self-checking testbench of shift_add_mult.
//
// Default configuration: 3 shifters, a1 FWL 8, x 0.8, output FWL 8. Random
// shift codes (terms enabled, negated and shifted at random, shift amounts
// 0..8) and random x are applied; the expected result is the coefficient
// value sum(+/- 2^(8-sh)) (in units of 2^-8) times x, divided by 2^8 and
// rounded toward minus infinity. A second instance with 5 shifters and a
// 16-bit output FWL (x 0.8, a1 FWL 9) checks the full-precision path, where no
// bit is dropped.
module tb_shift_add_mult;
  logic [17:0]        code_a;
  logic [7:0]         xa;
  logic signed [11:0] pa;
  shift_add_mult #(.M(3), .A_F(8), .X_W(8), .X_F(8), .O_F(8), .P_W(12))
    u_a (.code(code_a), .x(xa), .p(pa));

  logic [29:0]        code_b;
  logic [7:0]         xb;
  logic signed [21:0] pb;
  shift_add_mult #(.M(5), .A_F(9), .X_W(8), .X_F(8), .O_F(16), .P_W(22))
    u_b (.code(code_b), .x(xb), .p(pb));

  int checks = 0, failures = 0;
  int neg_terms = 0;

  function automatic longint floor_div(longint n, longint d);
    if (n >= 0) return n / d;
    return -((-n + d - 1) / d);
  endfunction

  initial begin
    #1_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 20000; n++) begin
      longint av, bv, expv;
      av = 0; bv = 0;
      for (int k = 0; k < 3; k++) begin
        logic en, neg; int sh;
        en = 1'($urandom); neg = 1'($urandom); sh = int'($urandom % 9);
        code_a[k*6 +: 6] = {en, neg, 4'(sh)};
        if (en) begin
          av += neg ? -(longint'(1) << (8 - sh)) : (longint'(1) << (8 - sh));
          if (neg) neg_terms++;
        end
      end
      for (int k = 0; k < 5; k++) begin
        logic en, neg; int sh;
        en = 1'($urandom); neg = 1'($urandom); sh = int'($urandom % 10);
        code_b[k*6 +: 6] = {en, neg, 4'(sh)};
        if (en) bv += neg ? -(longint'(1) << (9 - sh)) : (longint'(1) << (9 - sh));
      end
      xa = 8'($urandom); xb = 8'($urandom);
      #1;
      expv = floor_div(av * longint'(xa), 256);
      checks++;
      if (longint'(pa) != expv) begin
        failures++;
        if (failures < 10) $display("A: code=%h x=%0d p=%0d exp=%0d", code_a, xa, pa, expv);
      end
      // 9 + 8 fractional bits in, 16 kept: one bit dropped.
      expv = floor_div(bv * longint'(xb), 2);
      checks++;
      if (longint'(pb) != expv) begin
        failures++;
        if (failures < 10) $display("B: code=%h x=%0d p=%0d exp=%0d", code_b, xb, pb, expv);
      end
    end
    if (neg_terms == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
