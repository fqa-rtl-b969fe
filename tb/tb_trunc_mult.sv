// tb_trunc_mult: self-checking testbench of trunc_mult.
//
// Instance A uses the 8-bit FWLs (h: 2.8, x: 0.8, output FWL 8) and is checked
// exhaustively over every h and x. Instance B uses the 16-bit-output
// configuration of the second multiplier (h: 3.16, x: 0.8, output FWL 16) and
// is checked on random operands. The expected product is the exact product
// divided by 2^dropped and rounded toward minus infinity, computed with
// integer division, not with shifts.
module tb_trunc_mult;
  // Instance A: 8-bit case.
  logic signed [9:0]  ha;
  logic        [7:0]  xa;
  logic signed [10:0] pa;
  trunc_mult #(.H_W(10), .H_F(8), .X_W(8), .X_F(8), .O_F(8), .P_W(11))
    u_a (.h(ha), .x(xa), .p(pa));

  // Instance B: 19-bit multiplicand, 16 fractional bits kept.
  logic signed [18:0] hb;
  logic        [7:0]  xb;
  logic signed [27:0] pb;
  trunc_mult #(.H_W(19), .H_F(16), .X_W(8), .X_F(8), .O_F(16), .P_W(28))
    u_b (.h(hb), .x(xb), .p(pb));

  int checks = 0, failures = 0;

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
    longint expv;
    for (int h = -512; h < 512; h++) begin
      for (int x = 0; x < 256; x++) begin
        ha = 10'(h); xa = 8'(x);
        #1;
        expv = floor_div(longint'(h) * x, 256);
        checks++;
        if (longint'(pa) != expv) begin
          failures++;
          if (failures < 10) $display("A: h=%0d x=%0d p=%0d exp=%0d", h, x, pa, expv);
        end
      end
    end
    for (int n = 0; n < 20000; n++) begin
      longint hv;
      hv = longint'($signed(19'($urandom)));
      hb = 19'(hv); xb = 8'($urandom);
      #1;
      expv = floor_div(hv * longint'(xb), 256);
      checks++;
      if (longint'(pb) != expv) begin
        failures++;
        if (failures < 10) $display("B: h=%0d x=%0d p=%0d exp=%0d", hv, xb, pb, expv);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
