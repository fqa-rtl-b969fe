// fqa_compute_checker: one fqa_compute instance and its random self-check.
//
// Used by tb_fqa_compute to test several FWL configurations side by side.
// Drives N random inputs (x, a1 or a shift code, a2, b) into the computation
// unit and compares y with a reference written in plain integer arithmetic:
// each multiplier output is the exact product divided by 2^(dropped bits) and
// rounded toward minus infinity, each addition aligns both operands to the
// finer FWL. Reports its counts and raises done when finished.
module fqa_compute_checker
  import fqa_pkg::*;
#(
  parameter int unsigned ORDER    = 2,
  parameter int unsigned SHIFTERS = 3,
  parameter int unsigned WI       = 8,
  parameter int unsigned XIW      = 0,
  parameter int unsigned CIW      = 2,
  parameter int unsigned WA1      = 8,
  parameter int unsigned WO1      = 8,
  parameter int unsigned WA2      = 8,
  parameter int unsigned WO2      = 8,
  parameter int unsigned WB       = 8,
  parameter int unsigned N        = 5000
) (
  output int   checks,
  output int   failures,
  output int   neg_first_stage,
  output logic done
);
  localparam int unsigned X_W  = XIW + WI;
  localparam int unsigned A1W  = a1_bits(SHIFTERS, CIW, WA1);
  localparam int unsigned A2W  = CIW + WA2;
  localparam int unsigned BW   = CIW + WB;
  localparam int unsigned Y_F  = y_f(ORDER, WO1, WO2, WB);
  localparam int unsigned Y_W  = y_iw(ORDER, SHIFTERS, CIW, XIW) + Y_F;
  localparam int unsigned SH_W = sh_bits(WA1);
  localparam int unsigned TW   = SH_W + 2;

  logic        [X_W-1:0] x;
  logic        [A1W-1:0] a1;
  logic signed [A2W-1:0] a2;
  logic signed [BW-1:0]  b;
  logic signed [Y_W-1:0] y;

  fqa_compute #(
    .ORDER(ORDER), .SHIFTERS(SHIFTERS), .WI(WI), .XIW(XIW), .CIW(CIW),
    .WA1(WA1), .WO1(WO1), .WA2(WA2), .WO2(WO2), .WB(WB)
  ) dut (
    .x(x), .a1(a1), .a2(a2), .b(b), .y(y)
  );

  function automatic longint floor_div(longint n, longint d);
    if (n >= 0) return n / d;
    return -((-n + d - 1) / d);
  endfunction

  function automatic longint pow2(int e);
    return longint'(1) << e;
  endfunction

  initial begin
    checks = 0; failures = 0; neg_first_stage = 0; done = 1'b0;
    x = '0; a1 = '0; a2 = '0; b = '0;
    #2;
    for (int n = 0; n < int'(N); n++) begin
      longint a1v, p1, s1, pn, yv, xv;
      int wm2, pnf;
      // Random operands; a1 as a value in units of 2^-WA1.
      xv = longint'($urandom) & (pow2(X_W) - 1);
      x  = X_W'(xv);
      if (SHIFTERS == 0) begin
        a1  = A1W'({$urandom, $urandom});
        a1v = longint'($signed(a1));
      end else begin
        a1v = 0;
        for (int k = 0; k < int'(SHIFTERS); k++) begin
          logic en, neg;
          int   sh;
          en  = 1'($urandom);
          neg = 1'($urandom);
          sh  = int'($urandom % (WA1 + 1));
          a1[k*TW +: TW] = {en, neg, SH_W'(sh)};
          if (en) a1v += neg ? -pow2(WA1 - sh) : pow2(WA1 - sh);
        end
      end
      if (a1v < 0) neg_first_stage++;
      a2 = A2W'({$urandom, $urandom});
      b  = BW'({$urandom, $urandom});
      #1;
      // Reference.
      p1 = floor_div(a1v * xv, pow2(WA1 + WI - WO1));
      if (ORDER == 1) begin
        pn  = p1;
        pnf = WO1;
      end else begin
        wm2 = (WO1 > WA2) ? WO1 : WA2;
        s1  = p1 * pow2(wm2 - WO1) + longint'(a2) * pow2(wm2 - WA2);
        pn  = floor_div(s1 * xv, pow2(wm2 + WI - WO2));
        pnf = WO2;
      end
      yv = pn * pow2(Y_F - pnf) + longint'(b) * pow2(Y_F - WB);
      checks++;
      if (longint'(y) != yv) begin
        failures++;
        if (failures < 5)
          $display("%m: x=%0d a1v=%0d a2=%0d b=%0d y=%0d exp=%0d", xv, a1v, a2, b, y, yv);
      end
    end
    done = 1'b1;
  end
endmodule
