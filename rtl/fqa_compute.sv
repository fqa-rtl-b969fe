// fqa_compute: polynomial computation unit of the FQA-On / FQA-Sm-On schemes.
//
// Evaluates h(x) = (a1*x + a2)*x + b (ORDER = 2) or h(x) = a1*x + b
// (ORDER = 1) in Horner form with every fractional word length (FWL) set on
// its own:
//   stage 1   P1 = a1*x truncated to WO1 fractional bits. With SHIFTERS = 0
//             this is a full multiplier (FQA-On); with SHIFTERS = m > 0 it is
//             an m-shifter, (m-1)-adder network fed by a shift code
//             (FQA-Sm-On).
//   order 2   S1 = P1 + a2 at FWL WM2 = max(WO1, WA2) in a concatenation
//             adder, then P2 = S1*x truncated to WO2 fractional bits.
//   last      y = Pn + b at FWL max(WOn, WB) in a concatenation adder.
// Input x is unsigned with XIW integer and WI fractional bits; a2 and b are
// signed with CIW integer bits (sign included) and WA2 / WB fractional bits;
// a1 is signed with CIW integer and WA1 fractional bits, or a shift code.
// The result y is signed; its widths come from fqa_pkg (y_iw, y_f). No
// fractional bit is lost except at the multiplier outputs, and no stage can
// overflow.
//
// The stage structure, the decoupled FWLs and the concatenation adders follow
// the paper (its Fig. 2 and Fig. 6). Limiting ORDER to 1 or 2, the integer
// widths and floor truncation are this design's choices.
//
// Purely combinational.
module fqa_compute
  import fqa_pkg::*;
#(
  parameter int unsigned ORDER    = 2,  // polynomial order n (1 or 2)
  parameter int unsigned SHIFTERS = 3,  // m; 0 = full first-stage multiplier
  parameter int unsigned WI       = 8,  // FWL of x
  parameter int unsigned XIW      = 0,  // integer bits of x (unsigned)
  parameter int unsigned CIW      = 2,  // integer bits of a1/a2/b, sign included
  parameter int unsigned WA1      = 8,
  parameter int unsigned WO1      = 8,
  parameter int unsigned WA2      = 8,
  parameter int unsigned WO2      = 8,
  parameter int unsigned WB       = 8,
  localparam int unsigned X_W  = XIW + WI,
  localparam int unsigned A1W  = a1_bits(SHIFTERS, CIW, WA1),
  localparam int unsigned A2W  = CIW + WA2,
  localparam int unsigned BW   = CIW + WB,
  localparam int unsigned Y_F  = y_f(ORDER, WO1, WO2, WB),
  localparam int unsigned Y_W  = y_iw(ORDER, SHIFTERS, CIW, XIW) + Y_F
) (
  input  logic        [X_W-1:0] x,
  input  logic        [A1W-1:0] a1,
  input  logic signed [A2W-1:0] a2,
  input  logic signed [BW-1:0]  b,
  output logic signed [Y_W-1:0] y
);
  if (ORDER < 1 || ORDER > 2) begin : g_bad_order
    $error("fqa_compute: ORDER must be 1 or 2");
  end

  // ---- stage 1: a1 * x -> FWL WO1 ----
  localparam int unsigned P1_W = p1_iw(SHIFTERS, CIW, XIW) + WO1;
  logic signed [P1_W-1:0] p1;

  if (SHIFTERS == 0) begin : g_m1_mult
    trunc_mult #(
      .H_W(A1W), .H_F(WA1), .X_W(X_W), .X_F(WI), .O_F(WO1), .P_W(P1_W)
    ) u_m1 (
      .h(a1), .x(x), .p(p1)
    );
  end else begin : g_m1_shift
    shift_add_mult #(
      .M(SHIFTERS), .A_F(WA1), .X_W(X_W), .X_F(WI), .O_F(WO1), .P_W(P1_W)
    ) u_m1 (
      .code(a1), .x(x), .p(p1)
    );
  end

  // ---- optional stage 2: (p1 + a2) * x -> FWL WO2 ----
  localparam int unsigned PN_F = (ORDER == 1) ? WO1 : WO2;
  localparam int unsigned PN_W = pn_iw(ORDER, SHIFTERS, CIW, XIW) + PN_F;
  logic signed [PN_W-1:0] pn;

  if (ORDER == 1) begin : g_order1
    assign pn = p1;
  end else begin : g_order2
    localparam int unsigned WM2  = imax(WO1, WA2);
    localparam int unsigned S1_W = s1_iw(SHIFTERS, CIW, XIW) + WM2;
    logic signed [S1_W-1:0] s1;

    concat_adder #(
      .P_W(P1_W), .P_F(WO1), .C_W(A2W), .C_F(WA2), .S_W(S1_W)
    ) u_a1 (
      .p(p1), .c(a2), .s(s1)
    );

    trunc_mult #(
      .H_W(S1_W), .H_F(WM2), .X_W(X_W), .X_F(WI), .O_F(WO2), .P_W(PN_W)
    ) u_m2 (
      .h(s1), .x(x), .p(pn)
    );
  end

  // ---- last stage: pn + b ----
  concat_adder #(
    .P_W(PN_W), .P_F(PN_F), .C_W(BW), .C_F(WB), .S_W(Y_W)
  ) u_an (
    .p(pn), .c(b), .s(y)
  );
endmodule
