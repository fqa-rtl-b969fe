// shift_add_mult: multiplierless first stage of the FQA-Sm-On scheme.
//
// Replaces the first-stage multiplier a1*x by M shifters and M-1 adders. The
// coefficient a1 is stored not as a binary number but as M shift terms; each
// term is {en, neg, sh} and contributes +/- x * 2^-sh when en is set. A
// coefficient whose binary magnitude has Hamming weight <= M is therefore
// representable whatever its word length, which is the FQA-Sm-On rule (the
// word length of a1 is not bound to M, only its Hamming weight). The terms are
// summed at full precision (FWL X_F + A_F) and the sum is then truncated
// (floor) to O_F fractional bits, so the result is bit-identical to
// trunc_mult fed with the same a1 value.
//
// Paper: M shifters and M-1 adders replacing M1; the Hamming-weight rule.
// This design's choices: the per-term sign bit (which also admits signed-digit
// codes), shift amounts 0..A_F (so |a1| < 2 per term), the code packing
// (term k in code[k*TW +: TW] as {en, neg, sh}), and floor truncation.
//
// Purely combinational.
module shift_add_mult #(
  parameter int unsigned M   = 3,   // number of shifters
  parameter int unsigned A_F = 8,   // FWL of a1: largest shift amount
  parameter int unsigned X_W = 8,   // width of x (unsigned)
  parameter int unsigned X_F = 8,   // FWL of x
  parameter int unsigned O_F = 8,   // FWL kept at the output
  parameter int unsigned P_W = 12,  // output width (signed)
  localparam int unsigned SH_W = fqa_pkg::sh_bits(A_F),
  localparam int unsigned TW   = SH_W + 2
) (
  input  logic [M*TW-1:0]       code,
  input  logic [X_W-1:0]        x,
  output logic signed [P_W-1:0] p
);
  localparam int unsigned SUM_W = X_W + A_F + fqa_pkg::sh_bits(M) + 2;
  localparam int unsigned DROP  = X_F + A_F - O_F;

  if (O_F > X_F + A_F) begin : g_bad_fwl
    $error("shift_add_mult: output FWL exceeds the full-precision FWL");
  end

  logic signed [SUM_W-1:0] term [M];
  logic signed [SUM_W-1:0] acc  [M];

  // Shifters: x aligned to FWL X_F + A_F, moved right by sh.
  for (genvar k = 0; k < M; k++) begin : g_shifter
    logic            en, neg;
    logic [SH_W-1:0] sh;
    logic signed [SUM_W-1:0] mag;
    always_comb begin
      {en, neg, sh} = code[k*TW +: TW];
      mag = $signed({{(SUM_W-X_W){1'b0}}, x}) <<< A_F;
      mag = mag >>> sh;   // exact: the A_F guard bits absorb the shift
      if (!en)      term[k] = '0;
      else if (neg) term[k] = -mag;
      else          term[k] = mag;
    end
  end

  // M-1 adders in a chain.
  assign acc[0] = term[0];
  for (genvar k = 1; k < M; k++) begin : g_adder
    assign acc[k] = acc[k-1] + term[k];
  end

  // Truncate the exact sum to O_F fractional bits.
  assign p = P_W'(acc[M-1] >>> DROP);
endmodule
