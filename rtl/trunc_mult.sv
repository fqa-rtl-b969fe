// trunc_mult: fixed-point multiplier with a truncated output FWL.
//
// One multiplier stage M_i of the FQA-On computation unit. It multiplies a
// signed operand h (H_W bits, H_F fractional) by the unsigned input x (X_W
// bits, X_F fractional) and keeps only O_F fractional bits of the exact
// product: the H_F + X_F - O_F lowest bits are dropped. Dropping the bits of a
// two's-complement number rounds toward minus infinity (floor), which is the
// truncation error the FQA coefficient search accounts for. Limiting the
// output FWL this way (O_F <= H_F + X_F) is the paper's rule; using floor for
// the dropped bits is this design's choice.
//
// Purely combinational. Output width P_W must hold the integer part of the
// product (the parent sizes it; see fqa_pkg).
module trunc_mult #(
  parameter int unsigned H_W = 10,  // width of h (signed)
  parameter int unsigned H_F = 8,   // FWL of h
  parameter int unsigned X_W = 8,   // width of x (unsigned)
  parameter int unsigned X_F = 8,   // FWL of x
  parameter int unsigned O_F = 8,   // FWL kept at the output
  parameter int unsigned P_W = 11   // width of the truncated product (signed)
) (
  input  logic signed [H_W-1:0] h,
  input  logic        [X_W-1:0] x,
  output logic signed [P_W-1:0] p
);
  localparam int unsigned FULL_W = H_W + X_W + 1;
  localparam int unsigned DROP   = H_F + X_F - O_F;

  if (O_F > H_F + X_F) begin : g_bad_fwl
    $error("trunc_mult: output FWL exceeds the full-precision FWL");
  end

  logic signed [FULL_W-1:0] full;

  assign full = FULL_W'(h) * $signed({1'b0, x});
  assign p    = P_W'(full >>> DROP);
endmodule
