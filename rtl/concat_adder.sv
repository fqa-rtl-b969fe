// concat_adder: concatenation-based adder of two operands with different FWLs.
//
// Adds a product p (P_W bits, P_F fractional) and a coefficient c (C_W bits,
// C_F fractional). The adder itself is only as wide as the coarser of the two
// FWLs, min(P_F, C_F). The operand with the finer FWL has |P_F - C_F| extra
// low bits; these bypass the adder and are appended below its sum. Since the
// other operand is zero in those bit positions, no carry can come out of them,
// so the result is exactly p + c at FWL max(P_F, C_F). Both arrangements are
// covered: the coefficient finer than the product, or the product finer than
// the coefficient. This follows the paper's concatenation structure; the
// operand and result widths are this design's.
//
// Purely combinational. S_W must exceed the wider integer part by one bit.
module concat_adder #(
  parameter int unsigned P_W = 11,
  parameter int unsigned P_F = 8,
  parameter int unsigned C_W = 10,
  parameter int unsigned C_F = 8,
  parameter int unsigned S_W = 12   // result width; result FWL = max(P_F, C_F)
) (
  input  logic signed [P_W-1:0] p,
  input  logic signed [C_W-1:0] c,
  output logic signed [S_W-1:0] s
);
  localparam int unsigned LO  = (P_F > C_F) ? (P_F - C_F) : (C_F - P_F);
  // High (adder) parts: integer bits plus min(P_F, C_F) fractional bits.
  localparam int unsigned PH_W = (P_F > C_F) ? (P_W - LO) : P_W;
  localparam int unsigned CH_W = (C_F > P_F) ? (C_W - LO) : C_W;
  localparam int unsigned AS_W = S_W - LO;                 // adder width

  logic signed [PH_W-1:0] p_hi;
  logic signed [CH_W-1:0] c_hi;
  logic signed [AS_W-1:0] sum_hi;

  if (LO == 0) begin : g_equal
    always_comb begin
      p_hi   = p;
      c_hi   = c;
      sum_hi = AS_W'(p_hi) + AS_W'(c_hi);
      s      = sum_hi;
    end
  end else if (P_F > C_F) begin : g_prod_finer
    // Fig. 3(a) arrangement (coefficient coarser): the product keeps LO bits
    // the adder never sees.
    logic [LO-1:0] lo_bits;
    always_comb begin
      p_hi    = p[P_W-1:LO];
      lo_bits = p[LO-1:0];
      c_hi    = c;
      sum_hi  = AS_W'(p_hi) + AS_W'(c_hi);
      s       = {sum_hi, lo_bits};
    end
  end else begin : g_coef_finer
    // Fig. 3(b) arrangement (product coarser): the coefficient keeps LO bits
    // below the product.
    logic [LO-1:0] lo_bits;
    always_comb begin
      p_hi    = p;
      c_hi    = c[C_W-1:LO];
      lo_bits = c[LO-1:0];
      sum_hi  = AS_W'(p_hi) + AS_W'(c_hi);
      s       = {sum_hi, lo_bits};
    end
  end
endmodule
