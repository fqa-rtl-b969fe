// fqa_ppa: piecewise polynomial approximation unit for activation functions.
//
// Top level of the FQA hardware: an index generator, a parameter memory and a
// polynomial computation unit. Each input x selects a segment through SEGS-1
// comparators, the segment's coefficients are read from the parameter memory
// and the computation unit evaluates the segment's polynomial with the
// decoupled fractional word lengths of the FQA schemes. Start points and
// coefficients are loaded through the configuration port, so the unit can be
// programmed with any function whose FQA segmentation fits in SEGS segments.
//
// Defaults are the FQA-S3-O2 configuration of the 8-bit results: second
// order, first-stage multiplier replaced by 3 shifters and 2 adders, all FWLs
// 8, 10 segments. Setting SHIFTERS = 0 gives FQA-On (a full first
// multiplier); ORDER = 1 gives the first-order schemes. ENTRIES < SEGS lets
// segments share stored coefficient sets (see coef_memory); by default every
// segment has its own entry.
//
// Interface
//   in_valid, x_in       input sample, unsigned, XIW integer and WI fractional
//                        bits; one sample may be presented every cycle
//   out_valid, y_out     result, signed, Y_W bits with Y_F fractional bits
//   seg_out              segment index used for the result
//   cfg                  configuration write (fqa_pkg::cfg_req_t): start point
//                        of segment cfg.addr (CFG_BREAK), a1, a2 or b of entry
//                        cfg.addr, or the entry used by segment cfg.addr
//                        (CFG_MAP, only when ENTRIES < SEGS)
// Timing: x_in is registered at the clock edge where in_valid is high; the
// result of the combinational datapath is registered at the next edge, so
// out_valid and y_out follow in_valid by two clock edges (latency 2, one
// result per cycle). The paper gives the datapath as a combinational circuit
// and no pipeline; the input and output registers, the valid flags and the
// active-low asynchronous reset are this design's choices. A configuration
// write changes results computed from the next cycle on.
module fqa_ppa
  import fqa_pkg::*;
#(
  parameter int unsigned SEGS     = 10,
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
  parameter int unsigned ENTRIES  = SEGS,  // stored coefficient sets (<= SEGS)
  localparam int unsigned X_W   = XIW + WI,
  localparam int unsigned IDX_W = (SEGS < 2) ? 1 : $clog2(SEGS),
  localparam int unsigned Y_F   = y_f(ORDER, WO1, WO2, WB),
  localparam int unsigned Y_W   = y_iw(ORDER, SHIFTERS, CIW, XIW) + Y_F
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  cfg_req_t             cfg,
  input  logic                 in_valid,
  input  logic [X_W-1:0]       x_in,
  output logic                 out_valid,
  output logic signed [Y_W-1:0] y_out,
  output logic [IDX_W-1:0]     seg_out
);
  localparam int unsigned A1W = a1_bits(SHIFTERS, CIW, WA1);
  localparam int unsigned A2W = CIW + WA2;
  localparam int unsigned BW  = CIW + WB;

  if (SEGS > (1 << CFG_AW)) begin : g_bad_segs
    $error("fqa_ppa: SEGS exceeds the configuration address range");
  end

  // Input register.
  logic           x_vld;
  logic [X_W-1:0] x_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x_vld <= 1'b0;
      x_q   <= '0;
    end else begin
      x_vld <= in_valid;
      if (in_valid) x_q <= x_in;
    end
  end

  // Index generator -> parameter memory -> computation unit.
  logic [IDX_W-1:0]     idx;
  logic [A1W-1:0]       a1;
  logic [A2W-1:0]       a2;
  logic [BW-1:0]        b;
  logic signed [Y_W-1:0] y;

  seg_index_gen #(
    .SEGS(SEGS), .X_W(X_W)
  ) u_index (
    .clk(clk), .rst_n(rst_n), .cfg(cfg), .x(x_q), .idx(idx)
  );

  coef_memory #(
    .SEGS(SEGS), .ENTRIES(ENTRIES), .A1W(A1W), .A2W(A2W), .BW(BW)
  ) u_coef (
    .clk(clk), .rst_n(rst_n), .cfg(cfg), .idx(idx), .a1(a1), .a2(a2), .b(b)
  );

  fqa_compute #(
    .ORDER(ORDER), .SHIFTERS(SHIFTERS), .WI(WI), .XIW(XIW), .CIW(CIW),
    .WA1(WA1), .WO1(WO1), .WA2(WA2), .WO2(WO2), .WB(WB)
  ) u_compute (
    .x(x_q), .a1(a1), .a2($signed(a2)), .b($signed(b)), .y(y)
  );

  // Output register.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      y_out     <= '0;
      seg_out   <= '0;
    end else begin
      out_valid <= x_vld;
      if (x_vld) begin
        y_out   <= y;
        seg_out <= idx;
      end
    end
  end
endmodule
