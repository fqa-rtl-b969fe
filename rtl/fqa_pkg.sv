// fqa_pkg: shared constants, types and width functions of the FQA piecewise
// polynomial approximation (PPA) datapath.
//
// All arithmetic in the datapath is two's-complement fixed point. A value is
// described by its integer width IW (bits left of the binary point, sign bit
// included) and its fractional word length F (FWL). Every stage keeps enough
// integer bits that nothing overflows; only fractional bits are ever dropped,
// and only where the design says so (multiplier output truncation).
//
// The width functions below are the single place where the integer widths of
// the stages are derived, so that the computation unit and the top level agree
// on the width of the result port.
package fqa_pkg;

  // Width of the configuration data word (covers every coefficient field).
  localparam int unsigned CFG_DW = 32;

  // Width of the configuration address (segment number); up to 256 segments.
  localparam int unsigned CFG_AW = 8;

  // Which table a configuration write goes to.
  typedef enum logic [2:0] {
    CFG_BREAK = 3'd0,   // segment start point (index generator comparator)
    CFG_A1    = 3'd1,   // first-stage coefficient (multiplier or shift code)
    CFG_A2    = 3'd2,   // second-stage addition coefficient (order 2 only)
    CFG_B     = 3'd3,   // final addition coefficient b
    CFG_MAP   = 3'd4    // coefficient entry used by a segment (shared entries)
  } cfg_sel_e;

  // One configuration write: table, segment number and data (low bits used).
  typedef struct packed {
    logic              we;
    cfg_sel_e          sel;
    logic [CFG_AW-1:0] addr;
    logic [CFG_DW-1:0] data;
  } cfg_req_t;

  function automatic int imax(input int a, input int b);
    return (a > b) ? a : b;
  endfunction

  function automatic int imin(input int a, input int b);
    return (a < b) ? a : b;
  endfunction

  // Bits needed for a shift amount 0..max_sh.
  function automatic int sh_bits(input int max_sh);
    return (max_sh < 2) ? 1 : $clog2(max_sh + 1);
  endfunction

  // Width of the stored first-stage coefficient field: a plain signed
  // coefficient (ciw integer bits, wa1 fractional bits) for a full
  // multiplier, or m shift terms of {enable, negate, shift amount}.
  function automatic int a1_bits(input int shifters, input int ciw, input int wa1);
    return (shifters == 0) ? (ciw + wa1) : shifters * (2 + sh_bits(wa1));
  endfunction

  // Integer width of the first-stage product a1*x.
  function automatic int p1_iw(input int shifters, input int ciw, input int xiw);
    return (shifters == 0) ? (ciw + xiw + 1)
                           : (xiw + 2 + sh_bits(shifters));
  endfunction

  // Integer width of the stage-1 sum a1*x + a2 (order 2).
  function automatic int s1_iw(input int shifters, input int ciw, input int xiw);
    return imax(p1_iw(shifters, ciw, xiw), ciw) + 1;
  endfunction

  // Integer width of the last product (the one that meets b).
  function automatic int pn_iw(input int order, input int shifters, input int ciw,
                               input int xiw);
    return (order == 1) ? p1_iw(shifters, ciw, xiw)
                        : (s1_iw(shifters, ciw, xiw) + xiw + 1);
  endfunction

  // Integer width of the result y = (...)x + b.
  function automatic int y_iw(input int order, input int shifters, input int ciw,
                              input int xiw);
    return imax(pn_iw(order, shifters, ciw, xiw), ciw) + 1;
  endfunction

  // Fractional word length of the result: the concatenation adder keeps the
  // finer of the two operands' FWLs.
  function automatic int y_f(input int order, input int wo1, input int wo2, input int wb);
    return imax((order == 1) ? wo1 : wo2, wb);
  endfunction

endpackage
