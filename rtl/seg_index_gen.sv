// seg_index_gen: segment index generator of the PPA unit.
//
// Finds which segment the input x falls in. SEGS-1 comparators test x against
// the start points bp[1] .. bp[SEGS-1] of segments 1 .. SEGS-1 (segment 0
// always starts at the bottom of the input range); with the start points in
// ascending order the number of comparators that fire is the segment index.
// This is the s-1 comparator index generator of the paper.
//
// The start points are registers loaded through the configuration port
// (cfg.sel == CFG_BREAK, cfg.addr = segment 1..SEGS-1), so one piece of
// silicon can serve any segmentation of up to SEGS segments; this, the reset
// values (a uniform split of the input range) and the ascending-order
// requirement are this design's choices. A write to address 0 is ignored.
//
// Timing: the index is combinational in x; a start point written at a clock
// edge is used from that edge on.
module seg_index_gen
  import fqa_pkg::*;
#(
  parameter int unsigned SEGS  = 10,  // number of segments (s)
  parameter int unsigned X_W   = 8,   // width of x (unsigned)
  localparam int unsigned IDX_W = (SEGS < 2) ? 1 : $clog2(SEGS)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  cfg_req_t         cfg,
  input  logic [X_W-1:0]   x,
  output logic [IDX_W-1:0] idx
);
  logic [X_W-1:0] bp [SEGS];   // bp[0] is unused (segment 0 starts at 0)

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < SEGS; k++)
        bp[k] <= X_W'((longint'(k) << X_W) / SEGS);
    end else if (cfg.we && cfg.sel == CFG_BREAK && cfg.addr != '0 &&
                 32'(cfg.addr) < SEGS) begin
      bp[cfg.addr[IDX_W-1:0]] <= cfg.data[X_W-1:0];
    end
  end

  // s-1 comparators and a population count of their outputs.
  always_comb begin
    idx = '0;
    for (int k = 1; k < SEGS; k++)
      if (x >= bp[k]) idx = idx + IDX_W'(1);
  end
endmodule
