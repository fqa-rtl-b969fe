// coef_memory: parameter memory holding the polynomial coefficients.
//
// Each entry holds the first-stage coefficient a1 (a signed number, or the
// shift code of the FQA-Sm-On scheme), the second-stage addition coefficient
// a2 (order-2 units) and the final addition coefficient b. The segment index
// from the index generator selects the entry that feeds the computation unit.
//
// Shared entries: the FQA search finds, for each segment, a whole range of
// coefficient sets that meet the error bound, and segments whose ranges
// overlap can use one stored set. With ENTRIES < SEGS the memory holds only
// ENTRIES coefficient sets plus a segment-to-entry map of SEGS small
// registers (written with CFG_MAP, cfg.addr = segment, cfg.data = entry), so
// a table whose SEGS segments need only ENTRIES distinct sets fits in less
// storage. With ENTRIES = SEGS (the default) there is no map and segment k
// reads entry k.
//
// Entries are registers written through the configuration port (cfg.sel
// picks a1, a2 or b; cfg.addr is the entry), so the coefficients of any
// activation function found offline can be loaded after fabrication, as in
// the hardware-constrained PPA flow. The paper asks for a coefficient table
// indexed by segment and for coefficients shared between segments to be
// stored once; the writable register file, the explicit map, the reset values
// (coefficients zero, map k -> min(k, ENTRIES-1)) and the port layout are this
// design's choices.
//
// Timing: read is combinational in idx; a write at a clock edge is visible
// right after that edge. Coefficient writes to an entry >= ENTRIES, and map
// writes to a segment >= SEGS or naming an entry >= ENTRIES, are ignored.
module coef_memory
  import fqa_pkg::*;
#(
  parameter int unsigned SEGS    = 10,
  parameter int unsigned ENTRIES = SEGS,  // stored coefficient sets
  parameter int unsigned A1W     = 18,    // a1 field width
  parameter int unsigned A2W     = 10,    // a2 field width
  parameter int unsigned BW      = 10,    // b field width
  localparam int unsigned IDX_W = (SEGS < 2) ? 1 : $clog2(SEGS),
  localparam int unsigned ENT_W = (ENTRIES < 2) ? 1 : $clog2(ENTRIES)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  cfg_req_t         cfg,
  input  logic [IDX_W-1:0] idx,
  output logic [A1W-1:0]   a1,
  output logic [A2W-1:0]   a2,
  output logic [BW-1:0]    b
);
  typedef struct packed {
    logic [A1W-1:0] a1;
    logic [A2W-1:0] a2;
    logic [BW-1:0]  b;
  } entry_t;

  if (ENTRIES < 1 || ENTRIES > SEGS) begin : g_bad_entries
    $error("coef_memory: ENTRIES must be in 1..SEGS");
  end

  entry_t           mem [ENTRIES];
  logic [ENT_W-1:0] ent;  // entry read for the current segment

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < ENTRIES; k++) mem[k] <= '0;
    end else if (cfg.we && 32'(cfg.addr) < ENTRIES) begin
      unique case (cfg.sel)
        CFG_A1:  mem[cfg.addr[ENT_W-1:0]].a1 <= cfg.data[A1W-1:0];
        CFG_A2:  mem[cfg.addr[ENT_W-1:0]].a2 <= cfg.data[A2W-1:0];
        CFG_B:   mem[cfg.addr[ENT_W-1:0]].b  <= cfg.data[BW-1:0];
        default: ;  // CFG_BREAK belongs to the index generator, CFG_MAP below
      endcase
    end
  end

  if (ENTRIES < SEGS) begin : g_map
    logic [ENT_W-1:0] emap [SEGS];

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        for (int k = 0; k < SEGS; k++)
          emap[k] <= ENT_W'((k < ENTRIES) ? k : ENTRIES - 1);
      end else if (cfg.we && cfg.sel == CFG_MAP && 32'(cfg.addr) < SEGS &&
                   cfg.data < ENTRIES) begin
        emap[cfg.addr[IDX_W-1:0]] <= cfg.data[ENT_W-1:0];
      end
    end

    always_comb begin
      ent = '0;
      if (32'(idx) < SEGS) ent = emap[idx];
    end
  end else begin : g_direct
    assign ent = ENT_W'(idx);
  end

  always_comb begin
    a1 = '0;
    a2 = '0;
    b  = '0;
    if (32'(ent) < ENTRIES) begin
      a1 = mem[ent].a1;
      a2 = mem[ent].a2;
      b  = mem[ent].b;
    end
  end
endmodule
