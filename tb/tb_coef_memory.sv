// tb_coef_memory: self-checking testbench of coef_memory.
//
// Two memories of 10 segments are driven from the same configuration port:
// dut_full with one entry per segment, dut_shared with 6 shared entries and
// a segment-to-entry map. The testbench checks that every entry reads zero
// after reset and that the map starts as k -> min(k, 5). It then writes
// random a1, a2 and b values to random entries and random map values to
// random segments, in random order. After every few writes it compares the
// read-back for every segment index with a shadow copy kept by the
// testbench. Writes beyond a memory's entries or segments, map writes naming
// a missing entry and writes to the start-point table must change nothing.
module tb_coef_memory;
  import fqa_pkg::*;
  localparam int SEGS = 10;
  localparam int ENTS = 6;

  logic        clk = 0, rst_n = 0;
  cfg_req_t    cfg;
  logic [3:0]  idx;
  logic [17:0] a1_f, a1_s;
  logic [9:0]  a2_f, b_f, a2_s, b_s;

  coef_memory #(.SEGS(SEGS), .A1W(18), .A2W(10), .BW(10)) dut_full (
    .clk(clk), .rst_n(rst_n), .cfg(cfg), .idx(idx), .a1(a1_f), .a2(a2_f), .b(b_f)
  );

  coef_memory #(.SEGS(SEGS), .ENTRIES(ENTS), .A1W(18), .A2W(10), .BW(10)) dut_shared (
    .clk(clk), .rst_n(rst_n), .cfg(cfg), .idx(idx), .a1(a1_s), .a2(a2_s), .b(b_s)
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int map_writes = 0, shared_reads = 0;
  logic [17:0] s_a1 [SEGS];
  logic [9:0]  s_a2 [SEGS], s_b [SEGS];
  int          s_map [SEGS];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic write(cfg_sel_e sel, int addr, logic [31:0] data);
    cfg.we = 1'b1; cfg.sel = sel; cfg.addr = 8'(addr); cfg.data = data;
    @(posedge clk); #1;
    cfg.we = 1'b0;
  endtask

  task automatic read_all();
    int e;
    for (int k = 0; k < SEGS; k++) begin
      idx = 4'(k);
      #1;
      checks++;
      if (a1_f !== s_a1[k] || a2_f !== s_a2[k] || b_f !== s_b[k]) begin
        failures++;
        if (failures < 10)
          $display("full idx=%0d got %h/%h/%h exp %h/%h/%h", k, a1_f, a2_f, b_f,
                   s_a1[k], s_a2[k], s_b[k]);
      end
      e = s_map[k];
      if (e != k) shared_reads++;
      checks++;
      if (a1_s !== s_a1[e] || a2_s !== s_a2[e] || b_s !== s_b[e]) begin
        failures++;
        if (failures < 10)
          $display("shared idx=%0d entry %0d got %h/%h/%h exp %h/%h/%h", k, e, a1_s, a2_s,
                   b_s, s_a1[e], s_a2[e], s_b[e]);
      end
    end
  endtask

  initial begin
    cfg = '0; idx = '0;
    for (int k = 0; k < SEGS; k++) begin
      s_a1[k] = '0; s_a2[k] = '0; s_b[k] = '0;
      s_map[k] = (k < ENTS) ? k : ENTS - 1;
    end
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    read_all();
    for (int n = 0; n < 400; n++) begin
      int a, e;
      logic [31:0] d;
      a = int'($urandom % SEGS);
      d = $urandom;
      case ($urandom % 4)
        0: begin write(CFG_A1, a, d); s_a1[a] = d[17:0]; end
        1: begin write(CFG_A2, a, d); s_a2[a] = d[9:0]; end
        2: begin write(CFG_B, a, d); s_b[a] = d[9:0]; end
        default: begin
          // Entry numbers 0..7: 6 and 7 do not exist and must be ignored.
          e = int'($urandom % 8);
          write(CFG_MAP, a, 32'(e));
          if (e < ENTS) begin
            s_map[a] = e;
            map_writes++;
          end
        end
      endcase
      if (n % 10 == 9) begin
        // Entries 6..9 exist only in dut_full; only a shadow copy of those is
        // kept, and the shared memory never reads them.
        write(CFG_A1, SEGS + int'($urandom % 4), $urandom);
        write(CFG_MAP, SEGS + int'($urandom % 4), 32'($urandom % ENTS));
        write(CFG_BREAK, int'($urandom % SEGS), $urandom);
        read_all();
      end
    end
    checks++;
    if (map_writes == 0 || shared_reads == 0) begin
      failures++;
      $display("map never exercised: %0d writes, %0d shared reads", map_writes, shared_reads);
    end
    $display("map writes %0d, reads through a remapped entry %0d", map_writes, shared_reads);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
