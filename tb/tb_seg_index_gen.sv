// tb_seg_index_gen: self-checking testbench of seg_index_gen.
//
// After reset the start points must form the uniform split k*256/SEGS; every
// x is checked against the index that split implies. Then several random
// ascending sets of start points (including adjacent start points, which
// make one-point segments) are written through the configuration port and
// every x from 0 to 255 is checked against a linear search of the written
// table. Writes to address 0, to addresses beyond the table and to the
// coefficient tables must leave the start points unchanged.
module tb_seg_index_gen;
  import fqa_pkg::*;
  localparam int SEGS = 10;

  logic       clk = 0, rst_n = 0;
  cfg_req_t   cfg;
  logic [7:0] x;
  logic [3:0] idx;

  seg_index_gen #(.SEGS(SEGS), .X_W(8)) dut (
    .clk(clk), .rst_n(rst_n), .cfg(cfg), .x(x), .idx(idx)
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int bp [SEGS];
  int one_point = 0;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int expected(int xv);
    int r = 0;
    for (int k = 1; k < SEGS; k++) if (xv >= bp[k]) r = k;
    return r;
  endfunction

  task automatic write(cfg_sel_e sel, int addr, int data);
    cfg.we = 1'b1; cfg.sel = sel; cfg.addr = 8'(addr); cfg.data = 32'(data);
    @(posedge clk); #1;
    cfg.we = 1'b0;
  endtask

  task automatic sweep();
    for (int xv = 0; xv < 256; xv++) begin
      x = 8'(xv);
      #1;
      checks++;
      if (int'(idx) != expected(xv)) begin
        failures++;
        if (failures < 10) $display("x=%0d idx=%0d exp=%0d", xv, idx, expected(xv));
      end
    end
  endtask

  initial begin
    cfg = '0; x = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int k = 0; k < SEGS; k++) bp[k] = (k * 256) / SEGS;
    sweep();
    for (int t = 0; t < 20; t++) begin
      // Random ascending start points in 1..255.
      int cur;
      cur = 0;
      for (int k = 1; k < SEGS; k++) begin
        int step;
        step = (t % 4 == 0) ? int'($urandom % 3) : int'($urandom % 40);
        cur = cur + step + ((step == 0 && k == 1) ? 1 : 0);
        if (cur < 1) cur = 1;
        if (cur > 255) cur = 255;
        if (cur == bp[k-1] + 1 && k > 1) one_point++;
        bp[k] = cur;
        write(CFG_BREAK, k, cur);
      end
      sweep();
      // Writes that must be ignored.
      write(CFG_BREAK, 0, 77);
      write(CFG_BREAK, SEGS, 3);
      write(CFG_A1, 1, 200);
      write(CFG_B, 2, 201);
      sweep();
    end
    if (one_point == 0) begin
      failures++;
      $display("no one-point segment was produced");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
