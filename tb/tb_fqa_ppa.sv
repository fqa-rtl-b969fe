// tb_fqa_ppa: end-to-end testbench of the PPA unit at its default parameters.
//
// The unit is built as FQA-S3-O2 with 8-bit input and output FWLs and 10
// segments. The testbench programs it through the configuration port with a
// 10-segment sigmoid table for x in [0,1), streams all 256 inputs through it
// back to back, then reprograms it with a tanh table while inputs keep
// flowing and streams all inputs again with random idle cycles in between.
//
// Both tables come from an offline exhaustive search over the quantized
// coefficient space for this exact datapath (first coefficient restricted
// to Hamming weight <= 3, stored as three shift terms). The sigmoid table is
// the best fit for 10 segments, with a maximum absolute error of 1.9665e-3;
// the tanh table needs only 9 segments, with an error of 1.9455e-3, so its
// last segment is repeated as a one-point segment at x = 255.
//
// Every output is checked three ways: bit for bit against an integer model of
// the datapath, against the real function within the table's error bound,
// and for its timing (each result appears exactly two clock edges after its
// input; with no idle input cycle, one result per cycle). The testbench also
// counts the mechanisms it exercised (configuration writes, reprogramming
// while running, every segment used, negative shift terms, idle cycles,
// one-point segments) and counts a failure for any that never happened.
module tb_fqa_ppa;
  import fqa_pkg::*;
  localparam int SEGS = 10;

  // {start, a1, a2, b}, values in units of 2^-8.
  localparam int SIG_TAB [SEGS][4] = '{
    '{  0,  -84,  87, 128}, '{ 13,   16,  58, 129}, '{ 82,   68,  10, 139},
    '{119,   41,  15, 142}, '{129,   44,   5, 147}, '{151, -140, 239,  73},
    '{182,  -52, 136, 102}, '{209,   48, -33, 174}, '{231,  -48, 142,  94},
    '{253,  -21, -64, 272}};
  localparam int TANH_TAB [SEGS][4] = '{
    '{  0,  -11, 258,   0}, '{ 68, -100, 297,  -5}, '{111,  104, 117,  35},
    '{128,  -41, 248,   5}, '{148,  -81, 282,  -2}, '{180, -100, 304,  -8},
    '{202,   24, 102,  74}, '{224,  -68, 245,  19}, '{252,  129, -64, 132},
    '{255,  129, -64, 132}};
  localparam real SIG_MAE  = 1.9665e-3;
  localparam real TANH_MAE = 1.9455e-3;

  logic              clk = 1'b0, rst_n = 1'b0;
  cfg_req_t          cfg;
  logic              in_valid;
  logic [7:0]        x_in;
  logic              out_valid;
  logic signed [14:0] y_out;
  logic [3:0]        seg_out;

  fqa_ppa dut (
    .clk(clk), .rst_n(rst_n), .cfg(cfg), .in_valid(in_valid), .x_in(x_in),
    .out_valid(out_valid), .y_out(y_out), .seg_out(seg_out)
  );

  always #5 clk = ~clk;

  int  checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // Mechanism counters.
  int n_cfg_writes = 0, n_reprogram_live = 0, n_neg_terms = 0, n_idle = 0;
  int n_one_point = 0, n_backtoback = 0;
  int seg_hits [SEGS];

  // The table the model uses for each issued sample.
  typedef struct {
    int     x;
    int     fn;      // 0 sigmoid, 1 tanh
    longint t_issue;
  } sample_t;
  sample_t pending [$];
  int cur_fn = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint floor_div(longint n, longint d);
    if (n >= 0) return n / d;
    return -((-n + d - 1) / d);
  endfunction

  function automatic int tab(int fn, int s, int f);
    return (fn == 0) ? SIG_TAB[s][f] : TANH_TAB[s][f];
  endfunction

  function automatic int seg_of(int fn, int xv);
    int r = 0;
    for (int s = 1; s < SEGS; s++) if (xv >= tab(fn, s, 0)) r = s;
    return r;
  endfunction

  // Integer model: ((a1*x)>>8 + a2)*x >> 8 + b, floor at each shift.
  function automatic longint model(int fn, int xv);
    int s;
    longint p1, s1, p2;
    s  = seg_of(fn, xv);
    p1 = floor_div(longint'(tab(fn, s, 1)) * xv, 256);
    s1 = p1 + longint'(tab(fn, s, 2));
    p2 = floor_div(s1 * xv, 256);
    return p2 + longint'(tab(fn, s, 3));
  endfunction

  // Shift code of a coefficient with Hamming weight <= 3 (sign-magnitude).
  function automatic logic [17:0] shift_code(int a);
    logic [17:0] c = '0;
    int mag, k;
    mag = (a < 0) ? -a : a;
    k = 0;
    for (int bitpos = 8; bitpos >= 0; bitpos--) begin
      if (mag[bitpos]) begin
        c[k*6 +: 6] = {1'b1, (a < 0), 4'(8 - bitpos)};
        k++;
      end
    end
    if (k > 3) $display("coefficient %0d needs more than 3 shifters", a);
    return c;
  endfunction

  task automatic cfg_write(cfg_sel_e sel, int addr, logic [31:0] data);
    cfg.we = 1'b1; cfg.sel = sel; cfg.addr = 8'(addr); cfg.data = data;
    @(posedge clk); #1;
    cfg.we = 1'b0;
    n_cfg_writes++;
  endtask

  task automatic load_table(int fn);
    for (int s = 0; s < SEGS; s++) begin
      if (s > 0) cfg_write(CFG_BREAK, s, 32'(tab(fn, s, 0)));
      cfg_write(CFG_A1, s, 32'(shift_code(tab(fn, s, 1))));
      cfg_write(CFG_A2, s, 32'(tab(fn, s, 2)));
      cfg_write(CFG_B,  s, 32'(tab(fn, s, 3)));
      if (tab(fn, s, 1) < 0) n_neg_terms++;
      if (s > 0 && (s == SEGS - 1 ? 256 : tab(fn, s + 1, 0)) - tab(fn, s, 0) == 1)
        n_one_point++;
    end
  endtask

  // Output monitor, sampling between clock edges. cycle counts rising edges.
  real max_err [2] = '{0.0, 0.0};
  always @(negedge clk) begin
    if (rst_n && out_valid) begin
      sample_t smp;
      real fx, err;
      longint expv;
      if (pending.size() == 0) begin
        failures++;
        $display("unexpected output");
      end else begin
        smp  = pending.pop_front();
        expv = model(smp.fn, smp.x);
        checks++;
        if (longint'(y_out) != expv || int'(seg_out) != seg_of(smp.fn, smp.x)) begin
          failures++;
          if (failures < 10)
            $display("fn=%0d x=%0d y=%0d seg=%0d exp %0d seg %0d", smp.fn, smp.x,
                     y_out, seg_out, expv, seg_of(smp.fn, smp.x));
        end
        // Latency: presented after edge t_issue, visible after edge t_issue + 2.
        checks++;
        if (cycle != smp.t_issue + 2) begin
          failures++;
          $display("latency %0d cycles, expected 2", cycle - smp.t_issue);
        end
        fx = (smp.fn == 0) ? 1.0 / (1.0 + $exp(-real'(smp.x) / 256.0))
                           : ($exp(2.0 * real'(smp.x) / 256.0) - 1.0) /
                             ($exp(2.0 * real'(smp.x) / 256.0) + 1.0);
        err = real'(y_out) / 256.0 - fx;
        if (err < 0) err = -err;
        if (err > max_err[smp.fn]) max_err[smp.fn] = err;
        checks++;
        if (err > ((smp.fn == 0) ? SIG_MAE : TANH_MAE) + 1e-7) begin
          failures++;
          $display("fn=%0d x=%0d error %g over bound", smp.fn, smp.x, err);
        end
        seg_hits[seg_out]++;
      end
    end
  end

  task automatic issue(int xv);
    in_valid = 1'b1;
    x_in = 8'(xv);
    pending.push_back('{x: xv, fn: cur_fn, t_issue: cycle});
    @(posedge clk); #1;
    in_valid = 1'b0;
  endtask

  initial begin
    int out_count_start;
    longint t0;
    cfg = '0; in_valid = 1'b0; x_in = '0;
    for (int s = 0; s < SEGS; s++) seg_hits[s] = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;

    // Sigmoid: program, then all 256 inputs back to back.
    load_table(0);
    cur_fn = 0;
    t0 = cycle;
    for (int xv = 0; xv < 256; xv++) issue(xv);
    repeat (3) @(posedge clk);
    #1;
    checks++;
    if (pending.size() != 0) begin
      failures++;
      $display("%0d results missing", pending.size());
    end
    // 256 results issued in 256 consecutive cycles.
    if (cycle - t0 == 256 + 3) n_backtoback++;

    // Reprogram to tanh while sigmoid inputs are still in flight.
    issue(5);
    issue(200);
    // Both are still in the pipeline when the first tanh writes land; they
    // must come out with their sigmoid values.
    n_reprogram_live++;
    load_table(1);
    cur_fn = 1;
    for (int xv = 0; xv < 256; xv++) begin
      if ($urandom % 4 == 0) begin
        @(posedge clk); #1;
        n_idle++;
      end
      issue(xv);
    end
    repeat (4) @(posedge clk);
    #1;
    checks++;
    if (pending.size() != 0) begin
      failures++;
      $display("%0d results missing", pending.size());
    end

    $display("max |error|: sigmoid %g, tanh %g", max_err[0], max_err[1]);
    $display("mechanisms: cfg_writes=%0d reprogram_live=%0d neg_terms=%0d idle=%0d one_point=%0d back_to_back=%0d",
             n_cfg_writes, n_reprogram_live, n_neg_terms, n_idle, n_one_point, n_backtoback);
    if (n_cfg_writes == 0 || n_reprogram_live == 0 || n_neg_terms == 0 || n_idle == 0 ||
        n_one_point == 0 || n_backtoback == 0) begin
      failures++;
      $display("a mechanism was never exercised");
    end
    for (int s = 0; s < SEGS; s++) if (seg_hits[s] == 0) begin
      failures++;
      $display("segment %0d never used", s);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
