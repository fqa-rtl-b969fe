// tb_fqa_workloads: the sigmoid and tanh workloads of the FQA schemes.
//
// Each runner builds the PPA unit in one scheme, loads a segment table for
// sigmoid or tanh on [0,1) with an 8-bit input, and checks all 256 inputs
// bit for bit and against the real function (see ppa_workload_runner). The
// default FQA-S3-O2 8-bit sigmoid case is covered by tb_fqa_ppa. The error
// bound of each runner is the one its table was searched for; the segment
// counts are those of the published comparison. The errors are too, except
// for w4 (2.10e-3 rather than 1.953e-3 at 10 segments) and the 8-bit tanh
// order-2 cases w7 and w16 (2.02e-3 rather than 1.945e-3 at 8 segments).
//   w1  FQA-O1 sigmoid,    8-bit, W_a1 = 7, 18 segments, error <= 1.953125e-3
//   w2  FQA-S4-O1 sigmoid, 8-bit, 18 segments, error <= 1.953125e-3
//   w3  FQA-S2-O1 sigmoid, 8-bit, 24 segments, error <= 1.953125e-3
//   w4  FQA-O2 sigmoid,    8-bit, W_a1 = 6, 10 segments, error <= 2.1e-3
//   w5  FQA-S1-O2 sigmoid, 8-bit, 13 segments, error <= 1.9665e-3
//   w6  FQA-O1 tanh,       8-bit, 15 segments, error <= 1.9455e-3
//   w7  FQA-O2 tanh,       8-bit, 8 segments, error <= 2.02e-3
//   w8  FQA-O2 sigmoid,    16-bit out, 12 segments, error <= 7.5996e-6
//   w9  FQA-S3-O2 sigmoid, 16-bit out, 12 segments, error <= 7.5996e-6
//   w10 FQA-O1 sigmoid,    16-bit out, W_a1 = 16, W_b = 14, 33 segments, error <= 7.5996e-6
//   w11 FQA-S1-O2 sigmoid, 16-bit out, 18 segments, error <= 7.5996e-6
//   w12 FQA-O2 tanh,       16-bit out, 16 segments, error <= 7.6294e-6
//   w13 FQA-S4-O2 tanh,    16-bit out, 17 segments, error <= 7.6294e-6
//   w14 FQA-S5-O1 sigmoid, 16-bit out, W_a1 = 9, 75 segments, error <= 7.5996e-6
//   w15 FQA-O1 tanh,       16-bit out, W_a1 = 14, 79 segments, error <= 7.6294e-6
//   w16 FQA-S4-O2 tanh,    8-bit, 8 segments, error <= 2.02e-3
//   w17 FQA-S3-O2 sigmoid, 8-bit, 10 segments in 9 shared entries, error <= 1.9665e-3
//   w18 FQA-S1-O2 sigmoid, 8-bit, 13 segments in 12 shared entries, error <= 1.9665e-3
// w17 and w18 use tables in which two segments were given one coefficient
// set that meets the bound in both, so the unit stores one entry fewer.
// The order-1 runners (w1, w2, w3, w6, w10, w14, w15) build their tables
// with the runner's own search instead of a stored table, and also check that
// the search needs exactly the published segment count.
module tb_fqa_workloads;
  localparam int NW = 18;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  int   chk [NW], fail [NW];
  real  mx [NW];
  logic done [NW];

  ppa_workload_runner #(.WL(1), .FN(0), .SEGS(18), .ORDER(1), .SHIFTERS(0),
    .WA1(7), .WO1(8), .WA2(8), .WO2(8), .WB(8), .MAE_BOUND(1.953125e-3),
    .SEARCH(1'b1), .SEG_EXPECT(18))
    w1 (.clk(clk), .checks(chk[0]), .failures(fail[0]), .max_err(mx[0]), .done(done[0]));
  ppa_workload_runner #(.WL(2), .FN(0), .SEGS(18), .ORDER(1), .SHIFTERS(4),
    .WA1(8), .WO1(8), .WA2(8), .WO2(8), .WB(8), .MAE_BOUND(1.953125e-3),
    .SEARCH(1'b1), .SEG_EXPECT(18))
    w2 (.clk(clk), .checks(chk[1]), .failures(fail[1]), .max_err(mx[1]), .done(done[1]));
  ppa_workload_runner #(.WL(3), .FN(0), .SEGS(24), .ORDER(1), .SHIFTERS(2),
    .WA1(8), .WO1(8), .WA2(8), .WO2(8), .WB(8), .MAE_BOUND(1.953125e-3),
    .SEARCH(1'b1), .SEG_EXPECT(24))
    w3 (.clk(clk), .checks(chk[2]), .failures(fail[2]), .max_err(mx[2]), .done(done[2]));
  ppa_workload_runner #(.WL(4), .FN(0), .SEGS(10), .ORDER(2), .SHIFTERS(0),
    .WA1(6), .WO1(8), .WA2(8), .WO2(8), .WB(8), .MAE_BOUND(2.1e-3))
    w4 (.clk(clk), .checks(chk[3]), .failures(fail[3]), .max_err(mx[3]), .done(done[3]));
  ppa_workload_runner #(.WL(5), .FN(0), .SEGS(13), .ORDER(2), .SHIFTERS(1),
    .WA1(8), .WO1(8), .WA2(8), .WO2(8), .WB(8), .MAE_BOUND(1.9665e-3))
    w5 (.clk(clk), .checks(chk[4]), .failures(fail[4]), .max_err(mx[4]), .done(done[4]));
  ppa_workload_runner #(.WL(6), .FN(1), .SEGS(15), .ORDER(1), .SHIFTERS(0),
    .WA1(8), .WO1(8), .WA2(8), .WO2(8), .WB(8), .MAE_BOUND(1.9455e-3),
    .SEARCH(1'b1), .SEG_EXPECT(15))
    w6 (.clk(clk), .checks(chk[5]), .failures(fail[5]), .max_err(mx[5]), .done(done[5]));
  ppa_workload_runner #(.WL(7), .FN(1), .SEGS(8), .ORDER(2), .SHIFTERS(0),
    .WA1(8), .WO1(8), .WA2(8), .WO2(8), .WB(8), .MAE_BOUND(2.02e-3))
    w7 (.clk(clk), .checks(chk[6]), .failures(fail[6]), .max_err(mx[6]), .done(done[6]));
  ppa_workload_runner #(.WL(8), .FN(0), .SEGS(12), .ORDER(2), .SHIFTERS(0),
    .WA1(8), .WO1(16), .WA2(16), .WO2(16), .WB(16), .MAE_BOUND(7.5996e-6))
    w8 (.clk(clk), .checks(chk[7]), .failures(fail[7]), .max_err(mx[7]), .done(done[7]));
  ppa_workload_runner #(.WL(9), .FN(0), .SEGS(12), .ORDER(2), .SHIFTERS(3),
    .WA1(8), .WO1(16), .WA2(16), .WO2(16), .WB(16), .MAE_BOUND(7.5996e-6))
    w9 (.clk(clk), .checks(chk[8]), .failures(fail[8]), .max_err(mx[8]), .done(done[8]));
  ppa_workload_runner #(.WL(10), .FN(0), .SEGS(33), .ORDER(1), .SHIFTERS(0),
    .WA1(16), .WO1(16), .WA2(8), .WO2(8), .WB(14), .MAE_BOUND(7.5996e-6),
    .SEARCH(1'b1), .SEG_EXPECT(33))
    w10 (.clk(clk), .checks(chk[9]), .failures(fail[9]), .max_err(mx[9]), .done(done[9]));
  ppa_workload_runner #(.WL(11), .FN(0), .SEGS(18), .ORDER(2), .SHIFTERS(1),
    .WA1(8), .WO1(16), .WA2(16), .WO2(16), .WB(16), .MAE_BOUND(7.5996e-6))
    w11 (.clk(clk), .checks(chk[10]), .failures(fail[10]), .max_err(mx[10]), .done(done[10]));
  ppa_workload_runner #(.WL(12), .FN(1), .SEGS(16), .ORDER(2), .SHIFTERS(0),
    .WA1(8), .WO1(16), .WA2(16), .WO2(16), .WB(16), .MAE_BOUND(7.6294e-6))
    w12 (.clk(clk), .checks(chk[11]), .failures(fail[11]), .max_err(mx[11]), .done(done[11]));
  ppa_workload_runner #(.WL(13), .FN(1), .SEGS(17), .ORDER(2), .SHIFTERS(4),
    .WA1(8), .WO1(16), .WA2(16), .WO2(16), .WB(16), .MAE_BOUND(7.6294e-6))
    w13 (.clk(clk), .checks(chk[12]), .failures(fail[12]), .max_err(mx[12]), .done(done[12]));
  ppa_workload_runner #(.WL(14), .FN(0), .SEGS(75), .ORDER(1), .SHIFTERS(5),
    .WA1(9), .WO1(16), .WA2(8), .WO2(8), .WB(16), .MAE_BOUND(7.5996e-6),
    .SEARCH(1'b1), .SEG_EXPECT(75))
    w14 (.clk(clk), .checks(chk[13]), .failures(fail[13]), .max_err(mx[13]), .done(done[13]));
  ppa_workload_runner #(.WL(15), .FN(1), .SEGS(79), .ORDER(1), .SHIFTERS(0),
    .WA1(14), .WO1(16), .WA2(8), .WO2(8), .WB(16), .MAE_BOUND(7.6294e-6),
    .SEARCH(1'b1), .SEG_EXPECT(79))
    w15 (.clk(clk), .checks(chk[14]), .failures(fail[14]), .max_err(mx[14]), .done(done[14]));
  ppa_workload_runner #(.WL(16), .FN(1), .SEGS(8), .ORDER(2), .SHIFTERS(4),
    .WA1(8), .WO1(8), .WA2(8), .WO2(8), .WB(8), .MAE_BOUND(2.02e-3))
    w16 (.clk(clk), .checks(chk[15]), .failures(fail[15]), .max_err(mx[15]), .done(done[15]));
  ppa_workload_runner #(.WL(17), .FN(0), .SEGS(10), .ORDER(2), .SHIFTERS(3),
    .WA1(8), .WO1(8), .WA2(8), .WO2(8), .WB(8), .MAE_BOUND(1.9665e-3), .ENTRIES(9))
    w17 (.clk(clk), .checks(chk[16]), .failures(fail[16]), .max_err(mx[16]), .done(done[16]));
  ppa_workload_runner #(.WL(18), .FN(0), .SEGS(13), .ORDER(2), .SHIFTERS(1),
    .WA1(8), .WO1(8), .WA2(8), .WO2(8), .WB(8), .MAE_BOUND(1.9665e-3), .ENTRIES(12))
    w18 (.clk(clk), .checks(chk[17]), .failures(fail[17]), .max_err(mx[17]), .done(done[17]));

  int checks = 0, failures = 0;

  function automatic logic all_done();
    for (int k = 0; k < NW; k++) if (!done[k]) return 1'b0;
    return 1'b1;
  endfunction

  initial begin
    repeat (5000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    #1;
    while (!all_done()) @(posedge clk);
    for (int k = 0; k < NW; k++) begin
      $display("workload %0d: max |error| %g, failures %0d", k + 1, mx[k], fail[k]);
      checks   += chk[k];
      failures += fail[k];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
