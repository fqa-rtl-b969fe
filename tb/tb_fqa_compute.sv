// tb_fqa_compute: self-checking testbench of the computation unit.
//
// Runs fqa_compute in the FWL configurations of the paper's evaluated
// schemes, each with random coefficients and inputs against an integer
// reference (see fqa_compute_checker):
//   c_s3o2_8   FQA-S3-O2, all FWLs 8 (default configuration)
//   c_o1_8     FQA-O1, W_a1 = 7, W_o1 = 8, W_b = 8
//   c_o1_16    FQA-O1, W_a1 = 16, W_o1 = 16, W_b = 14 (product finer than b)
//   c_o2_16    FQA-O2, W_a1 = 8, W_o1 = W_a2 = W_o2 = W_b = 16
//   c_s5o1_16  FQA-S5-O1, W_a1 = 9, W_o1 = 16, W_b = 16
//   c_s3o2_16  FQA-S3-O2, 16-bit output
//   c_o2_mix   order 2 with a2 finer than the first product and b finer than
//              the second (both concatenation arrangements in one unit)
module tb_fqa_compute;
  localparam int NCFG = 7;
  int   chk [NCFG], fail [NCFG], negs [NCFG];
  logic done [NCFG];

  fqa_compute_checker #(.ORDER(2), .SHIFTERS(3)) c_s3o2_8 (
    .checks(chk[0]), .failures(fail[0]), .neg_first_stage(negs[0]), .done(done[0]));
  fqa_compute_checker #(.ORDER(1), .SHIFTERS(0), .WA1(7), .WO1(8), .WB(8)) c_o1_8 (
    .checks(chk[1]), .failures(fail[1]), .neg_first_stage(negs[1]), .done(done[1]));
  fqa_compute_checker #(.ORDER(1), .SHIFTERS(0), .WA1(16), .WO1(16), .WB(14)) c_o1_16 (
    .checks(chk[2]), .failures(fail[2]), .neg_first_stage(negs[2]), .done(done[2]));
  fqa_compute_checker #(.ORDER(2), .SHIFTERS(0), .WA1(8), .WO1(16), .WA2(16), .WO2(16),
                        .WB(16)) c_o2_16 (
    .checks(chk[3]), .failures(fail[3]), .neg_first_stage(negs[3]), .done(done[3]));
  fqa_compute_checker #(.ORDER(1), .SHIFTERS(5), .WA1(9), .WO1(16), .WB(16)) c_s5o1_16 (
    .checks(chk[4]), .failures(fail[4]), .neg_first_stage(negs[4]), .done(done[4]));
  fqa_compute_checker #(.ORDER(2), .SHIFTERS(3), .WA1(8), .WO1(16), .WA2(16), .WO2(16),
                        .WB(16)) c_s3o2_16 (
    .checks(chk[5]), .failures(fail[5]), .neg_first_stage(negs[5]), .done(done[5]));
  fqa_compute_checker #(.ORDER(2), .SHIFTERS(0), .WA1(6), .WO1(8), .WA2(12), .WO2(10),
                        .WB(14)) c_o2_mix (
    .checks(chk[6]), .failures(fail[6]), .neg_first_stage(negs[6]), .done(done[6]));

  int checks, failures;

  initial begin
    #1_000_000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    checks = 0; failures = 0;
    #1;
    wait (done[0] && done[1] && done[2] && done[3] && done[4] && done[5] && done[6]);
    for (int k = 0; k < NCFG; k++) begin
      checks   += chk[k];
      failures += fail[k];
      if (negs[k] == 0) begin
        failures++;
        $display("configuration %0d never used a negative first-stage coefficient", k);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
