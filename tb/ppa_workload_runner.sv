// ppa_workload_runner: runs one approximation workload (8-bit input) on fqa_ppa.
//
// Builds fqa_ppa in the scheme given by the parameters (order, number of
// shifters, FWLs, segment count; the input always has 8 fractional bits),
// loads the segment table of workload WL through the configuration port,
// streams all 256 inputs x in [0,1) through it and checks each result bit for bit against an
// integer model of the datapath and against the real function (FN 0:
// sigmoid, 1: tanh) within MAE_BOUND. Reports its counts, the largest error
// seen and done.
//
// The stored tables (order 2) come from an offline exhaustive search of the quantized
// coefficient space for each datapath: every segment is extended as far as
// some coefficient set keeps the error within the bound, and the bound is the
// smallest one whose segmentation fits in SEGS segments. For the shift-add
// schemes a1 is restricted to Hamming weight <= SHIFTERS. Entries are {start
// point, a1, a2, b}; a1, a2 and b are integers in units of 2^-WA1, 2^-WA2 and
// 2^-WB.
//
// With SEARCH set (order 1 only) no stored table is used: the runner builds
// the table itself at time zero with the same greedy search (task search_o1,
// at the given MAE_BOUND rather than by bisection)
// and counts a failure unless it needs exactly SEG_EXPECT segments.
//
// With ENTRIES < SEGS the unit stores shared coefficient sets: segments whose
// table rows are identical are given one entry through the segment-to-entry
// map, and a failure is counted if the table needs more than ENTRIES.
module ppa_workload_runner
  import fqa_pkg::*;
#(
  parameter int  WL        = 1,
  parameter int  FN        = 0,
  parameter int  SEGS      = 18,
  parameter int  ORDER     = 1,
  parameter int  SHIFTERS  = 0,
  parameter int  WA1       = 8,
  parameter int  WO1       = 8,
  parameter int  WA2       = 8,
  parameter int  WO2       = 8,
  parameter int  WB        = 8,
  parameter real MAE_BOUND = 1.953125e-3,
  parameter bit  SEARCH    = 1'b0,
  parameter int  SEG_EXPECT = SEGS,
  parameter int  ENTRIES   = SEGS
) (
  input  logic clk,
  output int   checks,
  output int   failures,
  output real  max_err,
  output logic done
);
  localparam int A1W  = a1_bits(SHIFTERS, 2, WA1);
  localparam int SH_W = sh_bits(WA1);
  localparam int TW   = SH_W + 2;
  localparam int Y_F  = y_f(ORDER, WO1, WO2, WB);
  localparam int Y_W  = y_iw(ORDER, SHIFTERS, 2, 0) + Y_F;
  localparam int WM2  = (WO1 > WA2) ? WO1 : WA2;
  localparam int PN_F = (ORDER == 1) ? WO1 : WO2;
  localparam int IDX_W = (SEGS < 2) ? 1 : $clog2(SEGS);

  logic              rst_n;
  cfg_req_t          cfg;
  logic              in_valid;
  logic [7:0]        x_in;
  logic              out_valid;
  logic signed [Y_W-1:0] y_out;
  logic [IDX_W-1:0]  seg_out;

  fqa_ppa #(
    .SEGS(SEGS), .ORDER(ORDER), .SHIFTERS(SHIFTERS), .WI(8), .XIW(0), .CIW(2),
    .WA1(WA1), .WO1(WO1), .WA2(WA2), .WO2(WO2), .WB(WB), .ENTRIES(ENTRIES)
  ) dut (
    .clk(clk), .rst_n(rst_n), .cfg(cfg), .in_valid(in_valid), .x_in(x_in),
    .out_valid(out_valid), .y_out(y_out), .seg_out(seg_out)
  );

  // Table built by search_o1() when SEARCH is set.
  int gtab [SEGS][4];
  int found_segs;

  function automatic int tab(int s, int f);
    int e [4];
    if (SEARCH) return gtab[s][f];
    e = '{0, 0, 0, 0};
    case ({8'(WL), 8'(s)})
      // workload 4
      {8'd4, 8'd0}: e = '{0, -21, 87, 128};
      {8'd4, 8'd1}: e = '{13, 3, 59, 129};
      {8'd4, 8'd2}: e = '{86, 1, 61, 129};
      {8'd4, 8'd3}: e = '{124, 17, -63, 174};
      {8'd4, 8'd4}: e = '{129, 12, 3, 147};
      {8'd4, 8'd5}: e = '{163, -35, 239, 73};
      {8'd4, 8'd6}: e = '{182, -13, 136, 102};
      {8'd4, 8'd7}: e = '{214, 1, 51, 134};
      {8'd4, 8'd8}: e = '{242, -25, 242, 46};
      {8'd4, 8'd9}: e = '{254, -15, -64, 311};
      // workload 5
      {8'd5, 8'd0}: e = '{0, -64, 87, 128};
      {8'd5, 8'd1}: e = '{13, 16, 58, 129};
      {8'd5, 8'd2}: e = '{82, -64, 102, 123};
      {8'd5, 8'd3}: e = '{101, -128, 173, 105};
      {8'd5, 8'd4}: e = '{121, 0, 33, 143};
      {8'd5, 8'd5}: e = '{129, 64, -6, 147};
      {8'd5, 8'd6}: e = '{149, 4, 56, 131};
      {8'd5, 8'd7}: e = '{181, -64, 153, 96};
      {8'd5, 8'd8}: e = '{199, 64, -46, 173};
      {8'd5, 8'd9}: e = '{209, 4, 45, 139};
      {8'd5, 8'd10}: e = '{228, 8, 47, 134};
      {8'd5, 8'd11}: e = '{242, 32, -11, 167};
      {8'd5, 8'd12}: e = '{253, -16, -64, 267};
      // workload 7
      {8'd7, 8'd0}: e = '{0, -34, 262, 0};
      {8'd7, 8'd1}: e = '{81, -92, 294, -5};
      {8'd7, 8'd2}: e = '{128, -109, 316, -12};
      {8'd7, 8'd3}: e = '{152, -81, 276, 2};
      {8'd7, 8'd4}: e = '{184, 106, -3, 106};
      {8'd7, 8'd5}: e = '{202, 24, 102, 74};
      {8'd7, 8'd6}: e = '{224, -68, 245, 19};
      {8'd7, 8'd7}: e = '{252, 129, -64, 132};
      // workload 8
      {8'd8, 8'd0}: e = '{0, -1, 16402, 32768};
      {8'd8, 8'd1}: e = '{27, -2, 16447, 32766};
      {8'd8, 8'd2}: e = '{49, -4, 16637, 32748};
      {8'd8, 8'd3}: e = '{68, -5, 16788, 32726};
      {8'd8, 8'd4}: e = '{101, -6, 16972, 32693};
      {8'd8, 8'd5}: e = '{120, -20, 20402, 31872};
      {8'd8, 8'd6}: e = '{129, -8, 17454, 32579};
      {8'd8, 8'd7}: e = '{149, -9, 17756, 32490};
      {8'd8, 8'd8}: e = '{166, -8, 17418, 32602};
      {8'd8, 8'd9}: e = '{181, -11, 18503, 32218};
      {8'd8, 8'd10}: e = '{202, -10, 18105, 32373};
      {8'd8, 8'd11}: e = '{225, -12, 19014, 31969};
      // workload 9
      {8'd9, 8'd0}: e = '{0, -1, 16402, 32768};
      {8'd9, 8'd1}: e = '{27, -2, 16447, 32766};
      {8'd9, 8'd2}: e = '{49, -4, 16637, 32748};
      {8'd9, 8'd3}: e = '{68, -5, 16788, 32726};
      {8'd9, 8'd4}: e = '{101, -6, 16972, 32693};
      {8'd9, 8'd5}: e = '{120, -20, 20402, 31872};
      {8'd9, 8'd6}: e = '{129, -8, 17454, 32579};
      {8'd9, 8'd7}: e = '{149, -9, 17756, 32490};
      {8'd9, 8'd8}: e = '{166, -8, 17418, 32602};
      {8'd9, 8'd9}: e = '{181, -11, 18503, 32218};
      {8'd9, 8'd10}: e = '{202, -10, 18105, 32373};
      {8'd9, 8'd11}: e = '{225, -12, 19014, 31969};
      // workload 11
      {8'd11, 8'd0}: e = '{0, -1, 16402, 32768};
      {8'd11, 8'd1}: e = '{27, -2, 16447, 32766};
      {8'd11, 8'd2}: e = '{49, -4, 16637, 32748};
      {8'd11, 8'd3}: e = '{68, -4, 16641, 32747};
      {8'd11, 8'd4}: e = '{84, -4, 16601, 32760};
      {8'd11, 8'd5}: e = '{101, -4, 16552, 32779};
      {8'd11, 8'd6}: e = '{117, -16, 19394, 32120};
      {8'd11, 8'd7}: e = '{129, -8, 17454, 32579};
      {8'd11, 8'd8}: e = '{149, -8, 17461, 32575};
      {8'd11, 8'd9}: e = '{157, -8, 17441, 32587};
      {8'd11, 8'd10}: e = '{171, -8, 17406, 32610};
      {8'd11, 8'd11}: e = '{183, -16, 20379, 31531};
      {8'd11, 8'd12}: e = '{195, -8, 17322, 32672};
      {8'd11, 8'd13}: e = '{203, -16, 20627, 31338};
      {8'd11, 8'd14}: e = '{217, -8, 17196, 32776};
      {8'd11, 8'd15}: e = '{231, -16, 20904, 31097};
      {8'd11, 8'd16}: e = '{243, -8, 17035, 32925};
      {8'd11, 8'd17}: e = '{253, -128, 77892, 2785};
      // workload 12
      {8'd12, 8'd0}: e = '{0, -9, 65603, 0};
      {8'd12, 8'd1}: e = '{18, -25, 66154, -19};
      {8'd12, 8'd2}: e = '{34, -38, 66998, -73};
      {8'd12, 8'd3}: e = '{48, -53, 68427, -207};
      {8'd12, 8'd4}: e = '{65, -67, 70262, -443};
      {8'd12, 8'd5}: e = '{82, -76, 71727, -676};
      {8'd12, 8'd6}: e = '{101, -87, 73907, -1098};
      {8'd12, 8'd7}: e = '{122, -110, 79599, -2474};
      {8'd12, 8'd8}: e = '{130, -95, 75868, -1568};
      {8'd12, 8'd9}: e = '{150, -99, 77059, -1915};
      {8'd12, 8'd10}: e = '{171, -98, 76725, -1806};
      {8'd12, 8'd11}: e = '{185, -98, 76718, -1801};
      {8'd12, 8'd12}: e = '{198, -95, 75552, -1358};
      {8'd12, 8'd13}: e = '{208, -95, 75563, -1367};
      {8'd12, 8'd14}: e = '{223, -89, 72922, -231};
      {8'd12, 8'd15}: e = '{242, -80, 68539, 1854};
      // workload 13
      {8'd13, 8'd0}: e = '{0, -9, 65603, 0};
      {8'd13, 8'd1}: e = '{18, -25, 66154, -19};
      {8'd13, 8'd2}: e = '{34, -38, 66998, -73};
      {8'd13, 8'd3}: e = '{48, -53, 68427, -207};
      {8'd13, 8'd4}: e = '{65, -67, 70262, -443};
      {8'd13, 8'd5}: e = '{82, -76, 71727, -676};
      {8'd13, 8'd6}: e = '{101, -86, 73694, -1054};
      {8'd13, 8'd7}: e = '{121, -108, 79089, -2347};
      {8'd13, 8'd8}: e = '{130, -98, 76683, -1784};
      {8'd13, 8'd9}: e = '{146, -98, 76739, -1815};
      {8'd13, 8'd10}: e = '{169, -98, 76725, -1806};
      {8'd13, 8'd11}: e = '{185, -98, 76718, -1801};
      {8'd13, 8'd12}: e = '{198, -92, 74344, -883};
      {8'd13, 8'd13}: e = '{207, -99, 77249, -2061};
      {8'd13, 8'd14}: e = '{217, -90, 73387, -442};
      {8'd13, 8'd15}: e = '{236, -85, 71017, 655};
      {8'd13, 8'd16}: e = '{254, -178, 118351, -22871};

      default: e = '{0, 0, 0, 0};
      // workload 16
      {8'd16, 8'd0}: e = '{0, -34, 262, 0};
      {8'd16, 8'd1}: e = '{81, -92, 294, -5};
      {8'd16, 8'd2}: e = '{128, -39, 247, 5};
      {8'd16, 8'd3}: e = '{148, -81, 282, -2};
      {8'd16, 8'd4}: e = '{180, 106, -3, 106};
      {8'd16, 8'd5}: e = '{202, 24, 102, 74};
      {8'd16, 8'd6}: e = '{224, -68, 245, 19};
      {8'd16, 8'd7}: e = '{252, 129, -64, 132};
      // workload 17
      {8'd17, 8'd0}: e = '{0, -84, 87, 128};
      {8'd17, 8'd1}: e = '{13, 16, 58, 129};
      {8'd17, 8'd2}: e = '{82, 68, 10, 139};
      {8'd17, 8'd3}: e = '{119, 21, 27, 141};
      {8'd17, 8'd4}: e = '{129, 44, 5, 147};
      {8'd17, 8'd5}: e = '{151, -140, 239, 73};
      {8'd17, 8'd6}: e = '{182, -52, 136, 102};
      {8'd17, 8'd7}: e = '{209, 48, -33, 174};
      {8'd17, 8'd8}: e = '{231, -48, 142, 94};
      {8'd17, 8'd9}: e = '{253, 21, 27, 141};
      // workload 18
      {8'd18, 8'd0}: e = '{0, -64, 87, 128};
      {8'd18, 8'd1}: e = '{13, 16, 58, 129};
      {8'd18, 8'd2}: e = '{82, -64, 102, 123};
      {8'd18, 8'd3}: e = '{101, -128, 173, 105};
      {8'd18, 8'd4}: e = '{121, 0, 33, 143};
      {8'd18, 8'd5}: e = '{129, 64, -6, 147};
      {8'd18, 8'd6}: e = '{149, -4, 61, 131};
      {8'd18, 8'd7}: e = '{181, -64, 153, 96};
      {8'd18, 8'd8}: e = '{199, 64, -46, 173};
      {8'd18, 8'd9}: e = '{209, 4, 45, 139};
      {8'd18, 8'd10}: e = '{228, 8, 47, 134};
      {8'd18, 8'd11}: e = '{242, 32, -11, 167};
      {8'd18, 8'd12}: e = '{253, -4, 61, 131};
    endcase
    return e[f];
  endfunction

  function automatic longint floor_div(longint n, longint d);
    if (n >= 0) return n / d;
    return -((-n + d - 1) / d);
  endfunction

  function automatic int seg_of(int xv);
    int r = 0;
    for (int s = 1; s < SEGS; s++) if (xv >= tab(s, 0)) r = s;
    return r;
  endfunction

  function automatic longint pow2(int e);
    return longint'(1) << e;
  endfunction

  // Integer model of the datapath, result in units of 2^-Y_F.
  function automatic longint model(int xv);
    int s;
    longint p1, s1, pn;
    s  = seg_of(xv);
    p1 = floor_div(longint'(tab(s, 1)) * xv, pow2(WA1 + 8 - WO1));
    if (ORDER == 1) begin
      pn = p1;
    end else begin
      s1 = p1 * pow2(WM2 - WO1) + longint'(tab(s, 2)) * pow2(WM2 - WA2);
      pn = floor_div(s1 * xv, pow2(WM2 + 8 - WO2));
    end
    return pn * pow2(Y_F - PN_F) + longint'(tab(s, 3)) * pow2(Y_F - WB);
  endfunction

  // a1 as a signed number, or as sign-magnitude shift terms.
  function automatic logic [A1W-1:0] a1_field(int a);
    logic [A1W-1:0] c = '0;
    int mag, k;
    if (SHIFTERS == 0) return A1W'(a);
    mag = (a < 0) ? -a : a;
    k = 0;
    for (int bitpos = WA1; bitpos >= 0; bitpos--) begin
      if (mag[bitpos] && k < SHIFTERS) begin
        c[k*TW +: TW] = {1'b1, (a < 0), SH_W'(WA1 - bitpos)};
        k++;
      end
    end
    return c;
  endfunction

  function automatic real f_of(int xv);
    real t = real'(xv) / 256.0;
    if (FN == 0) return 1.0 / (1.0 + $exp(-t));
    return ($exp(2.0 * t) - 1.0) / ($exp(2.0 * t) + 1.0);
  endfunction

  function automatic int hweight(int v);
    int n = 0;
    for (int k = 0; k < 31; k++) n += (v >> k) & 1;
    return n;
  endfunction

  // Greedy order-1 search of the quantized coefficient space, used when SEARCH
  // is set instead of a stored table. Every a1 in [0, 1] (Hamming weight <=
  // SHIFTERS for shift-add schemes) is a candidate. For each candidate the
  // interval of b that keeps |y - f(x)| <= MAE_BOUND over the segment so far is
  // narrowed one input at a time; the segment ends when no candidate has a
  // non-empty interval left, and the first surviving candidate is taken with
  // the middle of its interval. Unused segments repeat the last one from
  // start point 255.
  localparam int NC   = (1 << WA1) + 1;
  localparam int WOF  = (WO1 > WB) ? WO1 : WB;
  longint c_lo [NC];
  longint c_hi [NC];
  bit     c_ok [NC];

  task automatic search_o1();
    int     sp, xv, n, alive, pick;
    longint lo, hi, pn, g, nlo, nhi;
    g  = pow2(WOF - WB);
    sp = 0;
    n  = 0;
    while (sp < 256) begin
      for (int a = 0; a < NC; a++) begin
        c_ok[a] = (SHIFTERS == 0) || (hweight(a) <= SHIFTERS);
        c_lo[a] = -pow2(40);
        c_hi[a] = pow2(40);
      end
      xv = sp;
      while (xv < 256) begin
        lo = longint'($ceil((f_of(xv) - MAE_BOUND) * real'(pow2(WOF))));
        hi = longint'($floor((f_of(xv) + MAE_BOUND) * real'(pow2(WOF))));
        alive = 0;
        for (int a = 0; a < NC; a++) begin
          if (c_ok[a]) begin
            pn  = floor_div(longint'(a) * xv, pow2(WA1 + 8 - WO1)) * pow2(WOF - WO1);
            nlo = -floor_div(-(lo - pn), g);
            nhi = floor_div(hi - pn, g);
            if (nlo < c_lo[a]) nlo = c_lo[a];
            if (nhi > c_hi[a]) nhi = c_hi[a];
            if (nlo <= nhi) alive++;
          end
        end
        if (alive == 0) break;
        for (int a = 0; a < NC; a++) begin
          if (c_ok[a]) begin
            pn  = floor_div(longint'(a) * xv, pow2(WA1 + 8 - WO1)) * pow2(WOF - WO1);
            nlo = -floor_div(-(lo - pn), g);
            nhi = floor_div(hi - pn, g);
            if (nlo > c_lo[a]) c_lo[a] = nlo;
            if (nhi < c_hi[a]) c_hi[a] = nhi;
            if (c_lo[a] > c_hi[a]) c_ok[a] = 1'b0;
          end
        end
        xv++;
      end
      pick = -1;
      for (int a = 0; a < NC; a++) if (c_ok[a] && pick < 0) pick = a;
      if (pick < 0 || n >= SEGS) begin
        n = SEGS + 1;
        break;
      end
      gtab[n] = '{sp, pick, 0, int'((c_lo[pick] + c_hi[pick]) >>> 1)};
      n++;
      sp = xv;
    end
    found_segs = n;
    for (int s = n; s < SEGS; s++) begin
      gtab[s] = gtab[n - 1];
      gtab[s][0] = 255;
    end
  endtask

  task automatic cfg_write(cfg_sel_e sel, int addr, logic [31:0] data);
    cfg.we = 1'b1; cfg.sel = sel; cfg.addr = 8'(addr); cfg.data = data;
    @(posedge clk); #1;
    cfg.we = 1'b0;
  endtask

  int expect_x [$];
  int ent_of [SEGS];
  int n_ent;

  always @(negedge clk) begin
    if (rst_n && out_valid) begin
      int  xv;
      real err;
      xv = expect_x.pop_front();
      checks++;
      if (longint'(y_out) != model(xv) || int'(seg_out) != seg_of(xv)) begin
        failures++;
        if (failures < 5)
          $display("%m: x=%0d y=%0d seg=%0d expected %0d seg %0d", xv, y_out, seg_out,
                   model(xv), seg_of(xv));
      end
      err = real'(y_out) / real'(pow2(Y_F)) - f_of(xv);
      if (err < 0) err = -err;
      if (err > max_err) max_err = err;
      checks++;
      if (err > MAE_BOUND * (1.0 + 1e-6)) begin
        failures++;
        if (failures < 5) $display("%m: x=%0d error %g", xv, err);
      end
    end
  end

  initial begin
    checks = 0; failures = 0; max_err = 0.0; done = 1'b0;
    rst_n = 1'b0; cfg = '0; in_valid = 1'b0; x_in = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    if (SEARCH) begin
      search_o1();
      $display("%m: search found %0d segments", found_segs);
      checks++;
      if (ORDER != 1 || found_segs != SEG_EXPECT) begin
        failures++;
        $display("%m: search gave %0d segments, expected %0d", found_segs, SEG_EXPECT);
      end
    end
    // Segments with identical coefficient sets get one entry each set.
    n_ent = 0;
    for (int s = 0; s < SEGS; s++) begin
      ent_of[s] = -1;
      for (int t = 0; t < s; t++)
        if (ent_of[s] < 0 && tab(t, 1) == tab(s, 1) && tab(t, 2) == tab(s, 2) &&
            tab(t, 3) == tab(s, 3))
          ent_of[s] = ent_of[t];
      if (ent_of[s] < 0 || ENTRIES == SEGS) begin
        ent_of[s] = n_ent;
        n_ent++;
      end
    end
    checks++;
    if (n_ent > ENTRIES) begin
      failures++;
      $display("%m: table needs %0d entries, memory has %0d", n_ent, ENTRIES);
    end
    if (ENTRIES < SEGS) $display("%m: %0d segments stored in %0d entries", SEGS, n_ent);
    for (int s = 0; s < SEGS; s++) begin
      if (s > 0) cfg_write(CFG_BREAK, s, 32'(tab(s, 0)));
      if (ENTRIES < SEGS) cfg_write(CFG_MAP, s, 32'(ent_of[s]));
      cfg_write(CFG_A1, ent_of[s], 32'(a1_field(tab(s, 1))));
      cfg_write(CFG_A2, ent_of[s], 32'(tab(s, 2)));
      cfg_write(CFG_B,  ent_of[s], 32'(tab(s, 3)));
    end
    for (int xv = 0; xv < 256; xv++) begin
      in_valid = 1'b1;
      x_in = 8'(xv);
      expect_x.push_back(xv);
      @(posedge clk); #1;
    end
    in_valid = 1'b0;
    repeat (4) @(posedge clk);
    checks++;
    if (expect_x.size() != 0) failures++;
    done = 1'b1;
  end
endmodule
