// tb_chain_compare: shift-power and test-time comparison of the scan
// configurations.
//
// Five copies of s27_scan_top are driven in parallel, each by its own
// s27_scan_tester with the same seed, so all apply the same scan patterns:
//   A: one chain, no freezing      (plain scan insertion)
//   B: one chain, reg_d_out_1 frozen
//   C: three chains, no freezing
//   D: three chains, reg_d_out_1 frozen (the default configuration)
//   E: two chains, reg_d_out_1 frozen
// The test set is run twice: 8 patterns (the size of the s27 stuck-at test
// set) and 256 patterns. Every copy checks itself cycle by cycle. The bench
// then checks the test length of each chain count, NPAT * (L + 1) + L clocks
// for a longest chain of L cells, and, on the 256-pattern set, that freezing
// lowers the shift toggle count of the single chain. It prints all counts.
// Freezing does not always pay: every switch from capture to shift drops the
// frozen net to 0, and that toggle is counted while scan enable is high.
// With chains of one cell there is one shift per pattern, so this cost can
// exceed what the freeze saves; the printed numbers show it.
module tb_chain_compare;

  localparam int NCFG = 5;
  localparam int NSET = 2;

  logic CLK = 1'b0;
  always #5 CLK = ~CLK;

  int checks = 0;
  int failures = 0;

  // Per set and configuration results.
  logic done      [NSET][NCFG];
  int   t_checks  [NSET][NCFG];
  int   t_fail    [NSET][NCFG];
  int   tclk      [NSET][NCFG];
  int   togg      [NSET][NCFG];
  int   frz       [NSET][NCFG];
  int   unused_i  [NSET][NCFG][5];
  int   ptog      [NSET][NCFG][3];

  localparam int       CFG_NCH  [NCFG] = '{1, 1, 3, 3, 2};
  localparam bit [2:0] CFG_MASK [NCFG] = '{3'b000, 3'b010, 3'b000, 3'b010, 3'b010};
  localparam int       SET_NPAT [NSET] = '{8, 256};

  for (genvar s = 0; s < NSET; s++) begin : g_set
    for (genvar k = 0; k < NCFG; k++) begin : g_cfg
      localparam int NCH = CFG_NCH[k];
      logic           G0, G1, G2, G3, scan_en, toggle_clr, G17;
      logic [NCH-1:0] scan_in, scan_out;
      logic [15:0]    toggle_count;
      logic [2:0][15:0] path_toggle_count;

      s27_scan_top #(.NUM_CHAINS(NCH), .FREEZE_MASK(CFG_MASK[k])) dut (
        .CLK(CLK), .G0(G0), .G1(G1), .G2(G2), .G3(G3), .scan_in(scan_in),
        .scan_en(scan_en), .toggle_clr(toggle_clr), .G17(G17),
        .scan_out(scan_out), .toggle_count(toggle_count),
        .path_toggle_count(path_toggle_count)
      );

      s27_scan_tester #(.NCH(NCH), .MASK(CFG_MASK[k]), .NPAT(SET_NPAT[s]), .SEED(11 + s)) tester (
        .CLK(CLK), .G0(G0), .G1(G1), .G2(G2), .G3(G3), .scan_in(scan_in),
        .scan_en(scan_en), .toggle_clr(toggle_clr), .G17(G17),
        .scan_out(scan_out), .toggle_count(toggle_count),
        .path_toggle_count(path_toggle_count), .path_toggles(ptog[s][k]),
        .done(done[s][k]), .checks(t_checks[s][k]), .failures(t_fail[s][k]),
        .clocks(unused_i[s][k][0]), .shift_clocks(unused_i[s][k][1]),
        .captures(unused_i[s][k][2]), .freeze_events(frz[s][k]),
        .toggle_clocks(unused_i[s][k][3]), .toggles(togg[s][k]),
        .test_clocks(tclk[s][k])
      );
    end
  end

  task automatic expect_true(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  function automatic int lmax_of(int nch);
    return (nch == 1) ? 3 : (nch == 2) ? 2 : 1;
  endfunction

  initial begin
    bit all_done;
    do begin
      @(negedge CLK);
      all_done = 1;
      for (int s = 0; s < NSET; s++) for (int k = 0; k < NCFG; k++) all_done &= done[s][k];
    end while (!all_done);
    for (int s = 0; s < NSET; s++) begin
      $display("patterns=%0d", SET_NPAT[s]);
      for (int k = 0; k < NCFG; k++) begin
        int l;
        l = lmax_of(CFG_NCH[k]);
        $display("  chains=%0d freeze_mask=%03b test_clocks=%0d shift_toggles=%0d (paths 1-0 %0d, 2-0 %0d, 2-1 %0d) freeze_events=%0d",
                 CFG_NCH[k], CFG_MASK[k], tclk[s][k], togg[s][k], ptog[s][k][0], ptog[s][k][1],
                 ptog[s][k][2], frz[s][k]);
        expect_true(tclk[s][k] == SET_NPAT[s] * (l + 1) + l, "test length");
        expect_true(t_checks[s][k] > 0, "tester ran checks");
        checks   += t_checks[s][k];
        failures += t_fail[s][k];
      end
      $display("  freezing changes shift toggles by %0d%% (one chain) and %0d%% (three chains)",
               (100 * (togg[s][1] - togg[s][0])) / togg[s][0],
               (100 * (togg[s][3] - togg[s][2])) / togg[s][2]);
      if (SET_NPAT[s] >= 256) expect_true(togg[s][1] < togg[s][0], "freezing lowers toggles, one chain");
      expect_true(tclk[s][3] < tclk[s][4] && tclk[s][4] < tclk[s][1], "more chains, shorter test");
      expect_true(frz[s][1] > 0 && frz[s][3] > 0, "freeze gate used");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge CLK);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
