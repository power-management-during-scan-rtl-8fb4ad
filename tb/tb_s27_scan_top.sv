// tb_s27_scan_top: end-to-end test of s27_scan_top at its default
// configuration (three scan chains, reg_d_out_1 frozen during shift).
//
// s27_scan_tester runs a chain test and 64 pseudo-random scan patterns
// (load, capture, unload) and checks G17, the scan outputs and the toggle
// count against the reference model every clock. This bench then checks the
// test length, NPAT * (L + 1) + L clocks for chains of length L = 1, and that
// every mechanism happened: shifting, capture, the freeze gate masking a 1
// on the frozen cell, and toggles being counted during shift.
module tb_s27_scan_top;

  localparam int NCH  = 3;
  localparam int NPAT = 64;

  logic           CLK = 1'b0;
  logic           G0, G1, G2, G3, scan_en, toggle_clr, G17;
  logic [NCH-1:0] scan_in, scan_out;
  logic [15:0]    toggle_count;
  logic [2:0][15:0] path_toggle_count;
  int   path_toggles [3];

  logic done;
  int   t_checks, t_failures, clocks, shift_clocks, captures, freeze_events;
  int   toggle_clocks, toggles, test_clocks;
  int   checks = 0;
  int   failures = 0;

  always #5 CLK = ~CLK;

  s27_scan_top dut (
    .CLK          (CLK),
    .G0           (G0),
    .G1           (G1),
    .G2           (G2),
    .G3           (G3),
    .scan_in      (scan_in),
    .scan_en      (scan_en),
    .toggle_clr   (toggle_clr),
    .G17          (G17),
    .scan_out     (scan_out),
    .toggle_count (toggle_count),
    .path_toggle_count (path_toggle_count)
  );

  s27_scan_tester #(.NCH(NCH), .MASK(3'b010), .NPAT(NPAT), .SEED(7)) u_tester (
    .CLK           (CLK),
    .G0            (G0),
    .G1            (G1),
    .G2            (G2),
    .G3            (G3),
    .scan_in       (scan_in),
    .scan_en       (scan_en),
    .toggle_clr    (toggle_clr),
    .G17           (G17),
    .scan_out      (scan_out),
    .toggle_count  (toggle_count),
    .path_toggle_count (path_toggle_count),
    .done          (done),
    .checks        (t_checks),
    .failures      (t_failures),
    .clocks        (clocks),
    .shift_clocks  (shift_clocks),
    .captures      (captures),
    .freeze_events (freeze_events),
    .toggle_clocks (toggle_clocks),
    .toggles       (toggles),
    .path_toggles  (path_toggles),
    .test_clocks   (test_clocks)
  );

  task automatic expect_true(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    wait (done);
    @(negedge CLK);
    expect_true(test_clocks == NPAT * 2 + 1, "test length NPAT*(L+1)+L");
    expect_true(captures == NPAT, "capture count");
    expect_true(shift_clocks > 0, "shift happened");
    expect_true(freeze_events > 0, "freeze gate masked a 1");
    expect_true(toggle_clocks > 0, "toggles counted during shift");
    $display("mechanisms: shifts=%0d captures=%0d freeze_events=%0d toggle_clocks=%0d",
             shift_clocks, captures, freeze_events, toggle_clocks);
    $display("test clocks=%0d shift toggles=%0d paths: 1-0=%0d 2-0=%0d 2-1=%0d", test_clocks,
             toggles, path_toggles[0], path_toggles[1], path_toggles[2]);
    expect_true(path_toggles[0] > 0 && path_toggles[1] > 0 && path_toggles[2] > 0,
                "every path counter counted");
    checks   += t_checks;
    failures += t_failures;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge CLK);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks + t_checks, failures + t_failures);
    $finish;
  end

endmodule
