// tb_scan_dff: checks the mux-D scan flip-flop.
//
// Random D, SI and SE are driven on the falling edge for 400 clocks; after
// each rising edge Q must equal SI when SE was 1 and D when SE was 0, and QB
// must be its complement. Both selections must occur.
module tb_scan_dff;

  logic CLK = 1'b0;
  logic D, SI, SE, Q, QB;
  int   checks = 0;
  int   failures = 0;
  int   n_shift = 0;
  int   n_capture = 0;

  always #5 CLK = ~CLK;

  scan_dff dut (.CLK(CLK), .D(D), .SI(SI), .SE(SE), .Q(Q), .QB(QB));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures <= 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    bit exp_q;
    D = 0; SI = 0; SE = 0;
    for (int i = 0; i < 400; i++) begin
      @(negedge CLK);
      D  = 1'($urandom);
      SI = 1'($urandom);
      SE = 1'($urandom);
      exp_q = SE ? SI : D;
      if (SE) n_shift++; else n_capture++;
      @(posedge CLK);
      #1;
      check(Q == exp_q, "Q");
      check(QB == !exp_q, "QB");
    end
    check(n_shift > 0 && n_capture > 0, "both modes used");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000) @(posedge CLK);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
