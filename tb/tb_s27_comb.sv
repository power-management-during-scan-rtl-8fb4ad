// tb_s27_comb: exhaustive check of the s27 combinational logic.
//
// All 128 combinations of G0..G3 and the state {G7, G6, G5} are applied;
// next state, G17 and every internal net are compared with the .bench form
// of s27 in s27_ref_pkg. A few values worked out by hand are checked too.
module tb_s27_comb;
  import s27_scan_pkg::*;
  import s27_ref_pkg::*;

  logic        g0, g1, g2, g3, g17;
  logic [2:0]  state, next_d;
  s27_nets_t   nets;
  int          checks = 0;
  int          failures = 0;

  s27_comb dut (
    .g0(g0), .g1(g1), .g2(g2), .g3(g3), .state(state),
    .next_d(next_d), .g17(g17), .nets(nets)
  );

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures <= 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    ref_t r;
    for (int v = 0; v < 128; v++) begin
      {state, g3, g2, g1, g0} = 7'(v);
      #1;
      r = s27_eval(g0, g1, g2, g3, state);
      check(next_d == r.next, "next state");
      check(g17 == r.g17, "G17");
      check(nets == r.nets, "internal nets");
    end
    // By hand: all inputs and state 0. G14=1, G12=1, G8=0, G15=1, G16=0,
    // G9=1, G11=0, G10=0, G13=0, G17=1.
    {state, g3, g2, g1, g0} = 7'b0;
    #1;
    check(next_d == 3'b000 && g17 == 1'b1, "hand case 0");
    // G0=0, G3=0, G6=1, G5=0, G7=1, G1=0, G2=0: G8=1, G12=0, G15=1, G16=1,
    // G9=0, G11=1, G10=0, G13=1, G17=0.
    g0 = 0; g1 = 0; g2 = 0; g3 = 0; state = 3'b110;
    #1;
    check(next_d == 3'b110 && g17 == 1'b0, "hand case 1");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
