// tb_freeze_gate: exhaustive check of the freeze gating.
//
// For the default mask (reg_d_out_1 frozen) and a second mask freezing cells
// 0 and 2, every combination of se and q is applied. With se = 1 the masked
// bits must read 0 and the others pass; with se = 0 every bit passes.
module tb_freeze_gate;

  logic       se;
  logic [2:0] q, q_def, q_alt;
  int         checks = 0;
  int         failures = 0;

  freeze_gate dut_def (.se(se), .q(q), .q_func(q_def));
  freeze_gate #(.N(3), .FREEZE_MASK(3'b101)) dut_alt (.se(se), .q(q), .q_func(q_alt));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures <= 10) $display("FAIL %s se=%0b q=%03b", what, se, q);
    end
  endtask

  initial begin
    for (int v = 0; v < 16; v++) begin
      {se, q} = 4'(v);
      #1;
      check(q_def == (se ? {q[2], 1'b0, q[0]} : q), "default mask");
      check(q_alt == (se ? {1'b0, q[1], 1'b0} : q), "mask 101");
    end
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
