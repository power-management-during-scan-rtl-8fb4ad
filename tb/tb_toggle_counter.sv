// tb_toggle_counter: checks the toggle counter.
//
// Random 10-bit net values, enable and occasional clears are driven for 600
// clocks into a 16-bit counter; the count after every rising edge is
// compared with a model that adds the Hamming distance between successive
// samples while en is 1. A 4-bit counter fed the same stimulus checks that
// the count saturates at 15 instead of wrapping.
module tb_toggle_counter;

  logic        clk = 1'b0;
  logic        clr, en;
  logic [9:0]  nets;
  logic [15:0] count;
  logic [3:0]  count4;
  int          checks = 0;
  int          failures = 0;
  int          sat_seen = 0;

  always #5 clk = ~clk;

  toggle_counter dut (.clk(clk), .clr(clr), .en(en), .nets(nets), .count(count));
  toggle_counter #(.WIDTH(10), .CNT_W(4)) dut4 (
    .clk(clk), .clr(clr), .en(en), .nets(nets), .count(count4)
  );

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures <= 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    int       model;
    int       model4;
    bit [9:0] prev;
    int       d;
    clr = 1; en = 0; nets = '0;
    @(posedge clk);  // clear and take a first sample
    @(negedge clk);
    prev = nets; model = 0; model4 = 0;
    for (int i = 0; i < 600; i++) begin
      @(negedge clk);
      nets = 10'($urandom);
      en   = ($urandom % 4) != 0;
      clr  = ($urandom % 100) == 0;
      d = 0;
      for (int b = 0; b < 10; b++) d += int'(nets[b] ^ prev[b]);
      if (clr) begin
        model = 0; model4 = 0;
      end else if (en) begin
        model += d;
        model4 = (model4 + d > 15) ? 15 : model4 + d;
      end
      prev = nets;
      @(posedge clk);
      #1;
      check(count == 16'(model), "count");
      check(count4 == 4'(model4), "saturating count");
      if (count4 == 4'd15) sat_seen++;
    end
    check(sat_seen > 0, "saturation reached");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
