// freeze_gate: holds the outputs of power-sensitive scan cells constant
// during scan shift.
//
// For every scan cell i whose bit is set in FREEZE_MASK, an AND gate with its
// second input inverted sits between the cell output Q and the logic it
// drives: q_func[i] = q[i] & ~se. While scan enable se is 1 (shifting) the
// gate output stays at 0, so the bits rippling through that cell do not
// reach the combinational logic. While se is 0 (normal operation and the
// capture clock) q_func[i] = q[i] and the gate has no effect on function.
// Cells whose mask bit is 0 pass straight through. The block is purely
// combinational.
//
// The gate and its place follow the paper: it freezes reg_d_out_1 (G6), the
// cell found most power sensitive in s27, giving net G18 (AND) with G19 the
// inverted scan enable. Making the set of frozen cells a parameter mask is
// this design's own generalisation; the frozen value is always 0, as an AND
// gate gives.
module freeze_gate #(
  parameter int unsigned        N           = 3,
  parameter logic [N-1:0]       FREEZE_MASK = N'(3'b010)
) (
  input  logic         se,
  input  logic [N-1:0] q,
  output logic [N-1:0] q_func
);

  logic se_n;  // G19

  assign se_n = ~se;

  always_comb begin
    for (int i = 0; i < int'(N); i++) begin
      q_func[i] = FREEZE_MASK[i] ? (q[i] & se_n) : q[i];  // G18 for i = 1
    end
  end

  // While shifting, every frozen cell's output must be at its frozen value.
  always_comb begin
    if (se) assert ((q_func & FREEZE_MASK) == '0);
  end

endmodule
