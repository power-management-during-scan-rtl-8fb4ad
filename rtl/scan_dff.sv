// scan_dff: mux-D scan flip-flop, the "sff" cell of the scan-inserted s27.
//
// A 2:1 multiplexer in front of a D flip-flop selects the functional input D
// when SE = 0 (normal operation and capture) and the scan input SI when
// SE = 1 (scan shift). The state is loaded on the rising edge of CLK.
// Q is the state and QB its complement; in the scan-inserted s27 the scan
// chain is stitched through QB, as in the netlist the scan tool produced.
//
// Ports and the Mux + DFF structure follow the paper's cell and figure. The
// cell has no reset pin, so none is added: its state is defined by shifting
// a pattern in, as on a tester.
module scan_dff (
  input  logic CLK,
  input  logic D,
  input  logic SI,
  input  logic SE,
  output logic Q,
  output logic QB
);

  logic state_q;

  always_ff @(posedge CLK) begin
    state_q <= SE ? SI : D;
  end

  assign Q  = state_q;
  assign QB = ~state_q;

endmodule
