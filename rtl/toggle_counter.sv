// toggle_counter: counts signal transitions on a bundle of internal nets
// while scan enable is high.
//
// At every rising clock edge the nets are compared with the values they had
// at the previous edge; the number of bits that differ is added to count
// when en is 1 at that edge. The previous-value register is updated at every
// edge, so a transition is charged to the clock period in which it settles.
// clr (synchronous) sets the count to 0. The count saturates at its maximum
// rather than wrapping. Latency: count shows the toggles of a period one
// clock after the edge that ends the period.
//
// The paper uses a counter of the toggles during scan shift to find the
// power-sensitive scan cells; it does not describe the counter's insides.
// Sampling once per clock (so glitches are not counted), the synchronous
// clear and saturation are this design's choices.
module toggle_counter #(
  parameter int unsigned WIDTH = 10,
  parameter int unsigned CNT_W = 16
) (
  input  logic             clk,
  input  logic             clr,
  input  logic             en,
  input  logic [WIDTH-1:0] nets,
  output logic [CNT_W-1:0] count
);

  localparam int unsigned INC_W = $clog2(WIDTH + 1);

  logic [WIDTH-1:0] prev_q;
  logic [INC_W-1:0] inc;
  logic [CNT_W:0]   sum;

  always_comb begin
    inc = '0;
    for (int i = 0; i < int'(WIDTH); i++) begin
      inc = inc + INC_W'(nets[i] ^ prev_q[i]);
    end
    sum = {1'b0, count} + (CNT_W + 1)'(inc);
  end

  always_ff @(posedge clk) begin
    prev_q <= nets;
    if (clr) begin
      count <= '0;
    end else if (en) begin
      count <= sum[CNT_W] ? '1 : sum[CNT_W-1:0];
    end
  end

endmodule
