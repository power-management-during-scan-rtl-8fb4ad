// s27_comb: combinational logic of the ISCAS'89 s27 benchmark.
//
// Ten gates compute the next state of the three flip-flops and the primary
// output G17 from the primary inputs G0..G3 and the flip-flop outputs
// G5 (reg_d_out_0), G6 (reg_d_out_1) and G7 (reg_d_out_2). The gates and
// their instance names are those of the scan-inserted netlist:
//   ix249 inv   G14 = ~G0          ix250 inv   G17 = ~G11
//   ix155 and   G8  = G6 & G14     ix211 or    G15 = G8 | G12
//   ix212 or    G16 = G3 | G8      ix157 nand  G9  = ~(G15 & G16)
//   ix215 nor   G10 = ~(G14|G11)   ix216 nor   G11 = ~(G5 | G9)
//   ix217 nor   G12 = ~(G7 | G1)   ix218 nor   G13 = ~(G2 | G12)
// The next state is next_d = {G13, G11, G10}, the D inputs of reg_d_out_2,
// reg_d_out_1 and reg_d_out_0. The block is purely combinational.
//
// The state input is taken after the freeze gate, so in the low-power
// configuration bit 1 carries G18 (the gated G6) instead of G6. All
// internal nets are brought out in the nets struct for the toggle monitor;
// that port is this design's addition.
module s27_comb
  import s27_scan_pkg::*;
(
  input  logic              g0,
  input  logic              g1,
  input  logic              g2,
  input  logic              g3,
  input  logic [NUM_FF-1:0] state,   // {G7, G6 or G18, G5}
  output logic [NUM_FF-1:0] next_d,  // {G13, G11, G10}
  output logic              g17,
  output s27_nets_t         nets
);

  logic g5, g6, g7;
  logic g8, g9, g10, g11, g12, g13, g14, g15, g16;

  assign g5 = state[0];
  assign g6 = state[1];
  assign g7 = state[2];

  always_comb begin
    g14 = ~g0;                 // ix249 inv02
    g8  = g6 & g14;            // ix155 and02
    g12 = ~(g7 | g1);          // ix217 nor02
    g15 = g8 | g12;            // ix211 or02
    g16 = g3 | g8;             // ix212 or02
    g9  = ~(g15 & g16);        // ix157 nand02
    g11 = ~(g5 | g9);          // ix216 nor02
    g10 = ~(g14 | g11);        // ix215 nor02
    g13 = ~(g2 | g12);         // ix218 nor02
    g17 = ~g11;                // ix250 inv02
  end

  assign next_d = {g13, g11, g10};

  always_comb begin
    nets     = '0;
    nets.g8  = g8;
    nets.g9  = g9;
    nets.g10 = g10;
    nets.g11 = g11;
    nets.g12 = g12;
    nets.g13 = g13;
    nets.g14 = g14;
    nets.g15 = g15;
    nets.g16 = g16;
    nets.g17 = g17;
  end

endmodule
