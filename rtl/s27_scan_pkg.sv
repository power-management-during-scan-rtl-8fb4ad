// s27_scan_pkg: types and constants shared by the scan-inserted s27 design.
//
// The s27 benchmark has three state flip-flops. Index i of every state
// vector is scan cell reg_d_out_i: bit 0 holds G5, bit 1 holds G6 and bit 2
// holds G7, the net names of the ISCAS s27 netlist. s27_nets_t bundles the
// internal combinational nets G8..G17 so that the toggle monitor can watch
// them as one vector, and PATH_NETS selects the nets of each flip-flop to
// flip-flop path whose toggles are counted on their own. The net names follow the benchmark netlist; grouping
// them in a packed struct is this design's own choice.
package s27_scan_pkg;

  // Number of scan flip-flops in s27 (reg_d_out_0 .. reg_d_out_2).
  localparam int unsigned NUM_FF = 3;

  // Internal nets of the combinational cloud, one bit per net.
  typedef struct packed {
    logic g17;
    logic g16;
    logic g15;
    logic g14;
    logic g13;
    logic g12;
    logic g11;
    logic g10;
    logic g9;
    logic g8;
  } s27_nets_t;

  localparam int unsigned NUM_NETS = $bits(s27_nets_t);

  // Flip-flop to flip-flop paths whose toggles are counted separately, with
  // the gates on each path as the source's toggle tables list them:
  //   path 0, Dff_1 -> Dff_0: G8, G16, G15, G9, G11, G10
  //   path 1, Dff_2 -> Dff_0: G12, G15, G9, G11, G10
  //   path 2, Dff_2 -> Dff_1: G12, G15, G9, G11
  // (Dff_k is reg_d_out_k.) The gated net G18 is left out of path 0: it is
  // the freeze gate's output, not part of the s27 logic.
  localparam int unsigned NUM_PATHS = 3;

  typedef logic [NUM_NETS-1:0] net_mask_t;

  localparam net_mask_t PATH_NETS [NUM_PATHS] = '{
    s27_nets_t'{g8: 1'b1, g16: 1'b1, g15: 1'b1, g9: 1'b1, g11: 1'b1, g10: 1'b1, default: 1'b0},
    s27_nets_t'{g12: 1'b1, g15: 1'b1, g9: 1'b1, g11: 1'b1, g10: 1'b1, default: 1'b0},
    s27_nets_t'{g12: 1'b1, g15: 1'b1, g9: 1'b1, g11: 1'b1, default: 1'b0}
  };

endpackage
