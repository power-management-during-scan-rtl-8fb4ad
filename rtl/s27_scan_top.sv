// s27_scan_top: scan-inserted ISCAS s27 with shift-power reduction.
//
// The three s27 flip-flops are mux-D scan cells (scan_dff). While scan_en is
// 1 every clock shifts the scan chains; while scan_en is 0 a clock captures
// the next state of the combinational cloud (s27_comb) into the cells.
// Two measures cut the power spent while shifting:
//  * Freezing: the functional output of each power-sensitive cell (mask
//    FREEZE_MASK, by default reg_d_out_1, net G6) goes through freeze_gate,
//    which holds it at 0 while scan_en is 1, so the bits shifting through
//    that cell do not toggle the logic it drives (G8, G15, G16, G9, ...).
//  * Multiple scan chains: NUM_CHAINS = 1, 2 or 3 chains of total length 3
//    shorten every load and unload from 3 shift clocks to 2 or 1.
// Chain stitching, scan cell k of chain c driven from scan_in[c]:
//   1 chain : scan_in[0] -> reg_d_out_2 -> reg_d_out_1 -> reg_d_out_0 -> scan_out[0]
//   2 chains: scan_in[0] -> reg_d_out_1 -> reg_d_out_0 -> scan_out[0]
//             scan_in[1] -> reg_d_out_2 -> scan_out[1]
//   3 chains: scan_in[c] -> reg_d_out_c -> scan_out[c], with c = 0, 1, 2
// Each cell passes its complement QB on along the chain, so a bit is
// inverted once per cell it leaves. scan_in[c] and scan_out[c] are the pins
// scan_in<c+1> and scan_out<c+1>.
// A toggle_counter adds up, over the clocks at which scan_en is 1, how many
// of the internal nets G8..G17 changed since the previous clock; toggle_clr
// clears it synchronously. Three more counters do the same for the nets on
// each flip-flop to flip-flop path (s27_scan_pkg::PATH_NETS):
// path_toggle_count[0] for Dff_1 -> Dff_0, [1] for Dff_2 -> Dff_0 and [2]
// for Dff_2 -> Dff_1, the breakdown of the source's toggle tables.
//
// Timing: all state changes on the rising edge of CLK. scan_out shows the
// last cell of each chain directly (no output register); G17 is
// combinational from the inputs and the (gated) state.
//
// What follows the paper: the s27 gates and the single-chain stitching are
// those of the scan-inserted netlist; the freeze gate (an AND with inverted
// scan enable on G6) and the 1- and 3-chain variants come from its figures.
// The 2-chain grouping and which cell sits on which chain of the 3-chain
// variant are read from pin labels in the paper's schematics, not from
// traced wires, and are this design's choice. Bringing the toggle count out
// as a port is also this design's own: the paper counts toggles in a
// simulation testbench.
module s27_scan_top
  import s27_scan_pkg::*;
#(
  parameter int unsigned       NUM_CHAINS  = 3,
  parameter logic [NUM_FF-1:0] FREEZE_MASK = 3'b010,
  parameter int unsigned       CNT_W       = 16
) (
  input  logic                  CLK,
  input  logic                  G0,
  input  logic                  G1,
  input  logic                  G2,
  input  logic                  G3,
  input  logic [NUM_CHAINS-1:0] scan_in,
  input  logic                  scan_en,
  input  logic                  toggle_clr,
  output logic                  G17,
  output logic [NUM_CHAINS-1:0] scan_out,
  output logic [CNT_W-1:0]      toggle_count,
  output logic [NUM_PATHS-1:0][CNT_W-1:0] path_toggle_count
);

  logic [NUM_FF-1:0] q;       // {G7, G6, G5}
  logic [NUM_FF-1:0] qb;      // scan outputs of the cells
  logic [NUM_FF-1:0] si;      // scan inputs of the cells
  logic [NUM_FF-1:0] d;       // {G13, G11, G10}
  logic [NUM_FF-1:0] q_func;  // state seen by the logic: {G7, G18, G5}
  s27_nets_t         nets;

  // Scan chain stitching.
  generate
    if (NUM_CHAINS == 1) begin : g_one_chain
      assign si[2]       = scan_in[0];
      assign si[1]       = qb[2];
      assign si[0]       = qb[1];
      assign scan_out[0] = qb[0];
    end else if (NUM_CHAINS == 2) begin : g_two_chains
      assign si[1]       = scan_in[0];
      assign si[0]       = qb[1];
      assign scan_out[0] = qb[0];
      assign si[2]       = scan_in[1];
      assign scan_out[1] = qb[2];
    end else if (NUM_CHAINS == 3) begin : g_three_chains
      assign si       = scan_in;
      assign scan_out = qb;
    end else begin : g_bad_chains
      $error("s27_scan_top: NUM_CHAINS must be 1, 2 or 3");
    end
  endgenerate

  // Scan cells reg_d_out_0 .. reg_d_out_2.
  for (genvar i = 0; i < int'(NUM_FF); i++) begin : g_reg_d_out
    scan_dff u_sff (
      .CLK (CLK),
      .D   (d[i]),
      .SI  (si[i]),
      .SE  (scan_en),
      .Q   (q[i]),
      .QB  (qb[i])
    );
  end

  freeze_gate #(
    .N           (NUM_FF),
    .FREEZE_MASK (FREEZE_MASK)
  ) u_freeze (
    .se     (scan_en),
    .q      (q),
    .q_func (q_func)
  );

  s27_comb u_comb (
    .g0     (G0),
    .g1     (G1),
    .g2     (G2),
    .g3     (G3),
    .state  (q_func),
    .next_d (d),
    .g17    (G17),
    .nets   (nets)
  );

  toggle_counter #(
    .WIDTH (NUM_NETS),
    .CNT_W (CNT_W)
  ) u_toggles (
    .clk   (CLK),
    .clr   (toggle_clr),
    .en    (scan_en),
    .nets  (nets),
    .count (toggle_count)
  );

  // One more counter per flip-flop pair, fed only the nets on that path.
  for (genvar p = 0; p < int'(NUM_PATHS); p++) begin : g_path_toggles
    toggle_counter #(
      .WIDTH (NUM_NETS),
      .CNT_W (CNT_W)
    ) u_path_toggles (
      .clk   (CLK),
      .clr   (toggle_clr),
      .en    (scan_en),
      .nets  (nets & PATH_NETS[p]),
      .count (path_toggle_count[p])
    );
  end

endmodule
