// s27_ref_pkg: reference model of the scan-inserted s27 for the testbenches.
//
// s27_eval evaluates the ISCAS'89 s27 benchmark, written here in the form of
// its .bench description (G14 = NOT(G0), G8 = AND(G14, G6), ...), and
// returns the next state {G13, G11, G10}, output G17 and the internal nets
// in the same order as s27_scan_pkg::s27_nets_t. chain_len and chain_cell
// describe the scan chain stitching of every chain configuration: position
// 0 is the cell next to the scan input. The testbenches use these to
// predict, cycle by cycle, what the design must show.
package s27_ref_pkg;

  typedef struct packed {
    bit [2:0] next;   // {G13, G11, G10}
    bit       g17;
    bit [9:0] nets;   // {G17, G16, G15, G14, G13, G12, G11, G10, G9, G8}
  } ref_t;

  function automatic ref_t s27_eval(bit g0, bit g1, bit g2, bit g3, bit [2:0] st);
    bit G5, G6, G7, G8, G9, G10, G11, G12, G13, G14, G15, G16, G17;
    ref_t r;
    G5  = st[0];
    G6  = st[1];
    G7  = st[2];
    G14 = !g0;
    G12 = !(g1 || G7);
    G8  = G14 && G6;
    G15 = G12 || G8;
    G16 = g3 || G8;
    G9  = !(G16 && G15);
    G11 = !(G5 || G9);
    G10 = !(G14 || G11);
    G13 = !(g2 || G12);
    G17 = !G11;
    r.next = {G13, G11, G10};
    r.g17  = G17;
    r.nets = {G17, G16, G15, G14, G13, G12, G11, G10, G9, G8};
    return r;
  endfunction

  // Nets of each flip-flop to flip-flop path, bit order as in ref_t.nets:
  // Dff_1->Dff_0 {G8,G16,G15,G9,G11,G10}, Dff_2->Dff_0 {G12,G15,G9,G11,G10},
  // Dff_2->Dff_1 {G12,G15,G9,G11}.
  localparam bit [9:0] REF_PATH [3] = '{10'b0110001111, 10'b0010011110, 10'b0010011010};

  function automatic int popcount(bit [31:0] v);
    int n = 0;
    for (int i = 0; i < 32; i++) n += int'(v[i]);
    return n;
  endfunction

  // Number of cells on chain c when the design has nch chains.
  function automatic int chain_len(int nch, int c);
    if (nch == 1) return 3;
    if (nch == 2) return (c == 0) ? 2 : 1;
    return 1;
  endfunction

  // Cell index (reg_d_out_<index>) at position p of chain c.
  function automatic int chain_cell(int nch, int c, int p);
    if (nch == 1) return 2 - p;
    if (nch == 2) return (c == 0) ? 1 - p : 2;
    return c;
  endfunction

endpackage
