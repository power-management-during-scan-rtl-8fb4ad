// s27_scan_tester: scan-test driver and checker for one s27_scan_top.
//
// It plays the part of a tester. First a chain test: the stream 0,1,0 is
// shifted into every chain and shifted out again (for one chain the unload
// must read 1,0,1, the inversion of the load, since every cell passes on its
// complement). Then NPAT scan patterns: each one shifts a pseudo-random
// state into the cells while the previous response is shifted out, applies
// pseudo-random primary inputs, and pulses one capture clock with scan_en
// low. A final unload ends the test. The patterns come from a fixed linear
// congruential sequence seeded by SEED, so testers with the same SEED apply
// the same patterns whatever their chain configuration.
//
// Every cycle it predicts G17, every scan_out bit and the toggle count from
// the reference model in s27_ref_pkg (total and per flip-flop path), with the freeze mask MASK applied
// while shifting, and counts a failure for each mismatch. Inputs are driven
// on the falling clock edge and outputs compared just before the rising one;
// the toggle count is compared just after it. It also counts the clocks and
// how often each mechanism occurred: shift clocks, capture clocks, shift
// clocks in which a frozen cell held a 1 (so the freeze gate changed what
// the logic saw), and shift clocks with at least one internal toggle.
// test_clocks is the number of clocks from the first pattern load to the
// end of the final unload: NPAT * (L + 1) + L for a longest chain of L cells.
module s27_scan_tester
  import s27_ref_pkg::*;
#(
  parameter int          NCH  = 3,
  parameter bit [2:0]    MASK = 3'b010,
  parameter int          NPAT = 16,
  parameter int unsigned SEED = 1
) (
  input  logic           CLK,
  output logic           G0,
  output logic           G1,
  output logic           G2,
  output logic           G3,
  output logic [NCH-1:0] scan_in,
  output logic           scan_en,
  output logic           toggle_clr,
  input  logic           G17,
  input  logic [NCH-1:0] scan_out,
  input  logic [15:0]    toggle_count,
  input  logic [2:0][15:0] path_toggle_count,
  output logic           done,
  output int             checks,
  output int             failures,
  output int             clocks,
  output int             shift_clocks,
  output int             captures,
  output int             freeze_events,
  output int             toggle_clocks,
  output int             toggles,
  output int             path_toggles [3],
  output int             test_clocks
);

  bit [2:0]    m_state;
  bit [9:0]    m_prev;
  int          lmax;
  int unsigned lcg;
  bit [3:0]    pis;
  bit          unload_bits[$];
  bit          checking;

  function automatic int unsigned next_rand();
    lcg = lcg * 32'd1664525 + 32'd1013904223;
    return lcg >> 16;
  endfunction

  task automatic check(bit ok, string what);
    if (!checking) return;
    checks++;
    if (!ok) begin
      failures++;
      if (failures <= 10) $display("[%m] FAIL %s at clock %0d", what, clocks);
    end
  endtask

  // One clock: drive scan_en, the scan inputs and clr, compare, clock, update.
  task automatic cycle(bit se, bit [NCH-1:0] sin, bit clr);
    ref_t     r;
    bit [2:0] seen;
    bit [2:0] nxt;
    @(negedge CLK);
    {G3, G2, G1, G0} = pis;
    scan_en    = se;
    scan_in    = sin;
    toggle_clr = clr;
    #1;
    seen = se ? (m_state & ~MASK) : m_state;
    r = s27_eval(pis[0], pis[1], pis[2], pis[3], seen);
    check(G17 == r.g17, "G17");
    for (int c = 0; c < NCH; c++) begin
      check(scan_out[c] == !m_state[chain_cell(NCH, c, chain_len(NCH, c) - 1)], "scan_out");
    end
    if (NCH == 1 && se) unload_bits.push_back(scan_out[0]);
    if (checking && se && (m_state & MASK) != 0) freeze_events++;
    @(posedge CLK);
    clocks++;
    if (se) begin
      shift_clocks++;
      nxt = m_state;
      for (int c = 0; c < NCH; c++) begin
        nxt[chain_cell(NCH, c, 0)] = sin[c];
        for (int p = 1; p < chain_len(NCH, c); p++) begin
          nxt[chain_cell(NCH, c, p)] = !m_state[chain_cell(NCH, c, p - 1)];
        end
      end
      m_state = nxt;
    end else begin
      captures++;
      m_state = r.next;
    end
    if (clr) begin
      toggles = 0;
      for (int p = 0; p < 3; p++) path_toggles[p] = 0;
    end else if (se) begin
      toggles += popcount(32'(r.nets ^ m_prev));
      for (int p = 0; p < 3; p++) path_toggles[p] += popcount(32'((r.nets ^ m_prev) & REF_PATH[p]));
      if (r.nets != m_prev) toggle_clocks++;
    end
    m_prev = r.nets;
    #1;
    check(toggle_count == 16'(toggles), "toggle_count");
    for (int p = 0; p < 3; p++) check(path_toggle_count[p] == 16'(path_toggles[p]), "path_toggle_count");
  endtask

  // Shift lmax clocks so that the cells end holding target.
  task automatic load(bit [2:0] target);
    bit [NCH-1:0] sin;
    for (int k = 1; k <= lmax; k++) begin
      sin = '0;
      for (int c = 0; c < NCH; c++) begin
        int p;
        p = lmax - k;
        if (p < chain_len(NCH, c)) sin[c] = target[chain_cell(NCH, c, p)] ^ bit'(p & 1);
      end
      cycle(1'b1, sin, 1'b0);
    end
    check(m_state == target, "model load");
  endtask

  initial begin
    done = 0; checks = 0; failures = 0; clocks = 0; shift_clocks = 0;
    captures = 0; freeze_events = 0; toggle_clocks = 0; toggles = 0;
    path_toggles = '{0, 0, 0};
    test_clocks = 0;
    G0 = 0; G1 = 0; G2 = 0; G3 = 0; scan_in = '0; scan_en = 1; toggle_clr = 1;
    lcg  = SEED;
    pis  = '0;
    lmax = 0;
    for (int c = 0; c < NCH; c++) if (chain_len(NCH, c) > lmax) lmax = chain_len(NCH, c);
    m_prev = '0;

    // Flush: the cells start unknown, so shift lmax clocks of zeros with the
    // checks off and the toggle counter held clear. Afterwards the cell at
    // position p of a chain holds p mod 2 (one inversion per cell passed).
    checking = 0;
    for (int k = 0; k < lmax; k++) cycle(1'b1, '0, 1'b1);
    for (int c = 0; c < NCH; c++) begin
      for (int p = 0; p < chain_len(NCH, c); p++) begin
        m_state[chain_cell(NCH, c, p)] = bit'(p & 1);
      end
    end
    checking = 1;

    // Chain test: load 0,1,0 on every chain, then unload it.
    unload_bits.delete();
    for (int k = 0; k < 3; k++) cycle(1'b1, {NCH{bit'(k == 1)}}, k == 0);
    unload_bits.delete();
    for (int k = 0; k < 3; k++) cycle(1'b1, '0, 1'b0);
    if (NCH == 1) begin
      check(unload_bits.size() == 3 && unload_bits[0] == 1 && unload_bits[1] == 0
            && unload_bits[2] == 1, "chain test unload 101");
    end

    // Scan patterns.
    test_clocks = clocks;
    for (int i = 0; i < NPAT; i++) begin
      bit [2:0] target;
      target = 3'(next_rand());
      pis    = 4'(next_rand());
      load(target);
      cycle(1'b0, '0, 1'b0);  // capture
    end
    // Final unload.
    for (int k = 0; k < lmax; k++) cycle(1'b1, '0, 1'b0);
    test_clocks = clocks - test_clocks;
    done = 1;
  end

endmodule
