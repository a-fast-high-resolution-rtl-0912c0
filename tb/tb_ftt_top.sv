// tb_ftt_top: end-to-end run of the whole trigger at its full size (150
// cells, default parameters).
//
// NTRK tracks from the vertex are simulated as pulses on the three wires of
// one cell per trigger layer (the cells at the same phi in all four
// layers). The pattern CAM entry of the track's L1 bin and the LUT entry of
// its fine pattern are loaded through the configuration bus. The pulses are
// timed against the bunch-crossing strobe so that the coarse pattern is
// sampled in exactly one bunch crossing.
//
// Checked, with values worked out here: the L1 multiplicities and t0; the
// hold after l1_keep; the refined segments linked into NTRK four-layer
// tracks with the LUT's kappa-phi and the charge-division z of every wire;
// the tracks' distribution over the four DSP ports (a DSP model with random
// stalls and latency returns a fit with pt = 200 + 40 * kappa MeV, and one
// fit fails); and the L2 multiplicity, pt sum and trigger bits.
// A second event fills all 64 patterns of two layer-1 cells with the same
// hits: 128 segments for a 64-entry layer buffer, so 64 are dropped and
// counted, no track forms and the L2 decision is empty.
// Mechanisms counted, each of which must occur: L1 coincidence, t0,
// front-end hold, merge-tree contention, track linking, load sharing over
// more than one DSP, DSP back-pressure, a failed fit left out, L2 decision,
// segment overflow.
module tb_ftt_top;
  import ftt_pkg::*;

  localparam int NCELL = 150, NTRK = 4, J = 10, F = 2;
  localparam int CW1 = $clog2(K1_BINS * P1_BINS + 1);

  logic clk = 0, rst_n = 0;
  logic [8:0] threshold;
  logic [NCELL-1:0][2:0][7:0] sample_a, sample_b;
  cfg_write_t cfg;
  logic bc_out;
  logic [3:0] l1_cut_lo, l1_cut_hi;
  logic [2:0][CW1-1:0] l1_mult_thr, l1_mult;
  logic [CW1-1:0] l1_t0_min;
  logic l1_t0;
  logic [3:0] l1_trig;
  logic l1_keep, fe_hold;
  l2_track_t [3:0] dsp_trk;
  logic [3:0] dsp_valid, dsp_ready;
  fit_result_t [3:0] dsp_res;
  logic [3:0] dsp_res_valid, dsp_res_ready;
  logic [7:0] l2_n_linked, l2_seg_overflow;
  logic [15:0] l2_link_cycles;
  logic l2_link_done;
  logic [15:0] l2_pt_cut;
  logic [7:0] l2_mult_thr, l2_hi_thr, l2_mult, l2_n_hi;
  logic [21:0] l2_sum_thr, l2_pt_sum;
  logic [3:0] l2_trig;
  logic l2_decision;

  ftt_top dut (.*);

  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 30) $display("FAIL: %s", msg); end
  endtask

  // mechanism counters
  int n_coinc = 0, n_t0 = 0, n_hold = 0, n_contend = 0, n_linked = 0;
  int n_dsp_used = 0, n_backpressure = 0, n_fitfail = 0, n_decision = 0, n_overflow = 0;

  // ---------------------------------------------------------- track setup
  int cell_of [NTRK];      // cell number within layers 1-3
  int k1_of [NTRK];        // L1 kappa bin
  int k2_of [NTRK];        // L2 kappa
  int p2_of [NTRK];        // L2 phi
  int amp_a [3] = '{70, 40, 90};
  int amp_b [3] = '{30, 60, 20};
  int ez [3];

  function automatic int gcell(input int l, input int t);
    return (l < 3) ? l * 30 + cell_of[t] : 90 + 2 * cell_of[t];
  endfunction

  task automatic cfg_write(input int cid, input cfg_target_e tg, input int addr, input logic [65:0] d);
    @(negedge clk);
    cfg.we = 1; cfg.cell_id = 8'(cid); cfg.target = tg; cfg.addr = 12'(addr); cfg.data = d;
    @(negedge clk);
    cfg.we = 0;
  endtask

  // ------------------------------------------------------------ DSP model
  l2_track_t dsp_q [4][$];
  int        dsp_due [4][$];
  int        dsp_cnt [4];
  int        fitted_pt [$];

  always @(negedge clk) if (rst_n) begin
    for (int i = 0; i < 4; i++) begin
      dsp_ready[i] = ($urandom_range(0, 3) != 0);
      if (dsp_valid[i] && !dsp_ready[i]) n_backpressure++;
    end
  end

  always @(posedge clk) if (rst_n) begin
    for (int i = 0; i < 4; i++) begin
      if (dsp_valid[i] && dsp_ready[i]) begin
        dsp_q[i].push_back(dsp_trk[i]);
        dsp_due[i].push_back(cyc + 20 + int'($urandom_range(0, 30)));
        dsp_cnt[i]++;
      end
      if (dsp_res_valid[i] && dsp_res_ready[i]) begin
        void'(dsp_q[i].pop_front());
        void'(dsp_due[i].pop_front());
      end
    end
  end

  always @(negedge clk) begin
    for (int i = 0; i < 4; i++) begin
      dsp_res_valid[i] = 0;
      dsp_res[i] = '0;
      if (dsp_q[i].size() > 0 && cyc >= dsp_due[i][0]) begin
        l2_track_t t;
        t = dsp_q[i][0];
        dsp_res_valid[i] = 1;
        dsp_res[i].trk.pt_mev = 16'(200 + 40 * int'(t.seg[0].kappa));
        dsp_res[i].trk.phi    = t.seg[0].phi;
        dsp_res[i].ok         = (t.seg[0].kappa != 6'(k2_of[1]));
      end
    end
  end

  // ------------------------------------------------------------ monitors
  l2_track_t got_trk [$];
  logic [2:0][CW1-1:0] first_mult;
  logic [3:0] first_trig;
  always @(negedge clk) if (rst_n && l1_mult[0] != 0 && n_coinc == 0) begin
    n_coinc++;
    first_mult = l1_mult;
    first_trig = l1_trig;
  end
  always @(posedge clk) if (rst_n) begin
    if (fe_hold) n_hold++;
    if ($countones(dut.cseg_valid) > 1) n_contend++;
    if (dut.trk_valid && dut.trk_ready) got_trk.push_back(dut.trk);
    if (dut.res_valid && !dut.res.ok) n_fitfail++;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int e_bc, c0, k_hold, exp_mult [3], t_start;
    int exp_n, exp_hi, exp_sum, max_ovf, n_trk_before;
    threshold = 9'd40; sample_a = '0; sample_b = '0; cfg = '0; l1_keep = 0;
    l1_cut_lo = 4'd4; l1_cut_hi = 4'd2; l1_mult_thr = {CW1'(1), CW1'(2), CW1'(3)}; l1_t0_min = CW1'(2);
    l2_pt_cut = 16'd700; l2_mult_thr = 8'd2; l2_hi_thr = 8'd1; l2_sum_thr = 22'd2000;
    for (int i = 0; i < 4; i++) dsp_cnt[i] = 0;
    for (int t = 0; t < NTRK; t++) begin
      cell_of[t] = 3 + 7 * t;
      k1_of[t]   = 2 + 4 * t;          // L1 kappa bins 2, 6, 10, 14
      k2_of[t]   = 5 + 9 * t;
      p2_of[t]   = 60 + 150 * t;
    end
    for (int w = 0; w < 3; w++)
      ez[w] = ((amp_a[w] * 4 - amp_b[w] * 4) * 127) / (amp_a[w] * 4 + amp_b[w] * 4);
    repeat (3) @(negedge clk);
    rst_n = 1;

    // configuration: CAM rows and LUT entries of the track cells
    for (int t = 0; t < NTRK; t++)
      for (int l = 0; l < 4; l++) begin
        int pl, e, a;
        pl = (l < 3) ? 4 : 2;
        e  = k1_of[t] * pl;                  // local phi bin 0
        for (int r = 0; r < 3; r++)
          cfg_write(gcell(l, t), CFG_CAM, (e << 2) | r, 66'(1) << (22 + J - r));
        a = (e << 6) | (F << 4) | (F << 2) | F;
        cfg_write(gcell(l, t), CFG_VALID, a, 66'd1);
        cfg_write(gcell(l, t), CFG_KPHI, a, 66'({6'(k2_of[t]), 10'(p2_of[t])}));
      end

    // align to the bunch-crossing strobe
    @(negedge clk);
    while (!bc_out) @(negedge clk);
    e_bc = cyc;
    c0 = e_bc + 6 + 8;
    while (cyc < c0) @(negedge clk);
    // pulses: wire w of every track cell starts at c0 + 4w
    t_start = cyc;
    for (int s = 0; s < 16; s++) begin
      for (int t = 0; t < NTRK; t++)
        for (int l = 0; l < 4; l++)
          for (int w = 0; w < 3; w++) begin
            int k;
            k = cyc - (c0 + 4 * w);
            sample_a[gcell(l, t)][w] = (k >= 0 && k < 4) ? 8'(amp_a[w]) : 8'd0;
            sample_b[gcell(l, t)][w] = (k >= 0 && k < 4) ? 8'(amp_b[w]) : 8'd0;
          end
      @(negedge clk);
    end
    sample_a = '0; sample_b = '0;

    // expected L1 multiplicities: one linked bin per track
    exp_mult = '{0, 0, 0};
    for (int t = 0; t < NTRK; t++) begin
      int ak;
      ak = (k1_of[t] < 8) ? (7 - k1_of[t]) : (k1_of[t] - 8);
      exp_mult[0]++;
      if (ak < 4) exp_mult[1]++;
      if (ak < 2) exp_mult[2]++;
    end

    // L1 keep so that the image frozen is the one after edge c0+5+4J+F
    k_hold = c0 + 5 + 4 * J + F - 1;
    while (cyc < k_hold) @(negedge clk);
    l1_keep = 1;
    @(negedge clk);
    l1_keep = 0;
    check(fe_hold, "front end not held after l1_keep");
    // the pattern stays matched while held: t0 fires one crossing later
    repeat (24) begin
      @(negedge clk);
      if (l1_t0 && bc_out) n_t0++;
    end
    check(n_coinc > 0, "no L1 coincidence seen");
    check(int'(first_mult[0]) == exp_mult[0] && int'(first_mult[1]) == exp_mult[1] &&
          int'(first_mult[2]) == exp_mult[2],
          $sformatf("L1 mult %0d %0d %0d exp %0d %0d %0d", first_mult[0], first_mult[1], first_mult[2],
                    exp_mult[0], exp_mult[1], exp_mult[2]));
    check(first_trig[3:1] == {exp_mult[2] >= 1, exp_mult[1] >= 2, exp_mult[0] >= 3}, "L1 trigger bits");
    // wait for linking and the decision
    while (!l2_decision && cyc < t_start + 4000) begin
      @(negedge clk);
      if (l2_link_done) begin
        check(int'(l2_n_linked) == NTRK, $sformatf("%0d tracks linked", l2_n_linked));
        check(l2_seg_overflow == 0, "segment overflow");
      end
    end
    check(l2_decision, "no L2 decision");
    if (l2_decision) n_decision++;
    check(!fe_hold, "front end still held");

    // linked tracks: four layers, LUT kappa-phi and the wires' z
    n_linked = got_trk.size();
    check(got_trk.size() == NTRK, $sformatf("%0d tracks sent to the DSPs", got_trk.size()));
    for (int i = 0; i < got_trk.size(); i++) begin
      int t;
      t = -1;
      for (int u = 0; u < NTRK; u++) if (int'(got_trk[i].seg[0].kappa) == k2_of[u]) t = u;
      check(t >= 0 && got_trk[i].lmask == 4'hf, $sformatf("track %0d layers %b", i, got_trk[i].lmask));
      if (t >= 0)
        for (int l = 0; l < 4; l++) begin
          check(int'(got_trk[i].seg[l].layer) == l && int'(got_trk[i].seg[l].kappa) == k2_of[t] &&
                int'(got_trk[i].seg[l].phi) == p2_of[t], $sformatf("track %0d layer %0d kappa-phi", i, l));
          for (int w = 0; w < 3; w++)
            check(int'($signed(got_trk[i].seg[l].z[w])) == ez[w],
                  $sformatf("track %0d layer %0d wire %0d z %0d exp %0d", i, l, w,
                            $signed(got_trk[i].seg[l].z[w]), ez[w]));
        end
    end
    for (int i = 0; i < 4; i++) if (dsp_cnt[i] > 0) n_dsp_used++;

    // L2 decision: the fit of track 1 fails
    exp_n = 0; exp_hi = 0; exp_sum = 0;
    for (int t = 0; t < NTRK; t++) if (t != 1) begin
      int pt;
      pt = 200 + 40 * k2_of[t];
      exp_n++; exp_sum += pt;
      if (pt > 700) exp_hi++;
    end
    check(int'(l2_mult) == exp_n && int'(l2_n_hi) == exp_hi && int'(l2_pt_sum) == exp_sum,
          $sformatf("L2 %0d %0d %0d exp %0d %0d %0d", l2_mult, l2_n_hi, l2_pt_sum, exp_n, exp_hi, exp_sum));
    check(l2_trig == {1'b0, exp_sum >= 2000, exp_hi >= 1, exp_n >= 2}, $sformatf("L2 trig %b", l2_trig));

    // ---- event 2: every pattern of two layer-1 cells matches the same
    // hits, 128 segments for a 64-entry layer buffer: overflow, no track
    for (int c = 1; c <= 2; c++)
      for (int e = 0; e < 64; e++) begin
        int a;
        for (int r = 0; r < 3; r++)
          cfg_write(c, CFG_CAM, (e << 2) | r, 66'(1) << (22 + J - r));
        a = (e << 6) | (F << 4) | (F << 2) | F;
        cfg_write(c, CFG_VALID, a, 66'd1);
        cfg_write(c, CFG_KPHI, a, 66'({6'(e % 40), 10'(300 + 3 * e + 200 * (c - 1))}));
      end
    while (!bc_out) @(negedge clk);
    c0 = cyc + 6 + 8;
    while (cyc < c0) @(negedge clk);
    for (int s = 0; s < 16; s++) begin
      for (int c = 1; c <= 2; c++)
        for (int w = 0; w < 3; w++) begin
          int k;
          k = cyc - (c0 + 4 * w);
          sample_a[c][w] = (k >= 0 && k < 4) ? 8'(amp_a[w]) : 8'd0;
          sample_b[c][w] = (k >= 0 && k < 4) ? 8'(amp_b[w]) : 8'd0;
        end
      @(negedge clk);
    end
    sample_a = '0; sample_b = '0;
    k_hold = c0 + 5 + 4 * J + F - 1;
    while (cyc < k_hold) @(negedge clk);
    max_ovf = 0; n_trk_before = got_trk.size();
    l1_keep = 1;
    @(negedge clk);
    l1_keep = 0;
    t_start = cyc;
    while (!l2_decision && cyc < t_start + 4000) begin
      @(negedge clk);
      if (int'(l2_seg_overflow) > max_ovf) max_ovf = int'(l2_seg_overflow);
      if (l2_link_done) check(l2_n_linked == 0, $sformatf("event 2: %0d tracks", l2_n_linked));
    end
    check(l2_decision && l2_mult == 0 && l2_trig == 4'b0000, "event 2: empty L2 decision");
    check(max_ovf == 64, $sformatf("event 2: overflow %0d exp 64", max_ovf));
    check(got_trk.size() == n_trk_before, "event 2: track sent to a DSP");
    if (max_ovf > 0) n_overflow++;
    $display("event 2 took %0d cycles", cyc - t_start);
    repeat (4) @(negedge clk);
    check(!fe_hold, "event 2: front end still held");

    $display("mechanisms: coincidence=%0d t0=%0d hold_cycles=%0d contention=%0d linked=%0d dsps_used=%0d backpressure=%0d fit_fail=%0d decision=%0d overflow=%0d",
             n_coinc, n_t0, n_hold, n_contend, n_linked, n_dsp_used, n_backpressure, n_fitfail, n_decision, n_overflow);
    check(n_coinc > 0, "L1 coincidence never happened");
    check(n_t0 == 1, $sformatf("t0 fired %0d times", n_t0));
    check(n_hold > 0, "hold never happened");
    check(n_contend > 0, "merge contention never happened");
    check(n_linked > 0, "no linked track");
    check(n_dsp_used > 1, "load not shared");
    check(n_backpressure > 0, "no DSP back-pressure");
    check(n_fitfail > 0, "no failed fit");
    check(n_decision > 0, "no L2 decision");
    check(n_overflow > 0, "segment overflow never happened");
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
