// tb_l2_linker: events of planted tracks (segments in two to four layers,
// spread by up to one bin in kappa and phi around the track, some across
// the phi wrap) plus single noise segments are sent to the linker in random
// order. The expected track list is computed here with a plain reference of
// the linking rule (seeds from layer 1 on, 5x5 search, best 3x3 window,
// nearest segment per layer). The test checks the tracks received, that
// every planted track of two or more layers was found, the segment overflow
// count, and that linking 48 tracks stays within 520 cycles
// (5.2 us at 100 MHz, the L2 linking budget).
module tb_l2_linker;
  import ftt_pkg::*;

  localparam int NSEG = 64;
  logic clk = 0, rst_n = 0;
  segment_t seg;
  logic seg_valid, seg_ready, event_end;
  l2_track_t trk;
  logic trk_valid, trk_ready, done;
  logic [7:0] n_tracks, overflow;
  logic [15:0] link_cycles;
  int checks = 0, failures = 0;

  l2_linker #(.NSEG(NSEG)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  // reference buffers
  segment_t buf_q [4][$];

  function automatic int pw(input int p);
    return (p + 640) % 640;
  endfunction

  // reference linking; returns the expected track list
  task automatic reference(output l2_track_t tl[$]);
    bit used [4][NSEG];
    int cells [9] = '{4, 1, 3, 5, 7, 0, 2, 6, 8};
    int order [9] = '{4, 0, 1, 2, 3, 5, 6, 7, 8};
    tl.delete();
    for (int l = 0; l < 4; l++) for (int i = 0; i < NSEG; i++) used[l][i] = 0;
    for (int sl = 0; sl < 4; sl++)
      for (int si = 0; si < buf_q[sl].size(); si++) begin
        segment_t s;
        bit occ [4][25];
        int adr [4][25];
        int best_w, best_sc;
        if (used[sl][si]) continue;
        s = buf_q[sl][si];
        for (int l = 0; l < 4; l++)
          for (int o = 0; o < 25; o++) begin
            int kk, pp;
            occ[l][o] = 0; adr[l][o] = 0;
            kk = int'(s.kappa) + o / 5 - 2;
            pp = pw(int'(s.phi) + o % 5 - 2);
            for (int i = 0; i < buf_q[l].size(); i++)
              if (!occ[l][o] && !used[l][i] && kk >= 0 && kk < 40 &&
                  int'(buf_q[l][i].kappa) == kk && int'(buf_q[l][i].phi) == pp) begin
                occ[l][o] = 1; adr[l][o] = i;
              end
          end
        best_w = 4; best_sc = -1;
        for (int n = 0; n < 9; n++) begin
          int w, sc;
          w = order[n]; sc = 0;
          for (int l = 0; l < 4; l++) begin
            bit any;
            any = 0;
            for (int a = 0; a < 3; a++) for (int b = 0; b < 3; b++)
              any |= occ[l][(w / 3 + a) * 5 + (w % 3 + b)];
            sc += int'(any);
          end
          if (sc > best_sc) begin best_sc = sc; best_w = w; end
        end
        if (best_sc >= 2) begin
          l2_track_t t;
          t = '0;
          for (int l = 0; l < 4; l++) begin
            if (l == sl) begin
              t.lmask[l] = 1; t.seg[l] = s; used[l][si] = 1;
            end else begin
              for (int n = 0; n < 9; n++) begin
                int c, o;
                c = cells[n];
                o = (best_w / 3 + c / 3) * 5 + (best_w % 3 + c % 3);
                if (!t.lmask[l] && occ[l][o]) begin
                  t.lmask[l] = 1; t.seg[l] = buf_q[l][adr[l][o]]; used[l][adr[l][o]] = 1;
                end
              end
            end
          end
          tl.push_back(t);
        end
      end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int max_cycles_48 = 0;
    int n_overflow_events = 0;
    seg_valid = 0; event_end = 0; trk_ready = 0; seg = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int ev = 0; ev < 40; ev++) begin
      segment_t pool [$];
      l2_track_t exp_t [$];
      int ntrk, nplanted2, got, exp_ovf, cyc;
      pool.delete();
      for (int l = 0; l < 4; l++) buf_q[l].delete();
      ntrk = (ev % 4 == 0) ? 48 : int'($urandom_range(1, 20));
      nplanted2 = 0;
      // planted tracks on a coarse grid so that they stay apart
      for (int t = 0; t < ntrk; t++) begin
        int k0, p0, nl;
        k0 = 3 + 7 * (t % 5);
        p0 = (t / 5) * 64 + ((ev % 3 == 0 && t == 0) ? 639 - (t / 5) * 64 : 10);
        nl = 0;
        for (int l = 0; l < 4; l++)
          if ($urandom_range(0, 3) != 0 || (l < 2 && nl < 2 && l == 1)) begin
            segment_t s;
            s.layer = 2'(l);
            s.kappa = 6'(k0 + int'($urandom_range(0, 2)) - 1);
            s.phi   = 10'(pw(p0 + int'($urandom_range(0, 2)) - 1));
            s.z     = 24'($urandom);
            pool.push_back(s);
            nl++;
          end
        if (nl >= 2) nplanted2++;
      end
      // noise far from the tracks
      for (int i = 0; i < int'($urandom_range(0, 6)); i++) begin
        segment_t s;
        s.layer = 2'($urandom_range(0, 3));
        s.kappa = 6'(38);
        s.phi   = 10'($urandom_range(0, 639));
        s.z     = 24'($urandom);
        pool.push_back(s);
      end
      // overflow event: too many segments in layer 3
      if (ev == 7) begin
        for (int i = 0; i < NSEG + 5; i++) begin
          segment_t s;
          s.layer = 2'd3; s.kappa = 6'd0; s.phi = 10'(i * 9); s.z = '0;
          pool.push_back(s);
        end
      end
      pool.shuffle();
      exp_ovf = 0;
      foreach (pool[i]) begin
        if (buf_q[pool[i].layer].size() < NSEG) buf_q[pool[i].layer].push_back(pool[i]);
        else exp_ovf++;
      end
      reference(exp_t);
      // send
      foreach (pool[i]) begin
        @(negedge clk);
        seg = pool[i]; seg_valid = 1;
        #1;
        check(seg_ready, "not ready in fill phase");
      end
      @(negedge clk);
      seg_valid = 0;
      event_end = 1;
      @(negedge clk);
      event_end = 0;
      #1;
      check(int'(overflow) == exp_ovf, $sformatf("ev %0d overflow %0d exp %0d", ev, overflow, exp_ovf));
      if (exp_ovf > 0) n_overflow_events++;
      got = 0; cyc = 0;
      while (!done && cyc < 5000) begin
        trk_ready = (ev % 2 == 0) ? 1'b1 : ($urandom_range(0, 2) != 0);
        #1;
        if (trk_valid && trk_ready) begin
          check(got < exp_t.size() && trk == exp_t[got], $sformatf("ev %0d track %0d", ev, got));
          got++;
        end
        @(negedge clk);
        cyc++;
      end
      check(got == exp_t.size(), $sformatf("ev %0d: %0d tracks, expected %0d", ev, got, exp_t.size()));
      check(got >= nplanted2, $sformatf("ev %0d: %0d tracks, %0d planted", ev, got, nplanted2));
      check(int'(n_tracks) == got, "n_tracks");
      if (ntrk == 48 && ev % 2 == 0) begin
        check(int'(link_cycles) <= 520, $sformatf("48 tracks linked in %0d cycles", link_cycles));
        if (int'(link_cycles) > max_cycles_48) max_cycles_48 = int'(link_cycles);
      end
    end
    check(n_overflow_events > 0, "no overflow event");
    $display("linking 48 tracks took at most %0d cycles", max_cycles_48);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
