// tb_fem_cell: one front-end cell with short shift registers (16 samples)
// and 8 pattern entries. Pulses on the three wires form a straight track
// element. Entry 5 holds the pattern of its coarse hit positions on the own
// wires; entry 6 the same but with row 0 taken from a hit in the left
// neighbour cell. Checks: the hit positions in the shift registers
// (hit-finder plus insertion latency of five clocks), the L1 bins of both
// entries, and after hold the two refined segments with the kappa-phi of the
// LUT and the charge-division z of every row, and that nothing shifts while
// held.
module tb_fem_cell;
  import ftt_pkg::*;

  localparam int D = 16, CD = 4, E = 8, AW = 9;
  logic clk = 0, rst_n = 0;
  logic ce, hold, refine_start;
  logic [8:0] threshold;
  logic [2:0][7:0] sample_a, sample_b;
  logic [2:0][D-1:0] own_fine, nb_left_fine, nb_right_fine;
  logic [2:0][D-1:0][7:0] own_z, nb_left_z, nb_right_z;
  logic cfg_we;
  cfg_target_e cfg_target;
  logic [11:0] cfg_addr;
  logic [65:0] cfg_data;
  logic [E-1:0] l1_bins;
  segment_t seg;
  logic seg_valid, seg_ready, refine_done;
  int checks = 0, failures = 0;
  int cyc = 0;

  fem_cell #(.LAYER(2'd1), .ENTRIES(E), .DEPTH(D)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  always @(posedge clk) ce <= (cyc % 4 == 2);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  task automatic cfg(input cfg_target_e t, input int a, input logic [65:0] d);
    @(negedge clk);
    cfg_we = 1; cfg_target = t; cfg_addr = 12'(a); cfg_data = d;
    @(negedge clk);
    cfg_we = 0;
  endtask

  // pulse amplitudes per wire (four samples each end)
  int amp_a [3][4] = '{'{60, 80, 40, 20}, '{30, 50, 70, 10}, '{90, 90, 20, 20}};
  int amp_b [3][4] = '{'{20, 30, 20, 10}, '{60, 70, 40, 30}, '{40, 30, 20, 10}};
  int start_c [3];
  int pos [3];
  int ez [3];

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    segment_t got [$];
    int hold_edge, nseg;
    bit saw5, saw6;
    hold = 0; refine_start = 0; threshold = 9'd30; sample_a = '0; sample_b = '0;
    nb_left_fine = '0; nb_right_fine = '0; nb_left_z = '0; nb_right_z = '0;
    cfg_we = 0; cfg_target = CFG_CAM; cfg_addr = 0; cfg_data = 0; seg_ready = 1;
    repeat (2) @(negedge clk);
    rst_n = 1;

    // hit in the left neighbour cell, row 0, position 9 (coarse 2, offset 1)
    nb_left_fine[0][9] = 1'b1;
    nb_left_z[0][9]    = 8'd77;

    // expected positions at the hold: 13, 10, 7 on wires 0, 1, 2
    pos = '{13, 10, 7};
    for (int w = 0; w < 3; w++) begin
      int qa, qb;
      qa = 0; qb = 0;
      for (int i = 0; i < 4; i++) begin qa += amp_a[w][i]; qb += amp_b[w][i]; end
      ez[w] = ((qa - qb) * 127) / (qa + qb);
    end
    // patterns: key row = {right cell, own cell, left cell} coarse bits
    for (int r = 0; r < 3; r++)
      cfg(CFG_CAM, (5 << 2) | r, 66'(1) << (CD + pos[r] / 4));
    cfg(CFG_CAM, (6 << 2) | 0, 66'(1) << 2);
    for (int r = 1; r < 3; r++)
      cfg(CFG_CAM, (6 << 2) | r, 66'(1) << (CD + pos[r] / 4));
    // LUTs: valid fine patterns and their kappa-phi
    cfg(CFG_VALID, (5 << 6) | ((pos[2] % 4) << 4) | ((pos[1] % 4) << 2) | (pos[0] % 4), 66'd1);
    cfg(CFG_KPHI,  (5 << 6) | ((pos[2] % 4) << 4) | ((pos[1] % 4) << 2) | (pos[0] % 4), {50'd0, 6'd17, 10'd333});
    cfg(CFG_VALID, (6 << 6) | ((pos[2] % 4) << 4) | ((pos[1] % 4) << 2) | 1, 66'd1);
    cfg(CFG_KPHI,  (6 << 6) | ((pos[2] % 4) << 4) | ((pos[1] % 4) << 2) | 1, {50'd0, 6'd18, 10'd330});

    // pulses: wire w starts at cycle base + 3*w
    @(negedge clk);
    for (int w = 0; w < 3; w++) start_c[w] = cyc + 3 * w;
    for (int t = 0; t < 12; t++) begin
      for (int w = 0; w < 3; w++) begin
        int k;
        k = cyc - start_c[w];
        sample_a[w] = (k >= 0 && k < 4) ? 8'(amp_a[w][k]) : 8'd0;
        sample_b[w] = (k >= 0 && k < 4) ? 8'(amp_b[w][k]) : 8'd0;
      end
      @(negedge clk);
    end
    sample_a = '0; sample_b = '0;
    // wait until wire 0's hit sits at position 13: after edge start+5+13
    saw5 = 0; saw6 = 0;
    while (cyc < start_c[0] + 5 + 13) begin
      @(negedge clk);
      if (l1_bins[5]) saw5 = 1;
    end
    hold = 1;
    hold_edge = cyc;
    for (int w = 0; w < 3; w++)
      check(own_fine[w] == (D'(1) << pos[w]), $sformatf("wire %0d image %b", w, own_fine[w]));
    for (int w = 0; w < 3; w++)
      check(int'($signed(own_z[w][pos[w]])) == ez[w], $sformatf("wire %0d z %0d exp %0d", w, $signed(own_z[w][pos[w]]), ez[w]));
    repeat (6) @(negedge clk);
    check(l1_bins[5] && l1_bins[6] && l1_bins[4:0] == 0 && l1_bins[7] == 0, $sformatf("l1 bins %b", l1_bins));
    for (int w = 0; w < 3; w++)
      check(own_fine[w] == (D'(1) << pos[w]), "register moved while held");
    // refinement
    refine_start = 1;
    @(negedge clk);
    refine_start = 0;
    nseg = 0;
    repeat (40) begin
      @(posedge clk);
      if (seg_valid && seg_ready) got.push_back(seg);
    end
    check(got.size() == 2, $sformatf("%0d segments", got.size()));
    if (got.size() == 2) begin
      check(got[0].layer == 2'd1 && got[0].kappa == 6'd17 && got[0].phi == 10'd333, "segment 5 kappa-phi");
      check(int'($signed(got[0].z[0])) == ez[0] && int'($signed(got[0].z[1])) == ez[1] &&
            int'($signed(got[0].z[2])) == ez[2], "segment 5 z");
      check(got[1].kappa == 6'd18 && got[1].phi == 10'd330, "segment 6 kappa-phi");
      check(got[1].z[0] == 8'd77 && int'($signed(got[1].z[1])) == ez[1], "segment 6 z");
    end
    hold = 0;
    repeat (3) @(negedge clk);
    check(own_fine[2] == (D'(1) << (pos[2] + 3)), "register runs again after hold");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
