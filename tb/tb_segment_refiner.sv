// tb_segment_refiner: a model CAM (patterns with one coarse bit per row),
// random held fine images with z values, and random validation and
// kappa-phi LUT contents. For each random match vector the expected segment
// list is built here: for each set bin, lowest fine hit per row inside the
// row's mask, LUT address {bin, offsets}, kept only if valid. Checks the
// received segments and their order, done, and the cycle count (at most
// 4 cycles per match plus 3).
module tb_segment_refiner;
  import ftt_pkg::*;

  localparam int E = 8, D = 16, RW = 3 * D, CW = 3 * D / 4, AW = 3 + 6;
  logic clk = 0, rst_n = 0;
  logic start;
  logic [E-1:0] match;
  logic [2:0] rd_entry;
  logic [2:0][CW-1:0] rd_mask;
  logic [2:0][RW-1:0] fine;
  logic [2:0][RW-1:0][7:0] zreg;
  logic lut_we_valid, lut_we_kphi;
  logic [AW-1:0] lut_addr;
  logic [15:0] lut_data;
  segment_t seg;
  logic seg_valid, seg_ready, done;
  int checks = 0, failures = 0;

  segment_refiner #(.ENTRIES(E), .DEPTH(D), .LAYER(2'd2)) dut (.*);

  always #5 clk = ~clk;

  logic [CW-1:0] pat [E][3];
  bit            vlut [1 << AW];
  logic [15:0]   klut [1 << AW];

  always_comb rd_mask = {pat[rd_entry][2], pat[rd_entry][1], pat[rd_entry][0]};

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 0; match = 0; seg_ready = 0; lut_we_valid = 0; lut_we_kphi = 0;
    lut_addr = 0; lut_data = 0; fine = '0; zreg = '0;
    for (int e = 0; e < E; e++)
      for (int r = 0; r < 3; r++)
        pat[e][r] = (e == 5 && r == 0) ? '0 : CW'(1) << $urandom_range(0, CW - 1);
    repeat (2) @(negedge clk);
    rst_n = 1;
    // LUTs: a third of the addresses valid
    for (int a = 0; a < (1 << AW); a++) begin
      vlut[a] = ($urandom_range(0, 2) != 0);
      klut[a] = 16'($urandom);
      @(negedge clk);
      lut_we_valid = 1; lut_we_kphi = 1; lut_addr = AW'(a); lut_data = {15'($urandom), vlut[a]};
      vlut[a] = lut_data[0];
      @(negedge clk);
      lut_we_valid = 0; lut_data = klut[a];
    end
    @(negedge clk);
    lut_we_kphi = 0;

    for (int n = 0; n < 300; n++) begin
      segment_t exp_q[$];
      int got, cycles, nmatch;
      got = 0; cycles = 0; nmatch = 0;
      exp_q.delete();
      // held image
      for (int r = 0; r < 3; r++)
        for (int i = 0; i < RW; i++) begin
          fine[r][i] = ($urandom_range(0, 3) == 0);
          zreg[r][i] = fine[r][i] ? 8'($urandom) : 8'd0;
        end
      for (int e = 0; e < E; e++) match[e] = ($urandom_range(0, 1) == 1);
      for (int e = 0; e < E; e++) if (match[e]) begin
        logic [1:0] off [3];
        logic [7:0] zz [3];
        int a;
        nmatch++;
        for (int r = 0; r < 3; r++) begin
          bit found;
          found = 0;
          off[r] = 0; zz[r] = 0;
          for (int i = 0; i < RW; i++)
            if (!found && fine[r][i] && pat[e][r][i/4]) begin
              found = 1; off[r] = 2'(i % 4); zz[r] = zreg[r][i];
            end
        end
        a = (e << 6) | (int'(off[2]) << 4) | (int'(off[1]) << 2) | int'(off[0]);
        if (vlut[a]) begin
          segment_t s;
          s.layer = 2'd2;
          {s.kappa, s.phi} = klut[a];
          s.z = {zz[2], zz[1], zz[0]};
          exp_q.push_back(s);
        end
      end
      @(negedge clk);
      start = 1;
      @(negedge clk);
      start = 0;
      while (!done && cycles < 1000) begin
        seg_ready = (n % 2 == 0) ? 1'b1 : ($urandom_range(0, 1) == 1);
        #1;
        if (seg_valid && seg_ready) begin
          check(got < exp_q.size() && seg == exp_q[got], $sformatf("n=%0d seg %0d got %h exp %h", n, got, seg, (got < exp_q.size()) ? exp_q[got] : 0));
          got++;
        end
        @(negedge clk);
        cycles++;
      end
      check(got == exp_q.size(), $sformatf("n=%0d got %0d of %0d", n, got, exp_q.size()));
      if (n % 2 == 0)
        check(cycles <= 4 * nmatch + 3, $sformatf("n=%0d took %0d cycles for %0d matches", n, cycles, nmatch));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
