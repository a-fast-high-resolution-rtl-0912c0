// tb_l1_linker: random sparse kappa-phi maps of four layers, one set per
// bunch crossing. The linked map, the three multiplicities, the trigger
// elements and t0 are recomputed here with plain loops (3x3 window with phi
// wrap, centre bin occupied, at least two layers) and compared. Some
// crossings carry a planted multi-layer track cluster so that the count
// varies and t0 fires.
module tb_l1_linker;
  import ftt_pkg::*;

  localparam int K = 6, P = 10, NB = K * P, CW = $clog2(NB + 1);
  logic clk = 0, rst_n = 0, bc;
  logic [3:0][NB-1:0] layer_bins;
  logic [3:0] cut_lo, cut_hi;
  logic [2:0][CW-1:0] mult_thr, mult;
  logic [CW-1:0] t0_min;
  logic [NB-1:0] linked;
  logic t0;
  logic [3:0] trig;
  int checks = 0, failures = 0;
  int n_t0 = 0;

  l1_linker #(.KBINS(K), .PBINS(P)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  function automatic bit occ(input logic [3:0][NB-1:0] b, input int l, input int k, input int p);
    if (k < 0 || k >= K) return 0;
    p = (p + P) % P;
    return b[l][k*P + p];
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int hist [$];
    bc = 0; layer_bins = '0; cut_lo = 4'd2; cut_hi = 4'd1;
    mult_thr = {CW'(1), CW'(2), CW'(3)}; t0_min = CW'(2);
    repeat (2) @(negedge clk);
    rst_n = 1;
    hist = '{0, 0};
    for (int n = 0; n < 2000; n++) begin
      logic [NB-1:0] el;
      int m0, m1, m2;
      @(negedge clk);
      layer_bins = '0;
      for (int l = 0; l < 4; l++)
        for (int i = 0; i < NB; i++)
          layer_bins[l][i] = ($urandom_range(0, 19) == 0);
      // planted clusters on some crossings
      for (int t = 0; t < int'($urandom_range(0, 3)); t++) begin
        int k, p;
        k = int'($urandom_range(0, K - 1));
        p = int'($urandom_range(0, P - 1));
        for (int l = 0; l < 4; l++)
          if ($urandom_range(0, 2) != 0)
            layer_bins[l][k*P + ((p + int'($urandom_range(0, 1))) % P)] = 1'b1;
      end
      bc = (n % 3 != 2);
      // reference
      m0 = 0; m1 = 0; m2 = 0;
      for (int k = 0; k < K; k++)
        for (int p = 0; p < P; p++) begin
          int nl, ak;
          bit centre;
          nl = 0; centre = 0;
          for (int l = 0; l < 4; l++) begin
            bit any;
            any = 0;
            centre |= occ(layer_bins, l, k, p);
            for (int dk = -1; dk <= 1; dk++)
              for (int dp = -1; dp <= 1; dp++)
                any |= occ(layer_bins, l, k + dk, p + dp);
            nl += int'(any);
          end
          el[k*P + p] = centre && nl >= 2;
          ak = (k < K/2) ? (K/2 - 1 - k) : (k - K/2);
          if (el[k*P + p]) begin
            m0++;
            if (ak < 2) m1++;
            if (ak < 1) m2++;
          end
        end
      @(posedge clk);
      #1;
      if (bc) begin
        bit et0;
        et0 = (hist[1] >= 2) && (hist[1] > hist[0]) && (hist[1] >= m0);
        check(linked == el, $sformatf("n=%0d linked map", n));
        check(int'(mult[0]) == m0 && int'(mult[1]) == m1 && int'(mult[2]) == m2,
              $sformatf("n=%0d mult %0d %0d %0d exp %0d %0d %0d", n, mult[0], mult[1], mult[2], m0, m1, m2));
        check(t0 == et0 && trig[0] == et0, $sformatf("n=%0d t0", n));
        check(trig[1] == (m0 >= 3) && trig[2] == (m1 >= 2) && trig[3] == (m2 >= 1), "trig");
        if (t0) n_t0++;
        hist = '{hist[1], m0};
      end
    end
    check(n_t0 > 0, "t0 never fired");
    $display("t0 fired %0d times", n_t0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
