// tb_hit_finder: self-checking test of the pulse finder and charge division.
//
// Random pulses of four samples on both wire ends, separated by quiet
// samples, are sent. For each pulse the expected hit cycle (four clocks after
// the first sample above threshold) and the expected z, computed here from
// the sample sums, are checked. Pulses below threshold must give no hit, and
// a long pulse only one.
module tb_hit_finder;
  import ftt_pkg::*;

  logic clk = 0, rst_n = 0;
  logic [7:0] sa, sb;
  logic [8:0] thr;
  logic hit;
  logic signed [7:0] z;
  int checks = 0, failures = 0;
  int cyc = 0;

  hit_finder #(.INT_LEN(4)) dut (.clk, .rst_n, .sample_a(sa), .sample_b(sb),
                                 .threshold(thr), .hit, .z);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  // hit log
  int hit_cyc[$];
  int hit_z[$];
  always @(posedge clk) if (rst_n && hit) begin
    hit_cyc.push_back(cyc);
    hit_z.push_back(int'(z));
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", msg);
    end
  endtask

  // one pulse of len samples; returns the cycle of the first sample
  task automatic pulse(input int len, input int amp_a[], input int amp_b[], output int c0);
    @(negedge clk);
    c0 = cyc;
    for (int i = 0; i < len; i++) begin
      sa = 8'(amp_a[i]);
      sb = 8'(amp_b[i]);
      @(negedge clk);
    end
    sa = 0;
    sb = 0;
    repeat (8) @(negedge clk);
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int a[], b[];
    int c0, qa, qb, ez;
    sa = 0; sb = 0; thr = 9'd40;
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (3) @(negedge clk);

    // random pulses above threshold
    for (int n = 0; n < 200; n++) begin
      a = new[4];
      b = new[4];
      for (int i = 0; i < 4; i++) begin
        a[i] = 10 + int'($urandom_range(0, 200));
        b[i] = 10 + int'($urandom_range(0, 200));
      end
      if (a[0] + b[0] <= 40) a[0] = 41;
      qa = a[0] + a[1] + a[2] + a[3];
      qb = b[0] + b[1] + b[2] + b[3];
      ez = ((qa - qb) * 127) / (qa + qb);
      hit_cyc.delete();
      hit_z.delete();
      pulse(4, a, b, c0);
      check(hit_cyc.size() == 1, $sformatf("pulse %0d: %0d hits", n, hit_cyc.size()));
      if (hit_cyc.size() == 1) begin
        // sample presented in cycle c0 is taken at the edge ending it;
        // the hit is visible INT_LEN cycles later
        check(hit_cyc[0] == c0 + 4, $sformatf("pulse %0d: hit at %0d, expected %0d",
                                              n, hit_cyc[0], c0 + 4));
        check(hit_z[0] == ez, $sformatf("pulse %0d: z=%0d expected %0d", n, hit_z[0], ez));
      end
    end

    // below threshold: no hit
    a = '{15, 10, 5, 0};
    b = '{20, 10, 5, 0};
    hit_cyc.delete();
    pulse(4, a, b, c0);
    check(hit_cyc.size() == 0, "sub-threshold pulse gave a hit");

    // long pulse: one hit only
    a = '{100, 100, 100, 100, 100, 100, 100, 100, 100, 100};
    b = '{50, 50, 50, 50, 50, 50, 50, 50, 50, 50};
    hit_cyc.delete();
    hit_z.delete();
    pulse(10, a, b, c0);
    check(hit_cyc.size() == 1, $sformatf("long pulse gave %0d hits", hit_cyc.size()));
    if (hit_z.size() > 0)
      check(hit_z[0] == (400 - 200) * 127 / 600, "long pulse z");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
