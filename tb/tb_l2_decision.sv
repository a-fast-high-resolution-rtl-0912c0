// tb_l2_decision: events of 0 to 60 random fitted tracks with gaps, the
// last track sometimes in the event_end cycle. Multiplicity, count above the
// pt cut, scalar pt sum and the four trigger elements are recomputed here
// and compared after each event; events above 48 tracks must raise the
// overflow element.
module tb_l2_decision;
  import ftt_pkg::*;

  logic clk = 0, rst_n = 0;
  fit_track_t fit;
  logic fit_valid, event_end;
  logic [15:0] pt_cut;
  logic [7:0] mult_thr, hi_thr, mult, n_hi;
  logic [21:0] sum_thr, pt_sum;
  logic [3:0] trig;
  logic decision;
  int checks = 0, failures = 0;
  int n_ovf = 0;

  l2_decision dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    fit = '0; fit_valid = 0; event_end = 0;
    pt_cut = 16'd800; mult_thr = 8'd5; hi_thr = 8'd2; sum_thr = 22'd6000;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int ev = 0; ev < 200; ev++) begin
      int n, en, ehi, esum;
      n = (ev % 10 == 3) ? int'($urandom_range(49, 60)) : int'($urandom_range(0, 12));
      en = 0; ehi = 0; esum = 0;
      for (int t = 0; t < n; t++) begin
        @(negedge clk);
        fit = '0;
        fit.pt_mev = 16'($urandom_range(100, 3000));
        fit_valid = 1;
        en++; esum += int'(fit.pt_mev);
        if (fit.pt_mev > pt_cut) ehi++;
        event_end = (t == n - 1) && (ev % 2 == 0);
        if (!event_end) begin
          @(negedge clk);
          fit_valid = ($urandom_range(0, 1) == 1) ? 1'b0 : 1'b0;
        end
      end
      if (!event_end) begin
        @(negedge clk);
        fit_valid = 0;
        event_end = 1;
      end
      @(negedge clk);
      fit_valid = 0;
      event_end = 0;
      #1;
      check(decision, "decision pulse");
      check(int'(mult) == en && int'(n_hi) == ehi && int'(pt_sum) == esum,
            $sformatf("ev %0d: %0d %0d %0d exp %0d %0d %0d", ev, mult, n_hi, pt_sum, en, ehi, esum));
      check(trig == {en > 48, esum >= 6000, ehi >= 2, en >= 5}, $sformatf("ev %0d trig %b", ev, trig));
      if (trig[3]) n_ovf++;
      @(negedge clk);
      check(!decision, "decision longer than one cycle");
    end
    check(n_ovf > 0, "overflow element never raised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
