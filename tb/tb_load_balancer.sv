// tb_load_balancer: numbered tracks are offered with random gaps while four
// DSP models take them with random delays. A reference copy of the queues,
// kept here, decides where each track must go (fewest queued, lowest index
// on ties). Checks every track delivered to the predicted DSP in order,
// in_ready low exactly when all queues are full, and that the stall happens.
module tb_load_balancer;
  import ftt_pkg::*;

  localparam int NQ = 4, QD = 4;
  logic clk = 0, rst_n = 0;
  l2_track_t in_trk;
  logic in_valid, in_ready;
  l2_track_t [NQ-1:0] dsp_trk;
  logic [NQ-1:0] dsp_valid, dsp_ready;
  logic [NQ-1:0][2:0] level;
  int checks = 0, failures = 0;
  int stalls = 0;

  load_balancer #(.NQ(NQ), .QDEPTH(QD)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  int model [NQ][$];
  int next_id = 0, received = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; in_trk = '0; dsp_ready = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    while (received < 2000) begin
      int sel;
      bit full;
      @(negedge clk);
      in_valid = (next_id < 2000) && ($urandom_range(0, 3) != 0);
      in_trk = '0;
      in_trk.seg[0].z = 24'(next_id);
      for (int i = 0; i < NQ; i++)
        dsp_ready[i] = (received > 1000) ? ($urandom_range(0, 1) == 1) : ($urandom_range(0, 29) < i + 1);
      #1;
      sel = 0;
      for (int i = 1; i < NQ; i++) if (model[i].size() < model[sel].size()) sel = i;
      full = (model[sel].size() == QD);
      check(in_ready == !full, "in_ready");
      if (in_valid && !in_ready) stalls++;
      @(posedge clk);
      // outputs taken at this edge
      for (int i = 0; i < NQ; i++)
        if (dsp_valid[i] && dsp_ready[i]) begin
          check(model[i].size() > 0 && int'(dsp_trk[i].seg[0].z) == model[i][0],
                $sformatf("dsp %0d got %0d", i, dsp_trk[i].seg[0].z));
          if (model[i].size() > 0) void'(model[i].pop_front());
          received++;
        end else if (dsp_ready[i]) begin
          check(model[i].size() == 0, "queue not offered");
        end
      if (in_valid && in_ready) begin
        model[sel].push_back(next_id);
        next_id++;
      end
    end
    check(stalls > 0, "input never stalled");
    $display("stalled %0d times", stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
