// tb_cam_encoder: random match vectors are captured and read out with a
// randomly stalling consumer. The addresses received must be exactly the
// set bits, in increasing order, one per accepted transfer, and empty must
// rise once the list is exhausted.
module tb_cam_encoder;
  localparam int N = 64;
  logic clk = 0, rst_n = 0;
  logic start, valid, ready, empty;
  logic [N-1:0] match;
  logic [5:0] addr;
  int checks = 0, failures = 0;

  cam_encoder #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 0; ready = 0; match = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      int exp_list[$];
      int got, cycles;
      logic [N-1:0] m;
      got = 0; cycles = 0;
      exp_list.delete();
      for (int i = 0; i < N; i++) m[i] = ($urandom_range(0, 7) == 0);
      if (n == 0) m = '0;
      if (n == 1) m = '1;
      for (int i = 0; i < N; i++) if (m[i]) exp_list.push_back(i);
      @(negedge clk);
      start = 1; match = m;
      @(negedge clk);
      start = 0; match = '0;
      while (got < exp_list.size() && cycles < 500) begin
        ready = ($urandom_range(0, 2) != 0);
        #1;
        if (valid && ready) begin
          check(int'(addr) == exp_list[got], $sformatf("n=%0d item %0d: %0d vs %0d", n, got, addr, exp_list[got]));
          got++;
        end
        @(negedge clk);
        cycles++;
      end
      ready = 0;
      #1;
      check(got == exp_list.size(), "list incomplete");
      check(empty && !valid, "not empty after list");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
