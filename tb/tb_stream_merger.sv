// tb_stream_merger: three sources send numbered words with random gaps
// into a randomly stalling sink. Every word must arrive once, in order per
// source. In a second phase all sources are always valid and the sink always
// ready: the output must then rotate over the sources and carry one word
// per cycle.
module tb_stream_merger;
  localparam int N = 3;
  typedef logic [15:0] word_t;
  logic clk = 0, rst_n = 0;
  word_t [N-1:0] in_data;
  logic [N-1:0] in_valid, in_ready;
  word_t out_data;
  logic out_valid, out_ready;
  int checks = 0, failures = 0;

  stream_merger #(.N(N), .T(word_t)) dut (.*);

  always #5 clk = ~clk;

  logic [N-1:0] in_ready_q;
  int sent [N];
  int rcvd [N];
  int last_src;
  bit rr_phase;
  int rr_words;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  // sources
  always @(negedge clk) if (rst_n) begin
    for (int i = 0; i < N; i++) begin
      if (!in_valid[i] || in_ready_q[i]) begin
        if (sent[i] < 500 && (rr_phase || $urandom_range(0, 2) == 0)) begin
          in_valid[i] = 1;
          in_data[i]  = word_t'((i << 12) | sent[i]);
          sent[i]++;
        end else in_valid[i] = 0;
      end
    end
    out_ready = rr_phase ? 1'b1 : ($urandom_range(0, 3) != 0);
  end

  // remember which inputs were taken at the last edge
  always @(posedge clk) in_ready_q <= in_ready & in_valid;

  // sink
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    int src, seq;
    src = int'(out_data[15:12]);
    seq = int'(out_data[11:0]);
    check(src < N, "bad source");
    if (src < N) begin
      check(seq == rcvd[src], $sformatf("source %0d: word %0d, expected %0d", src, seq, rcvd[src]));
      rcvd[src] = seq + 1;
      if (rr_phase && rr_words > 2 && rcvd[0] < 480 && rcvd[1] < 480 && rcvd[2] < 480) begin
        check(src == (last_src + 1) % N, $sformatf("round robin: %0d after %0d", src, last_src));
      end
      last_src = src;
      rr_words++;
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0;
    in_valid = '0; in_data = '0; out_ready = 0; rr_phase = 0; rr_words = 0; last_src = 0;
    for (int i = 0; i < N; i++) begin sent[i] = 0; rcvd[i] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    wait (rcvd[0] >= 200 && rcvd[1] >= 200 && rcvd[2] >= 200);
    // let the sources finish their first half, then stream continuously
    @(negedge clk);
    rr_phase = 1;
    rr_words = 0;
    repeat (10) @(posedge clk);
    t0 = rr_words;
    repeat (200) @(posedge clk);
    check(rr_words - t0 == 200, $sformatf("throughput: %0d words in 200 cycles", rr_words - t0));
    wait (rcvd[0] == 500 && rcvd[1] == 500 && rcvd[2] == 500);
    for (int i = 0; i < N; i++) check(rcvd[i] == 500, "words missing");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
