// tb_segment_cam: loads random row masks (some rows and entries left
// empty), applies random coarse images and compares the registered match
// vector with the rule computed here: an entry matches when it has a
// non-empty row and every non-empty row sees a hit inside its mask. Also
// checks that match only updates with ce and the pattern read port.
module tb_segment_cam;
  import ftt_pkg::*;

  localparam int E = 8, RW = 12;
  logic clk = 0, rst_n = 0, ce;
  logic [2:0][RW-1:0] key;
  logic cfg_we;
  logic [2:0] cfg_entry, rd_entry;
  logic [1:0] cfg_row;
  logic [RW-1:0] cfg_mask;
  logic [2:0][RW-1:0] rd_mask;
  logic [E-1:0] match_now, match;
  int checks = 0, failures = 0;

  segment_cam #(.ENTRIES(E), .ROW_W(RW)) dut (.*);

  always #5 clk = ~clk;

  logic [RW-1:0] pat [E][3];

  function automatic logic [E-1:0] expect_match(input logic [2:0][RW-1:0] k);
    logic [E-1:0] m;
    for (int e = 0; e < E; e++) begin
      bit ok, any;
      ok = 1; any = 0;
      for (int r = 0; r < 3; r++)
        if (pat[e][r] != 0) begin
          any = 1;
          if ((pat[e][r] & k[r]) == 0) ok = 0;
        end
      m[e] = ok && any;
    end
    return m;
  endfunction

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [E-1:0] prev;
    ce = 0; key = '0; cfg_we = 0; cfg_entry = 0; cfg_row = 0; cfg_mask = 0; rd_entry = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int e = 0; e < E; e++)
      for (int r = 0; r < 3; r++) begin
        // a few masked coarse positions per row; entry 7 stays empty
        if (e == 7 || (e == 3 && r == 1)) pat[e][r] = '0;
        else pat[e][r] = RW'(1) << $urandom_range(0, RW - 2) | (($urandom_range(0,1) == 1) ? RW'(1) << $urandom_range(0, RW-1) : '0);
        @(negedge clk);
        cfg_we = 1; cfg_entry = 3'(e); cfg_row = 2'(r); cfg_mask = pat[e][r];
      end
    @(negedge clk);
    cfg_we = 0;
    for (int e = 0; e < E; e++) begin
      rd_entry = 3'(e);
      #1;
      for (int r = 0; r < 3; r++) check(rd_mask[r] == pat[e][r], "read port");
    end
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      prev = match;
      for (int r = 0; r < 3; r++)
        for (int b = 0; b < RW; b++)
          key[r][b] = ($urandom_range(0, 2) == 0);
      // now and then copy an entry's pattern into the key to force matches
      if (n % 3 == 0) begin
        int e = int'($urandom_range(0, E - 1));
        for (int r = 0; r < 3; r++) key[r] = key[r] & pat[e][r] | pat[e][r] & RW'($urandom);
      end
      ce = (n % 4 != 1);
      #1;
      check(match_now == expect_match(key), $sformatf("match_now n=%0d", n));
      @(posedge clk);
      #1;
      if (ce) check(match == expect_match(key), $sformatf("match n=%0d got %b exp %b", n, match, expect_match(key)));
      else    check(match == prev, "match changed without ce");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
