// tb_drift_shift_register: random hits enter the register; every cycle the
// fine image, the 4-to-1 OR coarse image and the z register are compared
// with a reference model kept here as arrays. Stretches with hold high must
// leave everything unchanged.
module tb_drift_shift_register;
  import ftt_pkg::*;

  localparam int D = 24;
  logic clk = 0, rst_n = 0;
  logic hold, hit_in;
  logic signed [7:0] z_in;
  logic [D-1:0] fine;
  logic [D/4-1:0] coarse;
  logic [D-1:0][7:0] z;
  int checks = 0, failures = 0;

  drift_shift_register #(.DEPTH(D)) dut (.clk, .rst_n, .hold, .hit_in, .z_in,
                                         .fine, .coarse, .z);

  always #5 clk = ~clk;

  bit      mf [D];
  int      mz [D];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    hold = 0; hit_in = 0; z_in = 0;
    for (int i = 0; i < D; i++) begin mf[i] = 0; mz[i] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      hold   = ($urandom_range(0, 9) == 0) || (n > 1000 && n < 1040);
      hit_in = ($urandom_range(0, 3) == 0);
      z_in   = 8'($urandom);
      @(posedge clk);
      if (!hold) begin
        for (int i = D - 1; i > 0; i--) begin mf[i] = mf[i-1]; mz[i] = mz[i-1]; end
        mf[0] = hit_in;
        mz[0] = hit_in ? int'(z_in) : 0;
      end
      #1;
      for (int i = 0; i < D; i++) begin
        checks++;
        if (fine[i] != mf[i] || (mf[i] && int'($signed(z[i])) != mz[i])) begin
          failures++;
          if (failures < 10) $display("FAIL n=%0d pos %0d", n, i);
        end
      end
      for (int j = 0; j < D/4; j++) begin
        checks++;
        if (coarse[j] != (mf[4*j] | mf[4*j+1] | mf[4*j+2] | mf[4*j+3])) begin
          failures++;
          if (failures < 10) $display("FAIL coarse n=%0d bit %0d", n, j);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
