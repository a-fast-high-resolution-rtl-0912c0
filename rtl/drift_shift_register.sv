// drift_shift_register: 80 MHz hit shift register of one wire, with its
// parallel z register and the 20 MHz coarse image.
//
// Every clock the register moves one place and the current hit bit enters at
// position 0. After k clocks a hit sits at position k. So the register is a
// picture of drift time: a track from the bunch crossing of a given moment
// has its hits at positions set by their drift distances. The z of each hit
// moves along in a parallel register. The coarse image ORs four neighbouring
// positions, so the pattern logic sees the hits at 20 MHz granularity.
//
// The paper draws a "left" and a "right" register per wire fed from
// opposite ends. They hold mirror images of the same hits, so one register
// is kept per wire and the pattern logic reads it from either side.
//
// hold (raised after an L1 accept) freezes both registers so the refinement
// can re-read the event. Reset clears them. Outputs are the register state
// itself: fine, coarse and z are valid in the cycle after a shift.
//
// From the paper: the 80 MHz shift registers, the OR of four entries, the
// parallel z register and the hold after L1. Own choices: the depth and the
// reset.
module drift_shift_register
  import ftt_pkg::*;
#(
  parameter int DEPTH = SR_DEPTH
) (
  input  logic                             clk,
  input  logic                             rst_n,
  input  logic                             hold,
  input  logic                             hit_in,
  input  logic signed [Z_W-1:0]            z_in,
  output logic [DEPTH-1:0]                 fine,
  output logic [DEPTH/4-1:0]               coarse,
  output logic [DEPTH-1:0][Z_W-1:0]        z
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fine <= '0;
      z    <= '0;
    end else if (!hold) begin
      fine <= {fine[DEPTH-2:0], hit_in};
      z    <= {z[DEPTH-2:0], (hit_in ? z_in : Z_W'(0))};
    end
  end

  always_comb begin
    for (int j = 0; j < DEPTH/4; j++)
      coarse[j] = |fine[4*j +: 4];
  end

endmodule
