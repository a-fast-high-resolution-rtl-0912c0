// cam_encoder: encoded-mode read-out of a CAM match vector.
//
// An unencoded CAM gives one bit per location. In encoded mode the same
// result is read as a list of the matching addresses, which then index a
// parallel RAM (the "tag field" method). This module captures a match vector
// on start and hands out the set addresses, lowest first, one per accepted
// transfer. The reported bit is cleared when addr is taken (valid && ready).
//
// Interface: valid/ready stream of addresses. empty is high when no address
// is left. A start while addresses are pending replaces them. The first
// address is offered in the cycle after start.
//
// From the paper: the encoded mode and its list of match addresses. Own
// choice: the lowest-first order.
module cam_encoder #(
  parameter int N  = 64,
  localparam int AW = $clog2(N)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic [N-1:0]    match,
  output logic [AW-1:0]   addr,
  output logic            valid,
  input  logic            ready,
  output logic            empty
);

  logic [N-1:0] pending;

  always_comb begin
    addr = '0;
    for (int i = N - 1; i >= 0; i--)
      if (pending[i]) addr = AW'(i);
  end

  assign valid = |pending;
  assign empty = !valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                 pending <= '0;
    else if (start)             pending <= match;
    else if (valid && ready)    pending[addr] <= 1'b0;
  end

endmodule
