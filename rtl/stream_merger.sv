// stream_merger: merges N valid/ready streams into one, round robin.
//
// Used for every place where the trigger bundles data: the I/O controller of
// a front-end module (five FPGAs), the Merger Cards in front of the L2
// linker, and the collection of the DSPs' fitted tracks. Each cycle the
// output register, if free, takes one word from the next requesting input
// after the one served last. One word per cycle passes when the output is
// always ready.
//
// Interface: standard valid/ready; a word moves when valid && ready. The
// output is registered (one cycle latency). in_ready is high for the input
// whose word is taken in that cycle.
//
// From the paper: the collection of segments by the I/O controller and the
// Merger Cards. Own choice: the round-robin policy; the LVDS serial link
// between boards is replaced by this parallel stream.
module stream_merger #(
  parameter int  N = 5,
  parameter type T = logic [31:0]
) (
  input  logic           clk,
  input  logic           rst_n,
  input  T [N-1:0]       in_data,
  input  logic [N-1:0]   in_valid,
  output logic [N-1:0]   in_ready,
  output T               out_data,
  output logic           out_valid,
  input  logic           out_ready
);

  localparam int IW = (N > 1) ? $clog2(N) : 1;

  logic [IW-1:0] last;
  logic [IW-1:0] pick;
  logic          any;
  logic          take;

  always_comb begin
    pick = last;
    any  = 1'b0;
    for (int k = 1; k <= N; k++) begin
      int idx;
      idx = (int'(last) + k) % N;
      if (!any && in_valid[idx]) begin
        any  = 1'b1;
        pick = IW'(idx);
      end
    end
  end

  assign take = any && (!out_valid || out_ready);

  always_comb begin
    in_ready = '0;
    if (take) in_ready[pick] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      last      <= IW'(N - 1);
      out_valid <= 1'b0;
      out_data  <= '0;
    end else begin
      if (take) begin
        out_data  <= in_data[pick];
        out_valid <= 1'b1;
        last      <= pick;
      end else if (out_ready) begin
        out_valid <= 1'b0;
      end
    end
  end

  // a word offered on the output stays until it is taken
  property p_hold;
    @(posedge clk) disable iff (!rst_n)
      out_valid && !out_ready |=> out_valid && $stable(out_data);
  endproperty
  a_hold: assert property (p_hold);

endmodule
