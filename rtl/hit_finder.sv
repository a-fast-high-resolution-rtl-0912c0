// hit_finder: pulse finding and charge-division z for one drift-chamber wire.
//
// Both ends of a sense wire are sampled at 80 MHz with 8-bit FADCs. A hit is
// the sample at which the summed signal A+B first rises above a programmable
// noise threshold. From that sample on, INT_LEN samples of each end are summed
// (QA, QB), and the hit leaves with
//     z = 127 * (QA - QB) / (QA + QB)        (signed, -127..127)
// which is the charge-division estimate of the position along the wire.
//
// Interface: one sample pair per clock. hit is a one-cycle pulse exactly
// INT_LEN clocks after the cycle in which the crossing sample was presented,
// together with z. While a window is open no new hit starts, and a new hit
// needs the sum to have fallen to or below the threshold first.
//
// Follows the paper: threshold pulse finding on 80 MHz 8-bit samples and z by
// charge division of the two wire ends. This design's own choices: the
// integration length, the z scale, the dead time, and that the hit time is
// the crossing sample (the paper's 2-3 ns sub-sample timing is not built).
module hit_finder
  import ftt_pkg::*;
#(
  parameter int INT_LEN = 4
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic [SAMPLE_W-1:0]        sample_a,
  input  logic [SAMPLE_W-1:0]        sample_b,
  input  logic [SAMPLE_W:0]          threshold,
  output logic                       hit,
  output logic signed [Z_W-1:0]      z
);

  localparam int QW = SAMPLE_W + $clog2(INT_LEN) + 1;

  logic [SAMPLE_W:0]        sum;
  logic                     armed;      // sum was at or below threshold
  logic                     busy;
  logic [$clog2(INT_LEN+1)-1:0] cnt;
  logic [QW-1:0]            qa, qb;
  logic [QW-1:0]            qa_n, qb_n;
  logic                     start;

  assign sum   = {1'b0, sample_a} + {1'b0, sample_b};
  assign start = !busy && armed && (sum > threshold);
  assign qa_n  = (start ? '0 : qa) + QW'(sample_a);
  assign qb_n  = (start ? '0 : qb) + QW'(sample_b);

  // charge division on the final sums
  function automatic logic signed [Z_W-1:0] divide(input logic [QW-1:0] a,
                                                    input logic [QW-1:0] b);
    int signed num;
    int signed den;
    num = (int'(a) - int'(b)) * 127;
    den = int'(a) + int'(b);
    if (den == 0) return '0;
    return Z_W'(num / den);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      armed <= 1'b0;
      busy  <= 1'b0;
      cnt   <= '0;
      qa    <= '0;
      qb    <= '0;
      hit   <= 1'b0;
      z     <= '0;
    end else begin
      armed <= (sum <= threshold);
      hit   <= 1'b0;
      if (start || busy) begin
        qa <= qa_n;
        qb <= qb_n;
        if ((start ? 1 : int'(cnt) + 1) == INT_LEN) begin
          busy <= 1'b0;
          hit  <= 1'b1;
          z    <= divide(qa_n, qb_n);
        end else begin
          busy <= 1'b1;
          cnt  <= start ? 1 : cnt + 1'b1;
        end
      end
    end
  end

endmodule
