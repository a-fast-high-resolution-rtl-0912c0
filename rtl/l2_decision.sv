// l2_decision: event quantities and second-level trigger elements from the
// fitted tracks.
//
// Fitted tracks of one event arrive one per cycle at most. The block counts
// them, counts those with transverse momentum above pt_cut, and sums the
// transverse momenta (scalar sum). When event_end is raised the totals are
// latched, compared with their thresholds, and the accumulators restart. A
// track that arrives in the event_end cycle still belongs to the event.
//   trig[0]  mult    >= mult_thr       track multiplicity
//   trig[1]  n_hi    >= hi_thr         multiplicity above the pt cut
//   trig[2]  pt_sum  >= sum_thr        scalar momentum sum
//   trig[3]  mult    >  N_TRK_MAX      more tracks than the design handles
//
// Interface: outputs are registered and valid from the cycle after
// event_end, with decision pulsing for one cycle.
//
// From the paper: the decision card collects the fitted tracks and forms
// trigger signals from track-based quantities like momentum sums; the design
// handles up to 48 tracks. Own choices: which quantities, their widths and
// the overflow element. Invariant masses, which the paper also names, are not
// built.
module l2_decision
  import ftt_pkg::*;
#(
  parameter int N_TRK_MAX = MAX_TRACKS
) (
  input  logic                clk,
  input  logic                rst_n,
  input  fit_track_t          fit,
  input  logic                fit_valid,
  input  logic                event_end,
  input  logic [15:0]         pt_cut,
  input  logic [7:0]          mult_thr,
  input  logic [7:0]          hi_thr,
  input  logic [21:0]         sum_thr,
  output logic [7:0]          mult,
  output logic [7:0]          n_hi,
  output logic [21:0]         pt_sum,
  output logic [3:0]          trig,
  output logic                decision
);

  logic [7:0]  acc_n, acc_hi;
  logic [21:0] acc_sum;
  logic [7:0]  nx_n, nx_hi;
  logic [21:0] nx_sum;

  always_comb begin
    nx_n   = acc_n;
    nx_hi  = acc_hi;
    nx_sum = acc_sum;
    if (fit_valid) begin
      if (acc_n != 8'hff) nx_n = acc_n + 1'b1;
      if (fit.pt_mev > pt_cut && acc_hi != 8'hff) nx_hi = acc_hi + 1'b1;
      nx_sum = acc_sum + 22'(fit.pt_mev);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_n    <= '0;
      acc_hi   <= '0;
      acc_sum  <= '0;
      mult     <= '0;
      n_hi     <= '0;
      pt_sum   <= '0;
      trig     <= '0;
      decision <= 1'b0;
    end else begin
      decision <= event_end;
      if (event_end) begin
        mult     <= nx_n;
        n_hi     <= nx_hi;
        pt_sum   <= nx_sum;
        trig[0]  <= nx_n >= mult_thr;
        trig[1]  <= nx_hi >= hi_thr;
        trig[2]  <= nx_sum >= sum_thr;
        trig[3]  <= int'(nx_n) > N_TRK_MAX;
        acc_n    <= '0;
        acc_hi   <= '0;
        acc_sum  <= '0;
      end else begin
        acc_n    <= nx_n;
        acc_hi   <= nx_hi;
        acc_sum  <= nx_sum;
      end
    end
  end

endmodule
