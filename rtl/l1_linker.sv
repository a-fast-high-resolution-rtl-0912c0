// l1_linker: first-level track linking in kappa-phi space.
//
// Every bunch crossing the front end delivers, for each of the four trigger
// layers, a map of kappa-phi bins holding a coarse track segment. A bin
// (k,p) is a linked track when it holds a segment in at least one layer and
// the 3x3 window centred on it holds segments of at least MIN_LAYERS
// different layers. Phi wraps around, kappa does not. Linked tracks are
// counted in three curvature classes:
//   mult[0]  all linked tracks
//   mult[1]  |kappa| below cut_lo   (above a low pt threshold)
//   mult[2]  |kappa| below cut_hi   (above a high pt threshold)
// where |kappa| is the distance in bins from the centre of the kappa axis.
// Because a track's segments lie in one bunch crossing only, the number of
// linked tracks peaks at the event's crossing: t0 is raised for crossing n-1
// when its count is at least t0_min, above that of crossing n-2 and not
// below that of crossing n.
//
// Interface: all outputs are registered on bc (one-cycle strobe per bunch
// crossing). mult, linked and trig[3:1] belong to the crossing whose bins
// were present at that strobe; t0 (= trig[0]) belongs to the crossing before.
// trig[i] = mult[i-1] >= mult_thr[i-1].
//
// From the paper: the 3x3 sliding window, the two-of-four layer coincidence,
// t0 from the maximum of linked tracks, multiplicities for several pt
// thresholds. Own choices: the bin counts, the centre-bin rule (so a track
// may be counted in more than one bin), the three classes and the t0 rule.
module l1_linker
  import ftt_pkg::*;
#(
  parameter int KBINS      = K1_BINS,
  parameter int PBINS      = P1_BINS,
  parameter int MIN_LAYERS = 2,
  localparam int NB        = KBINS * PBINS,
  localparam int CW        = $clog2(NB + 1)
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              bc,
  input  logic [NLAYERS-1:0][NB-1:0]        layer_bins,   // index k*PBINS+p
  input  logic [3:0]                        cut_lo,
  input  logic [3:0]                        cut_hi,
  input  logic [2:0][CW-1:0]                mult_thr,
  input  logic [CW-1:0]                     t0_min,
  output logic [NB-1:0]                     linked,
  output logic [2:0][CW-1:0]                mult,
  output logic                              t0,
  output logic [3:0]                        trig
);

  logic [NB-1:0]        link_now;
  logic [2:0][CW-1:0]   mult_now;
  logic [CW-1:0]        cnt_d1, cnt_d2;

  function automatic int pwrap(input int p);
    return (p < 0) ? p + PBINS : ((p >= PBINS) ? p - PBINS : p);
  endfunction

  always_comb begin
    for (int k = 0; k < KBINS; k++) begin
      for (int p = 0; p < PBINS; p++) begin
        int nl;
        logic centre;
        nl     = 0;
        centre = 1'b0;
        for (int l = 0; l < NLAYERS; l++) begin
          logic any;
          any = 1'b0;
          centre = centre | layer_bins[l][k*PBINS + p];
          for (int dk = -1; dk <= 1; dk++)
            for (int dp = -1; dp <= 1; dp++)
              if (k + dk >= 0 && k + dk < KBINS)
                any = any | layer_bins[l][(k+dk)*PBINS + pwrap(p+dp)];
          nl = nl + int'(any);
        end
        link_now[k*PBINS + p] = centre && (nl >= MIN_LAYERS);
      end
    end
  end

  always_comb begin
    mult_now = '0;
    for (int k = 0; k < KBINS; k++) begin
      int ak;
      ak = (k < KBINS/2) ? (KBINS/2 - 1 - k) : (k - KBINS/2);
      for (int p = 0; p < PBINS; p++) begin
        if (link_now[k*PBINS + p]) begin
          mult_now[0] = mult_now[0] + 1'b1;
          if (ak < int'(cut_lo)) mult_now[1] = mult_now[1] + 1'b1;
          if (ak < int'(cut_hi)) mult_now[2] = mult_now[2] + 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      linked <= '0;
      mult   <= '0;
      cnt_d1 <= '0;
      cnt_d2 <= '0;
      t0     <= 1'b0;
      trig   <= '0;
    end else if (bc) begin
      linked <= link_now;
      mult   <= mult_now;
      cnt_d1 <= mult_now[0];
      cnt_d2 <= cnt_d1;
      t0     <= (cnt_d1 >= t0_min) && (cnt_d1 > cnt_d2) && (cnt_d1 >= mult_now[0]);
      trig[0] <= (cnt_d1 >= t0_min) && (cnt_d1 > cnt_d2) && (cnt_d1 >= mult_now[0]);
      for (int i = 0; i < 3; i++)
        trig[i+1] <= (mult_now[i] >= mult_thr[i]);
    end
  end

endmodule
