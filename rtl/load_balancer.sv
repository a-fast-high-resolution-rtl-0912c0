// load_balancer: shares linked tracks among the DSPs of a fitter card.
//
// Each DSP has a queue of QDEPTH tracks in front of it. A new track goes to
// the queue holding the fewest tracks (the lowest DSP number on ties), so a
// DSP that is slow on a hard track receives fewer new ones. The input stalls
// (in_ready low) only when the chosen queue is full, which happens only when
// all queues are full.
//
// Interface: valid/ready on the input and on each DSP output. A track
// written in one cycle can be read by its DSP in the next. level gives each
// queue's fill.
//
// From the paper: four DSPs per fitter card fed through a load-balancing
// algorithm. Own choices: shortest-queue-first and the queue depth (the paper
// does not give the algorithm).
module load_balancer
  import ftt_pkg::*;
#(
  parameter int NQ     = N_DSP,
  parameter int QDEPTH = 8,
  localparam int QW    = $clog2(QDEPTH),
  localparam int NW    = (NQ > 1) ? $clog2(NQ) : 1
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  l2_track_t                  in_trk,
  input  logic                       in_valid,
  output logic                       in_ready,
  output l2_track_t [NQ-1:0]         dsp_trk,
  output logic [NQ-1:0]              dsp_valid,
  input  logic [NQ-1:0]              dsp_ready,
  output logic [NQ-1:0][QW:0]        level
);

  l2_track_t [NQ-1:0][QDEPTH-1:0] q;
  logic [NQ-1:0][QW-1:0]          rp, wp;
  logic [NW-1:0]                  sel;
  logic [NQ-1:0]                  push, pop;

  always_comb begin
    sel = '0;
    for (int i = 1; i < NQ; i++)
      if (level[i] < level[sel]) sel = NW'(i);
  end

  assign in_ready = (level[sel] < (QW+1)'(QDEPTH));

  always_comb begin
    for (int i = 0; i < NQ; i++) begin
      push[i]      = in_valid && in_ready && (sel == NW'(i));
      dsp_valid[i] = (level[i] != '0);
      pop[i]       = dsp_valid[i] && dsp_ready[i];
      dsp_trk[i]   = q[i][rp[i]];
    end
  end

  always_ff @(posedge clk) begin
    for (int i = 0; i < NQ; i++)
      if (push[i]) q[i][wp[i]] <= in_trk;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rp    <= '0;
      wp    <= '0;
      level <= '0;
    end else begin
      for (int i = 0; i < NQ; i++) begin
        if (push[i]) wp[i] <= QW'((int'(wp[i]) + 1) % QDEPTH);
        if (pop[i])  rp[i] <= QW'((int'(rp[i]) + 1) % QDEPTH);
        if (push[i] && !pop[i])      level[i] <= level[i] + 1'b1;
        else if (pop[i] && !push[i]) level[i] <= level[i] - 1'b1;
      end
    end
  end

  // a queue never goes past its depth
  for (genvar i = 0; i < NQ; i++) begin : g_chk
    a_level: assert property (@(posedge clk) disable iff (!rst_n)
                              level[i] <= (QW+1)'(QDEPTH));
  end

endmodule
