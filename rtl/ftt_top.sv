// ftt_top: the digital chain of the Fast Track Trigger, from FADC samples to
// the L1 and L2 trigger elements.
//
// Front end: 150 fem_cell instances, one per drift cell of the four trigger
// layers (30, 30, 30 and 60 cells). Each sees its own three wires and the
// shift registers of its two neighbours in the same layer (the ring closes
// around the chamber). Cells of layers 1-3 carry 64 L1 kappa-phi bins
// (16 kappa x 4 local phi), cells of layer 4 carry 32 (16 kappa x 2 local
// phi), so that every layer spans the same 16 x 120 L1 grid.
//
// L1 path (every bunch crossing): the bins of all cells are placed into the
// four layer maps of l1_linker, which gives multiplicities, t0 and the L1
// trigger elements.
//
// L2 path (after an L1 accept): l1_keep holds all shift registers and
// starts the refinement in every cell. Refined segments are merged five
// cells to a front-end module (I/O controller), six modules to a Merger Card
// (five cards, two for layer 4), and the five cards into the L2 linker. When
// every cell has finished and the merge tree is empty, the linker gets
// event_end and the shift registers run again. Linked tracks go through
// the load balancer to four DSP ports. The DSPs are outside this design.
// Their results come back on four ports and are merged into l2_decision,
// which closes the event once as many results have returned as tracks
// were sent.
//
// Timing: one clock, 8 clocks per bunch crossing (bc_out strobes in the
// last clock of each crossing), coarse matching every 4 clocks.
//
// From the paper: the card structure and data flow of its Fig. 2, five
// cells per front-end module, 30 modules, hold-and-refine after L1, one
// fitter card with four DSPs, the decision card. Own choices: the cell
// counts per layer (from the chamber geometry), the neighbour ring, the
// parallel buses in place of LVDS links, the single clock, the end-of-event
// bookkeeping and the configuration bus.
//
// Lint note: rst_n is an asynchronous reset everywhere in the logic; the
// only synchronous use is the "disable iff" of the assertion in
// stream_merger, which is not a circuit.
module ftt_top
  import ftt_pkg::*;
#(
  parameter int NCELL_L123 = 30,
  parameter int NCELL_L4   = 60,
  parameter int DEPTH      = SR_DEPTH,
  localparam int NCELL     = 3 * NCELL_L123 + NCELL_L4,
  localparam int NFEM      = NCELL / 5,
  localparam int NB1       = K1_BINS * P1_BINS,
  localparam int CW1       = $clog2(NB1 + 1)
) (
  input  logic                                          clk,
  input  logic                                          rst_n,
  // front end
  input  logic [SAMPLE_W:0]                             threshold,
  input  logic [NCELL-1:0][WIRES-1:0][SAMPLE_W-1:0]     sample_a,
  input  logic [NCELL-1:0][WIRES-1:0][SAMPLE_W-1:0]     sample_b,
  input  cfg_write_t                                    cfg,
  output logic                                          bc_out,
  // L1
  input  logic [3:0]                                    l1_cut_lo,
  input  logic [3:0]                                    l1_cut_hi,
  input  logic [2:0][CW1-1:0]                           l1_mult_thr,
  input  logic [CW1-1:0]                                l1_t0_min,
  output logic [2:0][CW1-1:0]                           l1_mult,
  output logic                                          l1_t0,
  output logic [3:0]                                    l1_trig,
  input  logic                                          l1_keep,
  output logic                                          fe_hold,
  // L2 linking and DSPs
  output l2_track_t [N_DSP-1:0]                         dsp_trk,
  output logic [N_DSP-1:0]                              dsp_valid,
  input  logic [N_DSP-1:0]                              dsp_ready,
  input  fit_result_t [N_DSP-1:0]                       dsp_res,
  input  logic [N_DSP-1:0]                              dsp_res_valid,
  output logic [N_DSP-1:0]                              dsp_res_ready,
  output logic [7:0]                                    l2_n_linked,
  output logic [7:0]                                    l2_seg_overflow,
  output logic [15:0]                                   l2_link_cycles,
  output logic                                          l2_link_done,
  // L2 decision
  input  logic [15:0]                                   l2_pt_cut,
  input  logic [7:0]                                    l2_mult_thr,
  input  logic [7:0]                                    l2_hi_thr,
  input  logic [21:0]                                   l2_sum_thr,
  output logic [7:0]                                    l2_mult,
  output logic [7:0]                                    l2_n_hi,
  output logic [21:0]                                   l2_pt_sum,
  output logic [3:0]                                    l2_trig,
  output logic                                          l2_decision
);

  // ---------------------------------------------------------------- timing
  logic [2:0] phase;
  logic       ce20, bc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) phase <= '0;
    else        phase <= phase + 1'b1;
  end
  assign ce20   = (phase[1:0] == 2'd3);
  assign bc     = (phase == 3'd7);
  assign bc_out = bc;

  // ------------------------------------------------------------ front end
  logic [NCELL-1:0][WIRES-1:0][DEPTH-1:0]          fine;
  logic [NCELL-1:0][WIRES-1:0][DEPTH-1:0][Z_W-1:0] zimg;
  segment_t [NCELL-1:0]                            cseg;
  logic [NCELL-1:0]                                cseg_valid, cseg_ready;
  logic [NCELL-1:0]                                cdone;
  logic [NLAYERS-1:0][NB1-1:0]                     layer_bins;
  logic                                            refine_start;

  for (genvar l = 0; l < NLAYERS; l++) begin : g_layer
    localparam int NC   = (l == 3) ? NCELL_L4 : NCELL_L123;
    localparam int BASE = l * NCELL_L123;
    localparam int PL   = P1_BINS / NC;
    localparam int ENT  = K1_BINS * PL;

    for (genvar c = 0; c < NC; c++) begin : g_cell
      localparam int G  = BASE + c;
      localparam int GL = BASE + ((c + NC - 1) % NC);
      localparam int GR = BASE + ((c + 1) % NC);
      logic [ENT-1:0] cbins;

      fem_cell #(.LAYER(2'(l)), .ENTRIES(ENT), .DEPTH(DEPTH)) u_cell (
        .clk, .rst_n,
        .ce            (ce20),
        .hold          (fe_hold),
        .refine_start,
        .threshold,
        .sample_a      (sample_a[G]),
        .sample_b      (sample_b[G]),
        .own_fine      (fine[G]),
        .own_z         (zimg[G]),
        .nb_left_fine  (fine[GL]),
        .nb_left_z     (zimg[GL]),
        .nb_right_fine (fine[GR]),
        .nb_right_z    (zimg[GR]),
        .cfg_we        (cfg.we && int'(cfg.cell_id) == G),
        .cfg_target    (cfg.target),
        .cfg_addr      (cfg.addr),
        .cfg_data      (cfg.data),
        .l1_bins       (cbins),
        .seg           (cseg[G]),
        .seg_valid     (cseg_valid[G]),
        .seg_ready     (cseg_ready[G]),
        .refine_done   (cdone[G])
      );

      // local bin k*PL+pl lands on global phi c*PL+pl
      for (genvar k = 0; k < K1_BINS; k++) begin : g_k
        assign layer_bins[l][k*P1_BINS + c*PL +: PL] = cbins[k*PL +: PL];
      end
    end
  end

  // ------------------------------------------------------------------- L1
  logic [NB1-1:0] l1_linked;

  l1_linker u_l1 (
    .clk, .rst_n, .bc,
    .layer_bins,
    .cut_lo   (l1_cut_lo),
    .cut_hi   (l1_cut_hi),
    .mult_thr (l1_mult_thr),
    .t0_min   (l1_t0_min),
    .linked   (l1_linked),
    .mult     (l1_mult),
    .t0       (l1_t0),
    .trig     (l1_trig)
  );

  // ------------------------------------------------ refinement control
  typedef enum logic [1:0] {R_RUN, R_START, R_WAIT} rstate_e;
  rstate_e          rstate;
  logic [NCELL-1:0] done_seen;
  logic             tree_busy;
  logic             l2_event_end;

  assign refine_start = (rstate == R_START);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rstate       <= R_RUN;
      fe_hold      <= 1'b0;
      done_seen    <= '0;
      l2_event_end <= 1'b0;
    end else begin
      l2_event_end <= 1'b0;
      unique case (rstate)
        R_RUN: if (l1_keep) begin
          fe_hold   <= 1'b1;
          done_seen <= '0;
          rstate    <= R_START;
        end
        R_START: rstate <= R_WAIT;
        R_WAIT: begin
          done_seen <= done_seen | cdone;
          if (&done_seen && !tree_busy) begin
            l2_event_end <= 1'b1;
            fe_hold      <= 1'b0;
            rstate       <= R_RUN;
          end
        end
        default: rstate <= R_RUN;
      endcase
    end
  end

  // ------------------------------------------------------------ merge tree
  segment_t [NFEM-1:0] fem_seg;
  logic [NFEM-1:0]     fem_valid, fem_ready;
  segment_t [4:0]      mc_seg;
  logic [4:0]          mc_valid, mc_ready;
  segment_t            lk_seg;
  logic                lk_valid, lk_ready;

  for (genvar f = 0; f < NFEM; f++) begin : g_fem
    stream_merger #(.N(5), .T(segment_t)) u_ioc (
      .clk, .rst_n,
      .in_data   (cseg[5*f +: 5]),
      .in_valid  (cseg_valid[5*f +: 5]),
      .in_ready  (cseg_ready[5*f +: 5]),
      .out_data  (fem_seg[f]),
      .out_valid (fem_valid[f]),
      .out_ready (fem_ready[f])
    );
  end

  for (genvar m = 0; m < 5; m++) begin : g_mc
    localparam int FPM = NFEM / 5;
    stream_merger #(.N(FPM), .T(segment_t)) u_mc (
      .clk, .rst_n,
      .in_data   (fem_seg[FPM*m +: FPM]),
      .in_valid  (fem_valid[FPM*m +: FPM]),
      .in_ready  (fem_ready[FPM*m +: FPM]),
      .out_data  (mc_seg[m]),
      .out_valid (mc_valid[m]),
      .out_ready (mc_ready[m])
    );
  end

  stream_merger #(.N(5), .T(segment_t)) u_lk_in (
    .clk, .rst_n,
    .in_data   (mc_seg),
    .in_valid  (mc_valid),
    .in_ready  (mc_ready),
    .out_data  (lk_seg),
    .out_valid (lk_valid),
    .out_ready (lk_ready)
  );

  assign tree_busy = (|cseg_valid) || (|fem_valid) || (|mc_valid) || lk_valid;

  // ------------------------------------------------------------ L2 linker
  l2_track_t trk;
  logic      trk_valid, trk_ready;

  l2_linker u_l2 (
    .clk, .rst_n,
    .seg         (lk_seg),
    .seg_valid   (lk_valid),
    .seg_ready   (lk_ready),
    .event_end   (l2_event_end),
    .trk,
    .trk_valid,
    .trk_ready,
    .done        (l2_link_done),
    .n_tracks    (l2_n_linked),
    .overflow    (l2_seg_overflow),
    .link_cycles (l2_link_cycles)
  );

  load_balancer u_lb (
    .clk, .rst_n,
    .in_trk    (trk),
    .in_valid  (trk_valid),
    .in_ready  (trk_ready),
    .dsp_trk,
    .dsp_valid,
    .dsp_ready,
    .level     ()
  );

  // ---------------------------------------------------- fitted tracks back
  fit_result_t res;
  logic        res_valid;
  logic        await;           // linking done, results outstanding
  logic [7:0]  n_expected, n_back;
  logic        dec_end;

  stream_merger #(.N(N_DSP), .T(fit_result_t)) u_fit_in (
    .clk, .rst_n,
    .in_data   (dsp_res),
    .in_valid  (dsp_res_valid),
    .in_ready  (dsp_res_ready),
    .out_data  (res),
    .out_valid (res_valid),
    .out_ready (1'b1)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      await      <= 1'b0;
      n_expected <= '0;
      n_back     <= '0;
    end else begin
      if (l2_link_done) begin
        await      <= 1'b1;
        n_expected <= l2_n_linked;
      end
      if (res_valid) n_back <= n_back + 1'b1;
      if (dec_end) begin
        await  <= 1'b0;
        n_back <= '0;
      end
    end
  end

  assign dec_end = await && !l2_link_done &&
                   ((n_back + 8'(res_valid)) == n_expected);

  l2_decision u_dec (
    .clk, .rst_n,
    .fit       (res.trk),
    .fit_valid (res_valid && res.ok),
    .event_end (dec_end),
    .pt_cut    (l2_pt_cut),
    .mult_thr  (l2_mult_thr),
    .hi_thr    (l2_hi_thr),
    .sum_thr   (l2_sum_thr),
    .mult      (l2_mult),
    .n_hi      (l2_n_hi),
    .pt_sum    (l2_pt_sum),
    .trig      (l2_trig),
    .decision  (l2_decision)
  );

endmodule
