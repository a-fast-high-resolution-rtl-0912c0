// l2_linker: second-level track linking of refined segments in kappa-phi
// space (40 kappa x 640 phi bins).
//
// Fill phase: refined segments of the four trigger layers are written into
// one buffer per layer (NSEG entries). The buffers are held in registers so
// that they can be searched in parallel like CAMs.
//
// Link phase (after event_end): seeds are taken from the buffers in order,
// layer 1 first, skipping segments already used by a track. For a seed at
// (ks, ps) every layer runs 25 CAM searches at once, one per bin of the 5x5
// neighbourhood (ks-2..ks+2, ps-2..ps+2), over its unused segments. This
// gives, per layer, the 5x5 piece of the kappa-phi histogram around the seed
// and the address of the first segment in each bin. A 3x3 window then slides
// over the 9 positions of the 5x5 that contain the seed. The window holding
// segments of the most layers wins (centre position first on ties). If it
// holds MIN_LAYERS layers or more, a track is built. The seed fills its own
// layer's slot. Every other layer takes the segment in the window bin closest
// to the window centre (centre, then edges, then corners) and reads it back
// from its buffer. All segments taken are marked used.
// Phi wraps around; kappa does not.
//
// Interface: segments enter on a valid/ready stream (ready only in the fill
// phase; a segment beyond NSEG in its layer is dropped and counted in
// overflow). Tracks leave on a valid/ready stream. A seed takes one cycle
// and a track one more cycle when the output is ready. done pulses at the
// end of the link phase; the buffers are then cleared for the next event.
// link_cycles counts the cycles of the last link phase; overflow holds the
// segments dropped in the current event until done.
//
// From the paper: RAM buffers per layer, the 40x640 kappa-phi space, seeds
// starting at the first trigger layer, 25 parallel CAMs per layer, the 3x3
// sliding window to find the peak, restoring the track from the parallel
// RAM. Own choices: the buffer depth, the window tie rule, MIN_LAYERS and
// the nearest-to-centre choice per layer.
module l2_linker
  import ftt_pkg::*;
#(
  parameter int KBINS      = K2_BINS,
  parameter int PBINS      = P2_BINS,
  parameter int NSEG       = 64,
  parameter int MIN_LAYERS = 2,
  localparam int SW        = $clog2(NSEG),
  localparam int NCAM      = 25
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  segment_t             seg,
  input  logic                 seg_valid,
  output logic                 seg_ready,
  input  logic                 event_end,
  output l2_track_t            trk,
  output logic                 trk_valid,
  input  logic                 trk_ready,
  output logic                 done,
  output logic [7:0]           n_tracks,
  output logic [7:0]           overflow,
  output logic [15:0]          link_cycles
);

  typedef enum logic [1:0] {S_FILL, S_LINK, S_OUT, S_DONE} state_e;
  state_e state;

  segment_t [NLAYERS-1:0][NSEG-1:0]  mem;
  logic     [NLAYERS-1:0][SW:0]      count;
  logic     [NLAYERS-1:0][NSEG-1:0]  used;

  logic [1:0]    sl;           // seed layer
  logic [SW:0]   si;           // seed index
  segment_t      seed;
  logic          seed_ok;

  // CAM search results: per layer and 5x5 offset
  logic [NLAYERS-1:0][NCAM-1:0]          occ;
  logic [NLAYERS-1:0][NCAM-1:0][SW-1:0]  hit_addr;

  // window choice
  logic [3:0]                 best_w;
  int                         best_score;
  l2_track_t                  trk_new;
  logic [NLAYERS-1:0][NSEG-1:0] take;

  assign seed    = mem[sl][si[SW-1:0]];
  assign seed_ok = (si < count[sl]) && !used[sl][si[SW-1:0]];

  function automatic int wrap_p(input int p);
    return (p < 0) ? p + PBINS : ((p >= PBINS) ? p - PBINS : p);
  endfunction

  // 25 parallel CAMs per layer
  always_comb begin
    occ      = '0;
    hit_addr = '0;
    for (int l = 0; l < NLAYERS; l++) begin
      for (int o = 0; o < NCAM; o++) begin
        int kk, pp;
        kk = int'(seed.kappa) + (o / 5) - 2;
        pp = wrap_p(int'(seed.phi) + (o % 5) - 2);
        for (int i = NSEG - 1; i >= 0; i--) begin
          if (i < int'(count[l]) && !used[l][i] && kk >= 0 && kk < KBINS &&
              int'(mem[l][i].kappa) == kk && int'(mem[l][i].phi) == pp) begin
            occ[l][o]      = 1'b1;
            hit_addr[l][o] = SW'(i);
          end
        end
      end
    end
  end

  // 3x3 sliding window over the 9 positions containing the seed
  always_comb begin
    int order [9];
    order = '{4, 0, 1, 2, 3, 5, 6, 7, 8};   // centre window first
    best_w     = 4'd4;
    best_score = -1;
    for (int n = 0; n < 9; n++) begin
      int w, cx, cy, sc;
      w  = order[n];
      cx = w / 3;          // window centre offset in kappa, 0..2 -> -1..1
      cy = w % 3;
      sc = 0;
      for (int l = 0; l < NLAYERS; l++) begin
        logic any;
        any = 1'b0;
        for (int a = 0; a < 3; a++)
          for (int b = 0; b < 3; b++)
            any = any | occ[l][(cx + a) * 5 + (cy + b)];
        sc = sc + int'(any);
      end
      if (sc > best_score) begin
        best_score = sc;
        best_w     = 4'(w);
      end
    end
  end

  // restore the full track from the buffers
  always_comb begin
    int cells [9];
    int c, o;
    cells   = '{4, 1, 3, 5, 7, 0, 2, 6, 8};  // 3x3 cells, nearest centre first
    c       = 0;
    o       = 0;
    trk_new = '0;
    take    = '0;
    for (int l = 0; l < NLAYERS; l++) begin
      if (l == int'(sl)) begin
        trk_new.lmask[l] = 1'b1;
        trk_new.seg[l]   = seed;
        take[l][si[SW-1:0]] = 1'b1;
      end else begin
        for (int n = 0; n < 9; n++) begin
          c = cells[n];
          o = (int'(best_w) / 3 + c / 3) * 5 + (int'(best_w) % 3 + c % 3);
          if (!trk_new.lmask[l] && occ[l][o]) begin
            trk_new.lmask[l] = 1'b1;
            trk_new.seg[l]   = mem[l][hit_addr[l][o]];
            take[l][hit_addr[l][o]] = 1'b1;
          end
        end
      end
    end
  end

  assign seg_ready = (state == S_FILL);

  // segment buffers (written in the fill phase, no reset needed)
  always_ff @(posedge clk) begin
    if (state == S_FILL && seg_valid && count[seg.layer] < (SW+1)'(NSEG))
      mem[seg.layer][count[seg.layer][SW-1:0]] <= seg;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_FILL;
      count       <= '0;
      used        <= '0;
      sl          <= '0;
      si          <= '0;
      trk         <= '0;
      trk_valid   <= 1'b0;
      done        <= 1'b0;
      n_tracks    <= '0;
      overflow    <= '0;
      link_cycles <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_FILL: begin
          if (seg_valid) begin
            if (count[seg.layer] < (SW+1)'(NSEG)) begin
              count[seg.layer] <= count[seg.layer] + 1'b1;
            end else begin
              overflow <= overflow + 1'b1;
            end
          end
          if (event_end) begin
            state       <= S_LINK;
            sl          <= '0;
            si          <= '0;
            n_tracks    <= '0;
            link_cycles <= '0;
          end
        end
        S_LINK: begin
          link_cycles <= link_cycles + 1'b1;
          if (si >= count[sl]) begin
            if (sl == 2'(NLAYERS - 1)) state <= S_DONE;
            else begin
              sl <= sl + 1'b1;
              si <= '0;
            end
          end else begin
            si <= si + 1'b1;
            if (seed_ok && best_score >= MIN_LAYERS) begin
              used      <= used | take;
              trk       <= trk_new;
              trk_valid <= 1'b1;
              n_tracks  <= n_tracks + 1'b1;
              state     <= S_OUT;
            end
          end
        end
        S_OUT: begin
          link_cycles <= link_cycles + 1'b1;
          if (trk_ready) begin
            trk_valid <= 1'b0;
            state     <= S_LINK;
          end
        end
        S_DONE: begin
          done     <= 1'b1;
          count    <= '0;
          used     <= '0;
          overflow <= '0;
          state    <= S_FILL;
        end
        default: state <= S_FILL;
      endcase
    end
  end

endmodule
