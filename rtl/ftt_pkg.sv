// ftt_pkg: constants and record types shared by the Fast Track Trigger RTL.
//
// The trigger reads four trigger layers of the central jet chamber. Each
// trigger layer is made of drift cells with three sense wires. A front-end
// cell digitises both ends of every wire at 80 MHz (eight samples per HERA
// bunch crossing). It keeps the hits in 80 MHz shift registers and matches
// them against patterns at 20 MHz. The L1 path carries kappa-phi bins. The L2
// path carries refined segments (kappa, phi and the z of the three hits),
// then linked tracks, then tracks fitted outside this RTL.
//
// Numbers that come from the paper: 8-bit samples, four layers of three
// wires, 64 pattern CAMs per FPGA, 40 kappa x 640 phi bins at L2, 25 CAMs per
// layer in the L2 linker, 4 DSPs per fitter card, up to 48 tracks. The other
// widths and depths here are this design's own choices.
package ftt_pkg;

  localparam int SAMPLE_W    = 8;    // FADC resolution
  localparam int Z_W         = 8;    // signed charge-division z
  localparam int WIRES       = 3;    // wires per trigger-layer cell
  localparam int NLAYERS     = 4;    // trigger layers
  localparam int SR_DEPTH    = 88;   // 80 MHz shift register length (about 1.1 us)
  localparam int CLK_PER_BC  = 8;    // 80 MHz clocks per bunch crossing
  localparam int CAM_ENTRIES = 64;   // pattern CAMs per front-end FPGA

  // L1 kappa-phi space
  localparam int K1_BINS     = 16;
  localparam int P1_BINS     = 120;

  // L2 kappa-phi space
  localparam int K2_BINS     = 40;
  localparam int P2_BINS     = 640;
  localparam int K2_W        = 6;
  localparam int P2_W        = 10;

  localparam int N_DSP       = 4;
  localparam int MAX_TRACKS  = 48;

  // Refined track segment as sent from a front-end cell to L2.
  typedef struct packed {
    logic [1:0]                        layer;
    logic [K2_W-1:0]                   kappa;
    logic [P2_W-1:0]                   phi;
    logic [WIRES-1:0][Z_W-1:0]         z;      // z of the hit on each wire row
  } segment_t;

  // Linked track: one segment slot per layer, lmask says which are filled.
  typedef struct packed {
    logic [NLAYERS-1:0]                lmask;
    segment_t [NLAYERS-1:0]            seg;
  } l2_track_t;

  // Fitted track as returned by a DSP.
  typedef struct packed {
    logic [15:0]                       pt_mev;  // transverse momentum, MeV/c
    logic                              charge;  // 1 = negative
    logic [P2_W-1:0]                   phi;
    logic signed [9:0]                 z0;      // vertex z, 2 mm units
  } fit_track_t;

  // What a DSP returns for each track it was given.
  typedef struct packed {
    logic                              ok;      // fit succeeded
    fit_track_t                        trk;
  } fit_result_t;

  // Configuration write targets of a front-end cell.
  typedef enum logic [1:0] {
    CFG_CAM   = 2'd0,   // addr = {entry, row}, data = row mask
    CFG_VALID = 2'd1,   // addr = LUT address, data[0] = validation bit
    CFG_KPHI  = 2'd2    // addr = LUT address, data = {kappa, phi}
  } cfg_target_e;

  typedef struct packed {
    logic                              we;
    logic [7:0]                        cell_id;   // global cell number 0..149
    cfg_target_e                       target;
    logic [11:0]                       addr;
    logic [65:0]                       data;
  } cfg_write_t;

endpackage
