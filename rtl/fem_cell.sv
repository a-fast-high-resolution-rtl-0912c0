// fem_cell: one front-end FPGA, serving one drift cell (three wires) of a
// trigger layer.
//
// Each wire's two FADC streams go through a hit_finder into a
// drift_shift_register. The pattern CAM bank (segment_cam) looks at the
// coarse images of the three own wires and of the same wires in the two
// neighbouring cells, so tracks that cross a cell boundary are found; its
// registered match vector is the cell's L1 kappa-phi bin output, updated on
// ce (20 MHz). On refine_start (L1 accept, with hold already high) the
// segment_refiner re-reads the held image and streams refined segments.
//
// Interface: samples every clock; own_fine/own_z go to the neighbours'
// nb_* inputs. Configuration writes (CAM rows, validation LUT, kappa-phi
// LUT) arrive on cfg_* when cfg_we is high. l1_bins: ENTRIES bits, bit
// e = kappa*PHI_LOCAL + phi_local by convention of the loaded patterns.
//
// From the paper: one FPGA per group of wires, 80 MHz hit finding, shift
// registers, neighbour wires, unencoded CAMs for L1 and refinement for L2.
// Own choices: the bundling of ports, the configuration addressing and the
// single clock.
module fem_cell
  import ftt_pkg::*;
#(
  parameter logic [1:0] LAYER   = 2'd0,
  parameter int         ENTRIES = CAM_ENTRIES,
  parameter int         DEPTH   = SR_DEPTH,
  parameter int         INT_LEN = 4,
  localparam int EW     = $clog2(ENTRIES),
  localparam int LUT_AW = EW + 2 * WIRES,
  localparam int CD     = DEPTH / 4
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  input  logic                                 ce,
  input  logic                                 hold,
  input  logic                                 refine_start,
  input  logic [SAMPLE_W:0]                    threshold,
  input  logic [WIRES-1:0][SAMPLE_W-1:0]       sample_a,
  input  logic [WIRES-1:0][SAMPLE_W-1:0]       sample_b,
  // neighbour exchange
  output logic [WIRES-1:0][DEPTH-1:0]          own_fine,
  output logic [WIRES-1:0][DEPTH-1:0][Z_W-1:0] own_z,
  input  logic [WIRES-1:0][DEPTH-1:0]          nb_left_fine,
  input  logic [WIRES-1:0][DEPTH-1:0][Z_W-1:0] nb_left_z,
  input  logic [WIRES-1:0][DEPTH-1:0]          nb_right_fine,
  input  logic [WIRES-1:0][DEPTH-1:0][Z_W-1:0] nb_right_z,
  // configuration
  input  logic                                 cfg_we,
  input  cfg_target_e                          cfg_target,
  input  logic [11:0]                          cfg_addr,
  input  logic [65:0]                          cfg_data,
  // L1 and L2 outputs
  output logic [ENTRIES-1:0]                   l1_bins,
  output segment_t                             seg,
  output logic                                 seg_valid,
  input  logic                                 seg_ready,
  output logic                                 refine_done
);

  logic [WIRES-1:0]                     hit;
  logic [WIRES-1:0][Z_W-1:0]            zh;
  logic [WIRES-1:0][CD-1:0]             own_coarse;
  logic [WIRES-1:0][3*CD-1:0]           key;
  logic [WIRES-1:0][3*DEPTH-1:0]        fine_row;
  logic [WIRES-1:0][3*DEPTH-1:0][Z_W-1:0] z_row;
  logic [ENTRIES-1:0]                   match_now;
  logic [EW-1:0]                        rd_entry;
  logic [WIRES-1:0][3*CD-1:0]           rd_mask;

  for (genvar w = 0; w < WIRES; w++) begin : g_wire
    hit_finder #(.INT_LEN(INT_LEN)) u_hf (
      .clk, .rst_n,
      .sample_a (sample_a[w]),
      .sample_b (sample_b[w]),
      .threshold,
      .hit      (hit[w]),
      .z        (zh[w])
    );

    drift_shift_register #(.DEPTH(DEPTH)) u_sr (
      .clk, .rst_n, .hold,
      .hit_in (hit[w]),
      .z_in   (zh[w]),
      .fine   (own_fine[w]),
      .coarse (own_coarse[w]),
      .z      (own_z[w])
    );

    always_comb begin
      for (int j = 0; j < CD; j++) begin
        key[w][j]        = |nb_left_fine[w][4*j +: 4];
        key[w][CD + j]   = own_coarse[w][j];
        key[w][2*CD + j] = |nb_right_fine[w][4*j +: 4];
      end
    end

    assign fine_row[w] = {nb_right_fine[w], own_fine[w], nb_left_fine[w]};
    assign z_row[w]    = {nb_right_z[w], own_z[w], nb_left_z[w]};
  end

  segment_cam #(.ENTRIES(ENTRIES), .ROW_W(3*CD)) u_cam (
    .clk, .rst_n, .ce,
    .key,
    .cfg_we    (cfg_we && cfg_target == CFG_CAM),
    .cfg_entry (cfg_addr[EW+1:2]),
    .cfg_row   (cfg_addr[1:0]),
    .cfg_mask  (cfg_data[3*CD-1:0]),
    .rd_entry,
    .rd_mask,
    .match_now,
    .match     (l1_bins)
  );

  segment_refiner #(.ENTRIES(ENTRIES), .DEPTH(DEPTH), .LAYER(LAYER)) u_ref (
    .clk, .rst_n,
    .start        (refine_start),
    .match        (match_now),
    .rd_entry,
    .rd_mask,
    .fine         (fine_row),
    .zreg         (z_row),
    .lut_we_valid (cfg_we && cfg_target == CFG_VALID),
    .lut_we_kphi  (cfg_we && cfg_target == CFG_KPHI),
    .lut_addr     (cfg_addr[LUT_AW-1:0]),
    .lut_data     (cfg_data[K2_W+P2_W-1:0]),
    .seg,
    .seg_valid,
    .seg_ready,
    .done         (refine_done)
  );

endmodule
