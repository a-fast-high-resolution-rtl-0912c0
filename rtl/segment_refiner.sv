// segment_refiner: refined track segment finding of one cell after an L1
// accept.
//
// While the shift registers are held, the coarse matches of the held image
// are read out as a list (encoded mode, cam_encoder). For every matched bin:
//   1. the bin's pattern is read back from the CAM; for each wire row the
//      lowest 80 MHz hit inside the pattern's coarse mask is located, and its
//      position inside the coarse bit (0..3) is kept;
//   2. LUT address = {bin, offset row 2, offset row 1, offset row 0};
//   3. the validation LUT says whether this fine pattern is a vertex track;
//      if so the second LUT gives the segment's global L2 kappa and phi;
//   4. the z of the hit found on each row is taken from the parallel z
//      register and the segment is sent.
// A row whose mask is empty contributes offset 0 and z 0.
//
// Interface: start (one cycle) with match holding the held image's matches.
// Segments leave on a valid/ready stream; done pulses once all matches are
// handled. A match takes three cycles (select, locate, LUT read), a valid
// one a fourth to send at least. LUTs are written through lut_we_* one word per cycle; the
// validation bits are cleared at reset.
//
// From the paper: serialising the coarse segments, restoring the 80 MHz
// information, the validation LUT, the kappa-phi LUT and the z from the
// parallel register. Own choices: the LUT address layout (which assumes a
// pattern allows one coarse bit per row), the lowest-hit rule and the timing.
module segment_refiner
  import ftt_pkg::*;
#(
  parameter int          ENTRIES = CAM_ENTRIES,
  parameter int          DEPTH   = SR_DEPTH,
  parameter logic [1:0]  LAYER   = 2'd0,
  localparam int EW     = $clog2(ENTRIES),
  localparam int LUT_AW = EW + 2 * WIRES,
  localparam int RW     = 3 * DEPTH,       // fine row: left, own, right cell
  localparam int CW     = 3 * DEPTH / 4    // coarse row
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  input  logic                                 start,
  input  logic [ENTRIES-1:0]                   match,
  output logic [EW-1:0]                        rd_entry,
  input  logic [WIRES-1:0][CW-1:0]             rd_mask,
  input  logic [WIRES-1:0][RW-1:0]             fine,
  input  logic [WIRES-1:0][RW-1:0][Z_W-1:0]    zreg,
  input  logic                                 lut_we_valid,
  input  logic                                 lut_we_kphi,
  input  logic [LUT_AW-1:0]                    lut_addr,
  input  logic [K2_W+P2_W-1:0]                 lut_data,
  output segment_t                             seg,
  output logic                                 seg_valid,
  input  logic                                 seg_ready,
  output logic                                 done
);

  typedef enum logic [2:0] {S_IDLE, S_START, S_SEL, S_LOC, S_LUT, S_OUT} state_e;
  state_e state;

  logic [(1<<LUT_AW)-1:0]             valid_lut;
  logic [K2_W+P2_W-1:0]               kphi_lut [1<<LUT_AW];

  logic [EW-1:0]                      enc_addr;
  logic                               enc_valid, enc_ready;
  logic [EW-1:0]                      cur;
  logic [LUT_AW-1:0]                  addr_q;
  logic [WIRES-1:0][Z_W-1:0]          z_q;

  // locate the fine hit of each row inside the current pattern
  logic [WIRES-1:0][1:0]              off;
  logic [WIRES-1:0][Z_W-1:0]          zhit;

  cam_encoder #(.N(ENTRIES)) u_enc (
    .clk, .rst_n,
    .start (state == S_START),
    .match,
    .addr  (enc_addr),
    .valid (enc_valid),
    .ready (enc_ready),
    .empty ()
  );

  assign enc_ready = (state == S_SEL);
  assign rd_entry  = cur;

  always_comb begin
    for (int r = 0; r < WIRES; r++) begin
      logic found;
      found   = 1'b0;
      off[r]  = '0;
      zhit[r] = '0;
      for (int i = 0; i < RW; i++) begin
        if (!found && fine[r][i] && rd_mask[r][i/4]) begin
          found   = 1'b1;
          off[r]  = 2'(i % 4);
          zhit[r] = zreg[r][i];
        end
      end
    end
  end

  // LUT write port
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)            valid_lut <= '0;
    else if (lut_we_valid) valid_lut[lut_addr] <= lut_data[0];
  end

  always_ff @(posedge clk) begin
    if (lut_we_kphi) kphi_lut[lut_addr] <= lut_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      cur       <= '0;
      addr_q    <= '0;
      z_q       <= '0;
      seg       <= '0;
      seg_valid <= 1'b0;
      done      <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE:  if (start) state <= S_START;
        S_START: state <= S_SEL;                 // encoder captures match
        S_SEL: begin
          if (enc_valid) begin
            cur   <= enc_addr;
            state <= S_LOC;
          end else begin
            done  <= 1'b1;
            state <= S_IDLE;
          end
        end
        S_LOC: begin
          addr_q <= {cur, off[2], off[1], off[0]};
          z_q    <= zhit;
          state  <= S_LUT;
        end
        S_LUT: begin
          if (valid_lut[addr_q]) begin
            seg.layer <= LAYER;
            {seg.kappa, seg.phi} <= kphi_lut[addr_q];
            seg.z     <= z_q;
            seg_valid <= 1'b1;
            state     <= S_OUT;
          end else begin
            state     <= S_SEL;
          end
        end
        S_OUT: begin
          if (seg_ready) begin
            seg_valid <= 1'b0;
            state     <= S_SEL;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
