// segment_cam: bank of pattern CAMs for coarse track segment finding, read in
// unencoded mode.
//
// The key is the 20 MHz coarse hit image of one cell: three wire rows, each
// row spanning the same wire in the left neighbour cell, the own cell and the
// right neighbour cell (ROW_W bits per row). Every entry holds a pre-loaded
// pattern: for each row a mask of the coarse positions a track of that entry's
// kappa-phi bin may hit. An entry matches when every row with a non-empty
// mask has at least one hit inside it; an all-empty entry never matches. The
// match vector is the unencoded output: bit e set means bin e holds a segment.
//
// Interface: the match register updates on clock edges with ce high (once
// per 20 MHz step). Patterns are written one row per clock through cfg_*.
// rd_entry/rd_mask is a combinational read port for the refinement.
//
// From the paper: up to 64 CAMs per FPGA in unencoded mode, one output bit
// per kappa-phi bin, patterns pre-calculated for vertex tracks, neighbour-cell
// wires in the search. Own choices: the mask-per-row match rule, reset of the
// patterns and the registered output.
module segment_cam
  import ftt_pkg::*;
#(
  parameter int ENTRIES = CAM_ENTRIES,
  parameter int ROW_W   = 3 * SR_DEPTH / 4,
  localparam int EW     = $clog2(ENTRIES)
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  input  logic                                 ce,
  input  logic [WIRES-1:0][ROW_W-1:0]          key,
  input  logic                                 cfg_we,
  input  logic [EW-1:0]                        cfg_entry,
  input  logic [1:0]                           cfg_row,
  input  logic [ROW_W-1:0]                     cfg_mask,
  input  logic [EW-1:0]                        rd_entry,
  output logic [WIRES-1:0][ROW_W-1:0]          rd_mask,
  output logic [ENTRIES-1:0]                   match_now,
  output logic [ENTRIES-1:0]                   match
);

  logic [ENTRIES-1:0][WIRES-1:0][ROW_W-1:0] pattern;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pattern <= '0;
    end else if (cfg_we && int'(cfg_row) < WIRES) begin
      pattern[cfg_entry][cfg_row] <= cfg_mask;
    end
  end

  always_comb begin
    for (int e = 0; e < ENTRIES; e++) begin
      logic ok;
      logic any;
      ok  = 1'b1;
      any = 1'b0;
      for (int r = 0; r < WIRES; r++) begin
        if (pattern[e][r] != '0) begin
          any = 1'b1;
          if ((pattern[e][r] & key[r]) == '0) ok = 1'b0;
        end
      end
      match_now[e] = ok && any;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  match <= '0;
    else if (ce) match <= match_now;
  end

  assign rd_mask = pattern[rd_entry];

endmodule
