// phs_lut: turns the hard-scatter classifier score into the hard-scatter
// probability p_HS.
//
// p_HS for a score is N_HS / (N_HS + N_PU), counted in the score-histogram bin
// that holds the score. The table of these ratios is computed offline from
// the training histograms and written into this block; in hardware the block
// only finds the bin and reads the table. The bins are NBINS equal slices of
// width 2^BIN_SHIFT starting at SCORE_MIN; scores below the first bin use the
// first bin and scores above the last bin use the last. p_HS is an unsigned
// fixed-point number with PHS_FRAC fraction bits (256 = 1.0 by default).
// Bin count, bin placement and number format are this design's choices.
//
// Timing: one score per clock, p_HS one cycle later with out_valid.
// Configuration: cfg_we writes table entry cfg_addr with cfg_data[PHS_W-1:0].
module phs_lut
  import ringcal_pkg::*;
#(
  parameter int unsigned NBINS     = PHS_BINS,
  parameter int unsigned SCORE_WP  = SCORE_W,
  parameter int          SCORE_MIN = -32768,
  parameter int unsigned BIN_SHIFT = 10
) (
  input  logic                       clk,
  input  logic                       rst,
  input  logic                       in_valid,
  input  logic signed [SCORE_WP-1:0] score_i,
  output logic                       out_valid,
  output logic [PHS_W-1:0]           phs_o,
  // configuration
  input  logic                       cfg_we,
  input  logic [$clog2(NBINS)-1:0]   cfg_addr,
  input  logic [PHS_W-1:0]           cfg_data
);

  localparam int unsigned BIN_W = $clog2(NBINS);

  logic [PHS_W-1:0] table_q [NBINS];

  always_ff @(posedge clk) begin
    if (cfg_we) table_q[cfg_addr] <= cfg_data;
  end

  // bin = clamp((score - SCORE_MIN) >> BIN_SHIFT, 0, NBINS - 1)
  logic signed [SCORE_WP+1:0] rel;
  logic signed [SCORE_WP+1:0] slot;
  logic [BIN_W-1:0]           bin;

  always_comb begin
    rel  = (SCORE_WP + 2)'(score_i) - (SCORE_WP + 2)'(SCORE_MIN);
    slot = rel >>> BIN_SHIFT;
    if (slot < 0)                         bin = '0;
    else if (slot > (SCORE_WP + 2)'(NBINS - 1)) bin = BIN_W'(NBINS - 1);
    else                                  bin = slot[BIN_W-1:0];
  end

  always_ff @(posedge clk) begin
    phs_o <= table_q[bin];
    if (rst) out_valid <= 1'b0;
    else     out_valid <= in_valid;
  end

endmodule
