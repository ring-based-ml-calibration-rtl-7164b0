// et_combiner: final step of the calibration, E_T^ML = p_HS * BDT_ET.
//
// The regressor estimate is taken as a signed score in tower-ET units; a
// negative estimate is treated as zero and one above the ET_W-bit range as
// the largest value. It is multiplied by p_HS (unsigned, PHS_FRAC fraction
// bits, so 2^PHS_FRAC = 1.0) and the product is truncated back to ET units.
// The product itself is the defining formula of the method; clamping,
// widths and truncation are this design's choices.
//
// Timing: one jet per clock, result one cycle later with out_valid.
module et_combiner
  import ringcal_pkg::*;
#(
  parameter int unsigned SCORE_WP = SCORE_W
) (
  input  logic                       clk,
  input  logic                       rst,
  input  logic                       in_valid,
  input  logic signed [SCORE_WP-1:0] et_bdt_i,
  input  logic [PHS_W-1:0]           phs_i,
  output logic                       out_valid,
  output logic [ET_W-1:0]            et_bdt_o,  // clamped BDT_ET, for monitoring
  output logic [ET_W-1:0]            et_ml_o
);

  localparam logic signed [SCORE_WP-1:0] ET_MAX = SCORE_WP'((1 << ET_W) - 1);

  logic [ET_W-1:0]        et_c;
  logic [ET_W+PHS_W-1:0]  prod;
  logic [ET_W+PHS_W-PHS_FRAC-1:0] scaled;

  always_comb begin
    if (et_bdt_i < 0)           et_c = '0;
    else if (et_bdt_i > ET_MAX) et_c = '1;
    else                        et_c = et_bdt_i[ET_W-1:0];
    prod   = (ET_W + PHS_W)'(et_c) * (ET_W + PHS_W)'(phs_i);
    scaled = prod[ET_W+PHS_W-1:PHS_FRAC];
  end

  always_ff @(posedge clk) begin
    et_bdt_o <= et_c;
    // p_HS <= 1.0 keeps the result within ET_W bits; larger table entries saturate
    et_ml_o  <= (scaled > (ET_W + PHS_W - PHS_FRAC)'((1 << ET_W) - 1)) ? '1 : scaled[ET_W-1:0];
    if (rst) out_valid <= 1'b0;
    else     out_valid <= in_valid;
  end

endmodule
