// ring_sum: ring feature extractor for one primitive jet.
//
// Takes the EM and HAD tower ET of a WIN x WIN window of 0.1 x 0.1 towers
// centred on a jet, and the jet eta, and produces the sixteen BDT inputs:
// eta, and (EM, HAD, EM+HAD) summed over ring 1 (dR < 0.1), ring 2
// (0.1 <= dR < 0.2), ring 3 (0.2 <= dR < 0.4), ring 4 (0.4 <= dR < 0.6) and
// ring_jet (dR < 0.4, rings 1-3). A tower belongs to a ring when its centre
// lies inside the annulus, as in the ring definition this follows.
//
// Geometry. The jet centre sits on the corner shared by the four central
// towers, so tower (ie, ip) has its centre at an offset of (2*ie - WIN + 1,
// 2*ip - WIN + 1) half-towers. Ring radii are given as squared radii in
// half-tower units (R1_SQ = 4 is dR = 0.1, ..., R4_SQ = 144 is dR = 0.6) and
// the membership of every tower is fixed at elaboration. With these defaults
// the rings hold 4, 8, 40 and 60 towers (ring_jet 52). The tower counts
// printed next to the ring definitions (4, 12, 40, 68; ring_jet 56) cannot
// come from any circular rule on this grid; the centre-in-annulus rule is the
// one followed here, and the radii are parameters so another choice can be
// made. WIN = 12 is the smallest window that holds all of ring 4.
//
// Eta feature: eta_i is a signed code (jet eta in units of 0.1, this design's
// choice); the feature is eta_i + 2^(ETA_W-1), so that all features compare
// as unsigned numbers.
//
// Timing: fully pipelined, one jet per clock, latency 2 cycles
// (ring sums registered, then the SUM and ring_jet columns registered).
// Synchronous active-high reset clears only the valid pipeline.
module ring_sum
  import ringcal_pkg::*;
#(
  parameter int unsigned R1_SQ = 4,
  parameter int unsigned R2_SQ = 16,
  parameter int unsigned R3_SQ = 64,
  parameter int unsigned R4_SQ = 144
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic                    in_valid,
  input  logic [TOW_W-1:0]        em_i  [WIN][WIN],   // [eta index][phi index]
  input  logic [TOW_W-1:0]        had_i [WIN][WIN],
  input  logic signed [ETA_W-1:0] eta_i,
  output logic                    out_valid,
  output feat_t                   feat_o [N_FEAT]
);

  // Ring number (0..3) of tower (ie, ip), or N_RINGS when outside ring 4.
  function automatic int unsigned ring_of(int ie, int ip);
    int dx, dy, d2;
    dx = 2 * ie - int'(WIN) + 1;
    dy = 2 * ip - int'(WIN) + 1;
    d2 = dx * dx + dy * dy;
    if      (d2 < int'(R1_SQ)) return 0;
    else if (d2 < int'(R2_SQ)) return 1;
    else if (d2 < int'(R3_SQ)) return 2;
    else if (d2 < int'(R4_SQ)) return 3;
    else                       return N_RINGS;
  endfunction

  // ---- stage 1: EM and HAD sums per ring ----
  feat_t em_sum  [N_RINGS];
  feat_t had_sum [N_RINGS];
  feat_t em_q    [N_RINGS];
  feat_t had_q   [N_RINGS];
  logic signed [ETA_W-1:0] eta_q;
  logic                    v1;

  always_comb begin
    for (int r = 0; r < int'(N_RINGS); r++) begin
      em_sum[r]  = '0;
      had_sum[r] = '0;
    end
    for (int ie = 0; ie < int'(WIN); ie++) begin
      for (int ip = 0; ip < int'(WIN); ip++) begin
        for (int r = 0; r < int'(N_RINGS); r++) begin
          if (ring_of(ie, ip) == r) begin
            em_sum[r]  = em_sum[r]  + FEAT_W'(em_i[ie][ip]);
            had_sum[r] = had_sum[r] + FEAT_W'(had_i[ie][ip]);
          end
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    em_q  <= em_sum;
    had_q <= had_sum;
    eta_q <= eta_i;
    if (rst) v1 <= 1'b0;
    else     v1 <= in_valid;
  end

  // ---- stage 2: EM+HAD column, ring_jet row, eta ----
  feat_t feat_d [N_FEAT];

  always_comb begin
    feat_d[F_ETA] = FEAT_W'(unsigned'(eta_q + ETA_W'(1 << (ETA_W - 1))));
    for (int r = 0; r < int'(N_RINGS); r++) begin
      feat_d[1 + 3 * r]     = em_q[r];
      feat_d[1 + 3 * r + 1] = had_q[r];
      feat_d[1 + 3 * r + 2] = em_q[r] + had_q[r];
    end
    feat_d[F_JET_EM]  = em_q[0] + em_q[1] + em_q[2];
    feat_d[F_JET_HAD] = had_q[0] + had_q[1] + had_q[2];
    feat_d[F_JET_SUM] = feat_d[F_JET_EM] + feat_d[F_JET_HAD];
  end

  always_ff @(posedge clk) begin
    feat_o <= feat_d;
    if (rst) out_valid <= 1'b0;
    else     out_valid <= v1;
  end

endmodule
