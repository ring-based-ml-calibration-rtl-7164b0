// tb_ml_jet_calib: end-to-end test of the jet calibration pipeline at its
// default size (30 + 30 trees of depth 8, 64-bin p_HS table).
//
// Loads random trees into both ensembles (thresholds scaled to each feature's
// typical size so that both branches are taken) and a rising p_HS table, then
// streams jets: narrow high-ET cores (hard-scatter-like) and flat pileup-like
// windows, mostly one per clock with occasional gaps. A reference model
// written here recomputes every stage (ring sums from real-valued tower
// distances, tree walks, bin search, product) and each output is compared,
// together with its latency of DEPTH + 6 cycles.
//
// It also counts how often each mechanism of the design was exercised and
// fails if one never was: configuration writes to each target, back-to-back
// jets, gaps, negative BDT_ET clamped to zero, HS scores below and above the
// binned range, p_HS = 0 and p_HS = 1.0 outputs, and every ring carrying ET.
`timescale 1ns/1ps
module tb_ml_jet_calib;
  import ringcal_pkg::*;

  localparam int D      = DEPTH;
  localparam int T      = N_TREES;
  localparam int NN     = (1 << D);
  localparam int LAT    = D + 6;
  localparam int N_JETS = 600;
  localparam int LO     = -32768;   // p_HS bin placement (phs_lut defaults)
  localparam int BW     = 1024;

  logic clk = 1'b0;
  logic rst, in_valid;
  logic [TOW_W-1:0] em  [WIN][WIN];
  logic [TOW_W-1:0] had [WIN][WIN];
  logic signed [ETA_W-1:0] eta;
  cfg_wr_t cfg;
  logic out_valid;
  logic [ET_W-1:0] et_ml, et_bdt;
  logic [PHS_W-1:0] phs;

  int checks = 0, failures = 0;
  int cycle = 0;

  ml_jet_calib dut (.clk, .rst, .in_valid, .em_i(em), .had_i(had), .eta_i(eta), .cfg_i(cfg),
                    .out_valid, .et_ml_o(et_ml), .et_bdt_o(et_bdt), .phs_o(phs));

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin : watchdog
    repeat (80000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- reference model ----------------
  int f_sel [2][T][NN];
  int f_thr [2][T][NN];
  int f_leaf[2][T][NN];
  int p_tbl [PHS_BINS];

  function automatic int ref_ring(int ie, int ip);
    real dx, dy, d;
    dx = real'(ie) - (real'(WIN) - 1.0) / 2.0;
    dy = real'(ip) - (real'(WIN) - 1.0) / 2.0;
    d  = $sqrt(dx * dx + dy * dy);
    if (d < 1.0) return 0;
    if (d < 2.0) return 1;
    if (d < 4.0) return 2;
    if (d < 6.0) return 3;
    return 4;
  endfunction

  typedef int fv_t [N_FEAT];

  function automatic fv_t features();
    fv_t x;
    int s_em [5];
    int s_had [5];
    for (int r = 0; r < 5; r++) begin s_em[r] = 0; s_had[r] = 0; end
    for (int ie = 0; ie < int'(WIN); ie++)
      for (int ip = 0; ip < int'(WIN); ip++) begin
        s_em[ref_ring(ie, ip)]  += int'(em[ie][ip]);
        s_had[ref_ring(ie, ip)] += int'(had[ie][ip]);
      end
    x[0] = int'(eta) + 128;
    for (int r = 0; r < 4; r++) begin
      x[1 + 3*r] = s_em[r]; x[2 + 3*r] = s_had[r]; x[3 + 3*r] = s_em[r] + s_had[r];
    end
    x[13] = s_em[0] + s_em[1] + s_em[2];
    x[14] = s_had[0] + s_had[1] + s_had[2];
    x[15] = x[13] + x[14];
    return x;
  endfunction

  function automatic int ensemble(int m, fv_t x);
    int s = 0;
    for (int t = 0; t < T; t++) begin
      int n = 1;
      for (int k = 0; k < D; k++) n = 2 * n + ((x[f_sel[m][t][n]] >= f_thr[m][t][n]) ? 1 : 0);
      s += f_leaf[m][t][n - NN];
    end
    return s;
  endfunction

  // ---------------- mechanism counters ----------------
  int n_cfg_et = 0, n_cfg_hs = 0, n_cfg_phs = 0;
  int n_b2b = 0, n_gap = 0, n_neg = 0, n_lo = 0, n_hi = 0, n_p0 = 0, n_p1 = 0;
  int n_ring [4] = '{0, 0, 0, 0};

  // expected results, in order
  int q_ml [$], q_bdt [$], q_p [$], q_cyc [$];
  int n_out = 0;

  always @(posedge clk) begin
    if (!rst && out_valid) begin
      if (q_ml.size() == 0) begin
        failures++; $display("unexpected output at cycle %0d", cycle);
      end else begin
        int e_ml, e_bdt, e_p, c;
        e_ml = q_ml.pop_front(); e_bdt = q_bdt.pop_front(); e_p = q_p.pop_front();
        c = q_cyc.pop_front();
        checks += 2;
        if (int'(et_ml) != e_ml || int'(et_bdt) != e_bdt || int'(phs) != e_p) begin
          failures++;
          if (failures < 10)
            $display("jet %0d: ML %0d BDT %0d p %0d, expected %0d %0d %0d", n_out,
                     et_ml, et_bdt, phs, e_ml, e_bdt, e_p);
        end
        if (cycle - c != LAT) begin
          failures++; $display("latency %0d expected %0d", cycle - c, LAT);
        end
        if (e_p == 0) n_p0++;
        if (e_p == 256) n_p1++;
        n_out++;
      end
    end
  end

  task automatic cfg_write(cfg_target_e tgt, logic leaf, int tree, int addr, logic [CFG_DATA_W-1:0] data);
    cfg.we = 1'b1; cfg.target = tgt; cfg.leaf = leaf; cfg.tree = CFG_TREE_W'(tree);
    cfg.addr = CFG_ADDR_W'(addr); cfg.data = data;
    @(posedge clk); #1;
    cfg.we = 1'b0;
    case (tgt)
      CFG_BDT_ET: n_cfg_et++;
      CFG_BDT_HS: n_cfg_hs++;
      default:    n_cfg_phs++;
    endcase
  endtask

  // random jet: kind 0 = hard-scatter-like core, 1 = flat pileup-like
  task automatic make_jet(int kind);
    int peak;
    peak = $urandom_range(50, 1000);
    foreach (em[i, j]) begin
      int r = ref_ring(i, j);
      if (kind == 0) begin
        int scale = (r == 0) ? peak : (r == 1) ? peak / 4 : (r == 2) ? peak / 16 : 4;
        em[i][j]  = TOW_W'($urandom_range(0, scale));
        had[i][j] = TOW_W'($urandom_range(0, scale / 2 + 1));
      end else begin
        em[i][j]  = TOW_W'($urandom_range(0, 8));
        had[i][j] = TOW_W'($urandom_range(0, 8));
      end
    end
    eta = ETA_W'(int'($urandom_range(0, 98)) - 49);
  endtask

  fv_t typical;

  initial begin
    rst = 1'b1; in_valid = 1'b0; cfg = '0;
    make_jet(0);
    repeat (3) @(posedge clk); #1;
    rst = 1'b0;

    // typical feature sizes from a handful of jets set the threshold ranges
    foreach (typical[f]) typical[f] = 1;
    for (int n = 0; n < 8; n++) begin
      fv_t x;
      make_jet(n % 2);
      x = features();
      foreach (x[f]) if (x[f] > typical[f]) typical[f] = x[f];
    end

    // ---- load both ensembles and the p_HS table ----
    for (int m = 0; m < 2; m++)
      for (int t = 0; t < T; t++) begin
        for (int n = 1; n < NN; n++) begin
          f_sel[m][t][n] = $urandom_range(0, N_FEAT - 1);
          f_thr[m][t][n] = $urandom_range(0, typical[f_sel[m][t][n]]);
          cfg_write(m == 0 ? CFG_BDT_ET : CFG_BDT_HS, 1'b0, t, n,
                    node_word(FIDX_W'(f_sel[m][t][n]), FEAT_W'(f_thr[m][t][n])));
        end
        for (int l = 0; l < NN; l++) begin
          f_leaf[m][t][l] = (m == 0) ? int'($urandom_range(0, 2200)) - 1000
                                     : int'($urandom_range(0, 20000)) - 10000;
          cfg_write(m == 0 ? CFG_BDT_ET : CFG_BDT_HS, 1'b1, t, l,
                    CFG_DATA_W'(unsigned'(f_leaf[m][t][l])));
        end
      end
    for (int b = 0; b < PHS_BINS; b++) begin
      p_tbl[b] = (b == PHS_BINS - 1) ? 256 : b * 4;
      cfg_write(CFG_PHS, 1'b0, 0, b, CFG_DATA_W'(p_tbl[b]));
    end

    // ---- stream jets ----
    for (int j = 0; j < N_JETS; j++) begin
      bit gap;
      gap = ($urandom_range(0, 9) == 0);
      if (gap) begin
        in_valid = 1'b0;
        n_gap++;
        @(posedge clk); #1;
      end else if (j > 0) n_b2b++;
      make_jet($urandom_range(0, 1));
      begin
        fv_t x;
        int s_et, s_hs, bin, c;
        x = features();
        for (int r = 0; r < 4; r++) if (x[3 + 3*r] > 0) n_ring[r]++;
        s_et = ensemble(0, x);
        s_hs = ensemble(1, x);
        bin = 0;
        for (int b = 1; b < PHS_BINS; b++) if (s_hs >= LO + b * BW) bin = b;
        if (s_hs < LO) n_lo++;
        if (s_hs >= LO + int'(PHS_BINS) * BW) n_hi++;
        c = (s_et < 0) ? 0 : (s_et > 65535) ? 65535 : s_et;
        if (s_et < 0) n_neg++;
        q_bdt.push_back(c);
        q_p.push_back(p_tbl[bin]);
        q_ml.push_back((c * p_tbl[bin]) / 256);
        q_cyc.push_back(cycle);
      end
      in_valid = 1'b1;
      @(posedge clk); #1;
    end
    in_valid = 1'b0;
    repeat (LAT + 4) @(posedge clk);

    checks++;
    if (q_ml.size() != 0 || n_out != N_JETS) begin
      failures++; $display("%0d outputs for %0d jets", n_out, N_JETS);
    end
    $display("mechanisms: cfg ET %0d HS %0d pHS %0d, back-to-back %0d, gaps %0d, BDT_ET<0 %0d,",
             n_cfg_et, n_cfg_hs, n_cfg_phs, n_b2b, n_gap, n_neg);
    $display("            HS score below bins %0d above bins %0d, p_HS=0 %0d p_HS=1 %0d, rings %0d %0d %0d %0d",
             n_lo, n_hi, n_p0, n_p1, n_ring[0], n_ring[1], n_ring[2], n_ring[3]);
    foreach (n_ring[r]) begin
      checks++;
      if (n_ring[r] == 0) begin failures++; $display("ring %0d never carried ET", r + 1); end
    end
    checks += 9;
    if (n_cfg_et == 0) begin failures++; $display("no BDT_ET configuration"); end
    if (n_cfg_hs == 0) begin failures++; $display("no BDT_HS configuration"); end
    if (n_cfg_phs == 0) begin failures++; $display("no p_HS configuration"); end
    if (n_b2b == 0) begin failures++; $display("no back-to-back jets"); end
    if (n_gap == 0) begin failures++; $display("no gaps"); end
    if (n_neg == 0) begin failures++; $display("no negative BDT_ET"); end
    if (n_lo == 0) begin failures++; $display("no HS score below the bins"); end
    if (n_hi == 0) begin failures++; $display("no HS score above the bins"); end
    if (n_p0 == 0 || n_p1 == 0) begin failures++; $display("p_HS never 0 or never 1"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
