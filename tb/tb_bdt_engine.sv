// tb_bdt_engine: self-checking test of the 30-tree, depth-8 ensemble.
//
// Loads 30 random trees, then sends random feature vectors, mostly back to
// back and sometimes with gaps. Each expected score is the sum over trees of
// the leaf reached by walking that tree from the root, computed here. Checks
// each score, that out_valid follows in_valid by exactly DEPTH+2 cycles and
// that the number of outputs equals the number of inputs.
`timescale 1ns/1ps
module tb_bdt_engine;
  import ringcal_pkg::*;

  localparam int D      = DEPTH;
  localparam int T      = N_TREES;
  localparam int NN     = (1 << D);
  localparam int N_JETS = 400;

  logic clk = 1'b0;
  logic rst;
  logic in_valid;
  feat_t feat [N_FEAT];
  logic out_valid;
  logic signed [SCORE_W-1:0] score;
  logic cfg_we, cfg_leaf;
  logic [CFG_TREE_W-1:0] cfg_tree;
  logic [D:0] cfg_addr;
  logic [CFG_DATA_W-1:0] cfg_data;

  int checks = 0, failures = 0;
  int cycle = 0;

  int r_f [T][NN];
  int r_t [T][NN];
  int r_l [T][NN];

  bdt_engine dut (.clk, .rst, .in_valid, .feat_i(feat), .out_valid, .score_o(score),
                  .cfg_we, .cfg_tree, .cfg_leaf, .cfg_addr, .cfg_data);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin : watchdog
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int ensemble(feat_t x [N_FEAT]);
    int s = 0;
    for (int t = 0; t < T; t++) begin
      int n = 1;
      for (int k = 0; k < D; k++) n = 2 * n + ((int'(x[r_f[t][n]]) >= r_t[t][n]) ? 1 : 0);
      s += r_l[t][n - NN];
    end
    return s;
  endfunction

  int exp_q [$];
  int cyc_q [$];
  int n_out = 0;

  always @(posedge clk) begin
    if (!rst && out_valid) begin
      if (exp_q.size() == 0) begin
        failures++; $display("unexpected output");
      end else begin
        int e, c;
        e = exp_q.pop_front();
        c = cyc_q.pop_front();
        checks += 2;
        if (int'(score) != e) begin
          failures++;
          if (failures < 10) $display("jet %0d: score %0d expected %0d", n_out, score, e);
        end
        if (cycle - c != D + 2) begin
          failures++; $display("latency %0d expected %0d", cycle - c, D + 2);
        end
        n_out++;
      end
    end
  end

  initial begin
    rst = 1'b1; in_valid = 1'b0;
    cfg_we = 0; cfg_leaf = 0; cfg_tree = '0; cfg_addr = '0; cfg_data = '0;
    foreach (feat[f]) feat[f] = '0;
    repeat (2) @(posedge clk); #1;
    rst = 1'b0;
    for (int t = 0; t < T; t++) begin
      for (int n = 1; n < NN; n++) begin
        r_f[t][n] = $urandom_range(0, N_FEAT - 1);
        r_t[t][n] = $urandom_range(0, 200);
        cfg_we = 1; cfg_tree = CFG_TREE_W'(t); cfg_leaf = 0; cfg_addr = (D+1)'(n);
        cfg_data = node_word(FIDX_W'(r_f[t][n]), FEAT_W'(r_t[t][n]));
        @(posedge clk); #1;
      end
      for (int l = 0; l < NN; l++) begin
        r_l[t][l] = int'($urandom_range(0, 65535)) - 32768;
        cfg_we = 1; cfg_tree = CFG_TREE_W'(t); cfg_leaf = 1; cfg_addr = (D+1)'(l);
        cfg_data = CFG_DATA_W'(unsigned'(r_l[t][l]));
        @(posedge clk); #1;
      end
    end
    cfg_we = 0;

    for (int j = 0; j < N_JETS; j++) begin
      foreach (feat[f]) feat[f] = FEAT_W'($urandom_range(0, 200));
      in_valid = ($urandom_range(0, 4) != 0);
      if (in_valid) begin
        exp_q.push_back(ensemble(feat));
        cyc_q.push_back(cycle);
      end
      @(posedge clk); #1;
    end
    in_valid = 1'b0;
    repeat (D + 5) @(posedge clk);
    checks++;
    if (exp_q.size() != 0 || n_out == 0) begin
      failures++; $display("%0d results missing", exp_q.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
