// tb_bdt_tree: self-checking test of one pipelined decision tree.
//
// Loads a random depth-8 tree through the configuration port, then feeds one
// random feature vector per clock through a delay line like the one the
// ensemble provides. The expected leaf comes from walking the tree from the
// root in a loop (x >= threshold goes to child 2n+1). Checks every result at
// exactly DEPTH+1 cycles after its jet entered, and that reloading one leaf
// changes the result.
`timescale 1ns/1ps
module tb_bdt_tree;
  import ringcal_pkg::*;

  localparam int D      = DEPTH;
  localparam int NN     = (1 << D);       // nodes 1..NN-1, leaves 0..NN-1
  localparam int N_JETS = 300;

  logic clk = 1'b0;
  feat_t jet_in [N_FEAT];
  feat_t pipe [D][N_FEAT];
  logic signed [LEAF_W-1:0] leaf_o;
  logic cfg_we, cfg_leaf;
  logic [D:0] cfg_addr;
  logic [CFG_DATA_W-1:0] cfg_data;

  int checks = 0, failures = 0;

  // reference copy of the tree
  int r_f [NN];
  int r_t [NN];
  int r_l [NN];

  bdt_tree dut (.clk, .feat_i(pipe), .leaf_o, .cfg_we, .cfg_leaf, .cfg_addr, .cfg_data);

  always #5 clk = ~clk;

  assign pipe[0] = jet_in;
  for (genvar k = 1; k < D; k++) begin : g_p
    always_ff @(posedge clk) pipe[k] <= pipe[k-1];
  end

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int walk(feat_t x [N_FEAT]);
    int n = 1;
    for (int k = 0; k < D; k++) n = 2 * n + ((int'(x[r_f[n]]) >= r_t[n]) ? 1 : 0);
    return r_l[n - NN];
  endfunction

  task automatic wr(input logic leaf, input int addr, input logic [CFG_DATA_W-1:0] data);
    cfg_we = 1'b1; cfg_leaf = leaf; cfg_addr = (D+1)'(addr); cfg_data = data;
    @(posedge clk); #1;
    cfg_we = 1'b0;
  endtask

  int exp_v [N_JETS];

  initial begin
    cfg_we = 0; cfg_leaf = 0; cfg_addr = '0; cfg_data = '0;
    foreach (jet_in[f]) jet_in[f] = '0;
    @(posedge clk); #1;
    for (int n = 1; n < NN; n++) begin
      r_f[n] = $urandom_range(0, N_FEAT - 1);
      r_t[n] = $urandom_range(0, 64);
      wr(1'b0, n, node_word(FIDX_W'(r_f[n]), FEAT_W'(r_t[n])));
    end
    for (int l = 0; l < NN; l++) begin
      r_l[l] = int'($urandom_range(0, 65535)) - 32768;
      wr(1'b1, l, CFG_DATA_W'(unsigned'(r_l[l])));
    end

    // stream jets, check each result DEPTH+1 cycles after entry
    fork
      begin
        for (int j = 0; j < N_JETS; j++) begin
          foreach (jet_in[f]) jet_in[f] = FEAT_W'($urandom_range(0, 64));
          exp_v[j] = walk(jet_in);
          @(posedge clk); #1;
        end
      end
      begin
        repeat (D + 1) @(posedge clk);
        #2;
        for (int j = 0; j < N_JETS; j++) begin
          checks++;
          if (int'(leaf_o) != exp_v[j]) begin
            failures++;
            if (failures < 10) $display("jet %0d: leaf %0d expected %0d", j, leaf_o, exp_v[j]);
          end
          @(posedge clk); #2;
        end
      end
    join

    // rewrite the leaf the last jet reached and check the new value comes out
    begin
      int n = 1;
      for (int k = 0; k < D; k++) n = 2 * n + ((int'(jet_in[r_f[n]]) >= r_t[n]) ? 1 : 0);
      r_l[n - NN] = r_l[n - NN] ^ 16'h5a5a;
      wr(1'b1, n - NN, CFG_DATA_W'(unsigned'(r_l[n - NN])));
      repeat (D + 2) @(posedge clk);
      #1;
      checks++;
      if (int'(leaf_o) != 32'(signed'(16'(r_l[n - NN])))) begin
        failures++; $display("reloaded leaf %0d expected %0d", leaf_o, r_l[n - NN]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
