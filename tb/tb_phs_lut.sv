// tb_phs_lut: self-checking test of the p_HS lookup.
//
// Fills the 64-entry table with distinct values, then sends scores inside
// every bin, at bin edges, and far below and above the binned range. The
// expected bin is found here by scanning bin edges, independently of the
// shift-based bin arithmetic in the block. Checks p_HS and the 1-cycle latency.
`timescale 1ns/1ps
module tb_phs_lut;
  import ringcal_pkg::*;

  localparam int LO    = -32768;
  localparam int WIDTH = 1024;

  logic clk = 1'b0;
  logic rst, in_valid, out_valid;
  logic signed [SCORE_W-1:0] score;
  logic [PHS_W-1:0] phs;
  logic cfg_we;
  logic [$clog2(PHS_BINS)-1:0] cfg_addr;
  logic [PHS_W-1:0] cfg_data;

  int checks = 0, failures = 0;
  int tbl [PHS_BINS];

  phs_lut dut (.clk, .rst, .in_valid, .score_i(score), .out_valid, .phs_o(phs),
               .cfg_we, .cfg_addr, .cfg_data);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int ref_bin(int s);
    int b = 0;
    for (int i = 1; i < PHS_BINS; i++) if (s >= LO + i * WIDTH) b = i;
    return b;
  endfunction

  task automatic probe(int s);
    score = SCORE_W'(s); in_valid = 1'b1;
    @(posedge clk); #1;
    in_valid = 1'b0;
    checks++;
    if (!out_valid || int'(phs) != tbl[ref_bin(s)]) begin
      failures++;
      $display("score %0d: valid %0b p_HS %0d expected %0d", s, out_valid, phs, tbl[ref_bin(s)]);
    end
  endtask

  initial begin
    rst = 1; in_valid = 0; score = '0; cfg_we = 0; cfg_addr = '0; cfg_data = '0;
    repeat (2) @(posedge clk); #1;
    rst = 0;
    for (int i = 0; i < PHS_BINS; i++) begin
      tbl[i] = (i * 4 + 3) % 257;
      cfg_we = 1; cfg_addr = 6'(i); cfg_data = PHS_W'(tbl[i]);
      @(posedge clk); #1;
    end
    cfg_we = 0;
    @(posedge clk); #1;
    checks++;
    if (out_valid) begin failures++; $display("valid without input"); end
    for (int i = 0; i < PHS_BINS; i++) begin
      probe(LO + i * WIDTH);
      probe(LO + i * WIDTH + WIDTH - 1);
      probe(LO + i * WIDTH + $urandom_range(0, WIDTH - 1));
    end
    probe(LO - 1);
    probe(-(1 << (SCORE_W - 1)));
    probe(LO + PHS_BINS * WIDTH);
    probe((1 << (SCORE_W - 1)) - 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
