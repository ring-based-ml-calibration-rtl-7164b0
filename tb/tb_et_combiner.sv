// tb_et_combiner: self-checking test of E_T^ML = p_HS * BDT_ET.
//
// Drives random and corner-case pairs of regressor score and p_HS (negative
// scores, scores above the output range, p_HS = 0 and 1.0) one per clock, and
// compares both outputs one cycle later with floor(ET * p / 256) computed
// here in plain integer arithmetic.
`timescale 1ns/1ps
module tb_et_combiner;
  import ringcal_pkg::*;

  logic clk = 1'b0;
  logic rst, in_valid, out_valid;
  logic signed [SCORE_W-1:0] et_in;
  logic [PHS_W-1:0] p_in;
  logic [ET_W-1:0] et_bdt, et_ml;

  int checks = 0, failures = 0;

  et_combiner dut (.clk, .rst, .in_valid, .et_bdt_i(et_in), .phs_i(p_in), .out_valid,
                   .et_bdt_o(et_bdt), .et_ml_o(et_ml));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint exp_bdt, exp_ml;
  int     pending = 0;

  task automatic apply(int e, int p);
    longint c;
    et_in = SCORE_W'(e); p_in = PHS_W'(p); in_valid = 1'b1;
    c = (e < 0) ? 0 : (e > 65535) ? 65535 : e;
    @(posedge clk); #1;
    checks++;
    exp_bdt = c;
    exp_ml  = (c * p) / 256;
    if (exp_ml > 65535) exp_ml = 65535;
    if (!out_valid || longint'(et_bdt) != exp_bdt || longint'(et_ml) != exp_ml) begin
      failures++;
      $display("ET %0d p %0d: got %0d/%0d expected %0d/%0d", e, p, et_bdt, et_ml, exp_bdt, exp_ml);
    end
  endtask

  initial begin
    rst = 1; in_valid = 0; et_in = '0; p_in = '0;
    repeat (2) @(posedge clk); #1;
    rst = 0;
    apply(-5, 200);
    apply(-(1 << 20), 256);
    apply(1000, 0);
    apply(1000, 256);
    apply(65535, 256);
    apply(70000, 128);
    apply(12345, 511);
    apply(1, 255);
    for (int i = 0; i < 300; i++)
      apply(int'($urandom_range(0, 70000)) - 2000, int'($urandom_range(0, 256)));
    in_valid = 0;
    @(posedge clk); #1;
    checks++;
    if (out_valid) begin failures++; $display("valid without input"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
