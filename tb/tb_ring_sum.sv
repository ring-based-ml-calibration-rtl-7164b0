// tb_ring_sum: self-checking test of the ring feature extractor.
//
// The reference puts each tower in a ring from the real-valued distance of its
// centre to the jet centre (in tower units, boundaries 1, 2, 4, 6), worked out
// here independently of the integer rule inside the block. It checks the ring
// sizes with an all-ones window, then streams random windows back to back and
// compares all sixteen features, the 2-cycle latency and one result per clock.
`timescale 1ns/1ps
module tb_ring_sum;
  import ringcal_pkg::*;

  localparam int N_JETS = 200;

  logic clk = 1'b0;
  logic rst;
  logic in_valid;
  logic [TOW_W-1:0] em [WIN][WIN];
  logic [TOW_W-1:0] had [WIN][WIN];
  logic signed [ETA_W-1:0] eta;
  logic out_valid;
  feat_t feat [N_FEAT];

  int checks = 0, failures = 0;
  int cycle = 0;

  ring_sum dut (.clk, .rst, .in_valid, .em_i(em), .had_i(had), .eta_i(eta),
                .out_valid, .feat_o(feat));

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

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

  typedef logic [N_FEAT-1:0][31:0] exp_t;   // packed: one queue entry per jet
  exp_t exp_q [$];
  int   in_cycle_q [$];

  function automatic exp_t reference();
    exp_t e;
    longint s_em [5];
    longint s_had [5];
    for (int r = 0; r < 5; r++) begin s_em[r] = 0; s_had[r] = 0; end
    for (int ie = 0; ie < int'(WIN); ie++)
      for (int ip = 0; ip < int'(WIN); ip++) begin
        s_em[ref_ring(ie, ip)]  += em[ie][ip];
        s_had[ref_ring(ie, ip)] += had[ie][ip];
      end
    e[0] = 32'(int'(eta) + 128);
    for (int r = 0; r < 4; r++) begin
      e[1 + 3*r] = 32'(s_em[r]); e[2 + 3*r] = 32'(s_had[r]); e[3 + 3*r] = 32'(s_em[r] + s_had[r]);
    end
    e[13] = 32'(s_em[0] + s_em[1] + s_em[2]);
    e[14] = 32'(s_had[0] + s_had[1] + s_had[2]);
    e[15] = e[13] + e[14];
    return e;
  endfunction

  // output monitor
  int n_out = 0;
  always @(posedge clk) begin
    if (!rst && out_valid) begin
      exp_t e;
      int   c_in;
      if (exp_q.size() == 0) begin
        failures++; $display("unexpected output at cycle %0d", cycle);
      end else begin
        e = exp_q.pop_front();
        c_in = in_cycle_q.pop_front();
        checks++;
        if (cycle - c_in != 2) begin
          failures++; $display("latency %0d, expected 2", cycle - c_in);
        end
        for (int f = 0; f < int'(N_FEAT); f++) begin
          checks++;
          if (32'(feat[f]) != e[f]) begin
            failures++;
            if (failures < 10) $display("jet %0d feature %0d: got %0d expected %0d", n_out, f, feat[f], e[f]);
          end
        end
        n_out++;
      end
    end
  end

  task automatic send();
    in_valid <= 1'b1;
    @(posedge clk);   // block samples here
    #1;
  endtask

  initial begin
    rst = 1'b1; in_valid = 1'b0; eta = '0;
    foreach (em[i, j]) begin em[i][j] = '0; had[i][j] = '0; end
    repeat (3) @(posedge clk);
    #1 rst = 1'b0;

    // ring sizes: every tower = 1 in EM, 2 in HAD
    foreach (em[i, j]) begin em[i][j] = 1; had[i][j] = 2; end
    eta = -8'sd25;
    exp_q.push_back(reference()); in_cycle_q.push_back(cycle);
    in_valid = 1'b1;
    @(posedge clk); #1;
    in_valid = 1'b0;
    repeat (4) @(posedge clk);
    #1;
    checks++;
    if (n_out != 1 || feat[F_R1_EM] != 4 || feat[F_R2_EM] != 8 || feat[F_R3_EM] != 40 ||
        feat[F_R4_EM] != 60 || feat[F_JET_EM] != 52 || feat[F_ETA] != 103) begin
      failures++;
      $display("ring sizes %0d %0d %0d %0d jet %0d eta %0d", feat[F_R1_EM], feat[F_R2_EM],
               feat[F_R3_EM], feat[F_R4_EM], feat[F_JET_EM], feat[F_ETA]);
    end

    // random windows, one per clock
    for (int n = 0; n < N_JETS; n++) begin
      foreach (em[i, j]) begin
        em[i][j]  = TOW_W'($urandom_range(0, (n % 4 == 0) ? 1023 : 40));
        had[i][j] = TOW_W'($urandom_range(0, (n % 4 == 0) ? 1023 : 40));
      end
      eta = ETA_W'($urandom_range(0, 98) - 49);
      exp_q.push_back(reference()); in_cycle_q.push_back(cycle);
      in_valid = 1'b1;
      @(posedge clk); #1;
    end
    in_valid = 1'b0;
    repeat (6) @(posedge clk);
    checks++;
    if (n_out != N_JETS + 1 || exp_q.size() != 0) begin
      failures++; $display("outputs %0d of %0d", n_out, N_JETS + 1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
