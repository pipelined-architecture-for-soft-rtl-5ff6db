// tb_ipa_control -- Self-checking testbench of the control unit.
// RM(5,2) with P = 4: 8 groups per vector, p = 2 parallel divider levels and
// 3 EnGen counters. The testbench feeds ValidIn pulses (back to back and with
// gaps), models the PU pipeline as fixed delays (ValidFOD 1+3 cycles after
// En, pre-aggregation valid one cycle after that) and checks cycle by cycle:
// En/Sel_proj run through the 8 groups starting the cycle after ValidIn,
// Sel_Agg follows ValidFOD, REn marks the last group, the shift-register
// enables follow the expected halving pattern, and div_valid comes m = 5
// cycles after the last pre-aggregated group.
module tb_ipa_control;
  localparam int M = 5, P = 4, N = 32, G = 8, SW = 3, SL = 3, PL = 2;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic          valid_in, wen, proj_en, fod_valid, agg_en, ren, pu_valid, div_valid;
  logic [SW-1:0] proj_sel, agg_sel;
  logic [SL-1:0] sr_en;

  ipa_control #(.M(M), .P(P)) dut (
    .clk, .rst_n, .valid_in, .wen, .proj_en, .proj_sel, .fod_valid,
    .agg_en, .agg_sel, .ren, .pu_valid, .sr_en, .div_valid);

  // PU pipeline model
  logic [4:0] pen_d;
  always @(posedge clk) pen_d <= rst_n ? {pen_d[3:0], proj_en} : '0;
  assign fod_valid = pen_d[3];
  assign pu_valid  = pen_d[4];

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  localparam int HOR = 400;
  int  vin_cycles [$];
  // expected tables indexed by cycle
  logic exp_pen [HOR];
  int   exp_psel [HOR];
  logic exp_fod [HOR];
  logic exp_ren [HOR];
  logic exp_sr [SL+1][HOR];

  initial begin
    repeat (HOR + 50) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // ValidIn at these cycles: back to back, then gaps
    vin_cycles = '{10, 18, 26, 50, 58, 90, 99, 107};
    for (int c = 0; c < HOR; c++) begin
      exp_pen[c] = 0; exp_psel[c] = 0; exp_fod[c] = 0; exp_ren[c] = 0;
      for (int l = 0; l <= SL; l++) exp_sr[l][c] = 0;
    end
    foreach (vin_cycles[k])
      for (int g = 0; g < G; g++) begin
        int c; c = vin_cycles[k] + 1 + g;
        exp_pen[c] = 1; exp_psel[c] = g;
        exp_fod[c + 4] = 1;
        if (g == G - 1) exp_ren[c + 4] = 1;
        exp_sr[0][c + 5 + PL] = 1;
      end
    for (int l = 0; l < SL; l++) begin
      int k; k = 0;
      for (int c = 0; c < HOR - 1; c++) if (exp_sr[l][c]) begin
        if (k % 2 == 1) exp_sr[l+1][c+1] = 1;
        k++;
      end
    end
  end

  assign valid_in = rst_n && (cyc inside {vin_cycles});

  initial begin
    int ndiv;
    ndiv = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    while (cyc < HOR - 20) begin
      @(posedge clk);
      #2;
      checks += 6;
      if (proj_en != exp_pen[cyc] || (proj_en && int'(proj_sel) != exp_psel[cyc])) begin
        failures++; $display("cycle %0d: En/Sel_proj %0b/%0d", cyc, proj_en, proj_sel);
      end
      if (wen != valid_in) begin failures++; $display("cycle %0d: WEn", cyc); end
      if (agg_en != exp_fod[cyc] || (agg_en && int'(agg_sel) != int'(dut.acnt))) begin
        failures++; $display("cycle %0d: agg_en", cyc);
      end
      if (ren != exp_ren[cyc]) begin failures++; $display("cycle %0d: REn", cyc); end
      for (int l = 0; l < SL; l++)
        if (sr_en[l] != exp_sr[l][cyc]) begin
          failures++; $display("cycle %0d: sr_en[%0d]=%0b", cyc, l, sr_en[l]);
        end
      if (div_valid != exp_sr[SL][cyc]) begin
        failures++; $display("cycle %0d: div_valid=%0b", cyc, div_valid);
      end
      if (div_valid) begin
        // m cycles after the last pre-aggregated group of vector ndiv
        checks++;
        if (cyc != vin_cycles[ndiv] + G + 5 + M) begin
          failures++; $display("div_valid of vector %0d at %0d", ndiv, cyc);
        end
        ndiv++;
      end
      // Sel_Agg must follow the group order
      if (agg_en && (cyc - 4 - 1) >= 0) begin
        checks++;
        if (int'(agg_sel) != exp_psel[cyc - 4]) begin
          failures++; $display("cycle %0d: Sel_Agg=%0d", cyc, agg_sel);
        end
      end
    end
    checks++;
    if (ndiv != vin_cycles.size()) begin failures++; $display("only %0d results", ndiv); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
