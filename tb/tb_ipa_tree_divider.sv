// tb_ipa_tree_divider -- Self-checking testbench of the tree divider.
// Two instances: RM length 16 with P = 4 (two parallel register levels, two
// shift-register levels) and length 8 with P = 1 (three shift-register
// levels, the fully sequential case). Each receives several vectors' worth of
// groups, back to back; the shift-register enables are computed by the
// testbench from the arrival schedule (level 0 enable = valid delayed by p,
// level l+1 enabled the cycle after every second enable of level l). The
// result must equal the pairwise floor-mean tree of the reference model and
// be ready m cycles after the last group of its vector.
module tb_ipa_tree_divider;
  import tb_ipa_ref_pkg::*;

  localparam int W = 5;
  localparam int MA = 4, PA = 4, NA = 16, GA = 4, SLA = 2;
  localparam int MB = 3, PB = 1, NB = 8,  GB = 8, SLB = 3;
  localparam int NV = 6;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                va, vb;
  logic signed [W-1:0] ia [PA][NA];
  logic signed [W-1:0] ib [PB][NB];
  logic [SLA-1:0]      ea;
  logic [SLB-1:0]      eb;
  logic signed [W-1:0] oa [NA];
  logic signed [W-1:0] ob [NB];

  ipa_tree_divider #(.M(MA), .P(PA), .W(W)) dut_a (
    .clk, .rst_n, .in_valid(va), .in_vec(ia), .sr_en(ea), .avg_o(oa));
  ipa_tree_divider #(.M(MB), .P(PB), .W(W)) dut_b (
    .clk, .rst_n, .in_valid(vb), .in_vec(ib), .sr_en(eb), .avg_o(ob));

  int checks = 0, failures = 0;
  int cyc = 0;
  int data_a [NV][NA][NA];   // [vector][projection][coordinate]
  int data_b [NV][NB][NB];

  // Enable schedule: a cycle-indexed table per level.
  localparam int HORIZON = 200;
  logic sched_a [SLA+1][HORIZON];
  logic sched_b [SLB+1][HORIZON];

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) cyc <= cyc + 1;

  // Inputs are driven in cycles START .. START+NV*G-1.
  localparam int START = 4;
  initial begin
    for (int l = 0; l <= SLA; l++) for (int c = 0; c < HORIZON; c++) sched_a[l][c] = 0;
    for (int l = 0; l <= SLB; l++) for (int c = 0; c < HORIZON; c++) sched_b[l][c] = 0;
    for (int c = 0; c < NV * GA; c++) sched_a[0][START + c + 2] = 1;   // p = 2
    for (int c = 0; c < NV * GB; c++) sched_b[0][START + c] = 1;       // p = 0
    for (int l = 0; l < SLA; l++) begin
      int k; k = 0;
      for (int c = 0; c < HORIZON - 1; c++) if (sched_a[l][c]) begin
        if (k % 2 == 1) sched_a[l+1][c+1] = 1;
        k++;
      end
    end
    for (int l = 0; l < SLB; l++) begin
      int k; k = 0;
      for (int c = 0; c < HORIZON - 1; c++) if (sched_b[l][c]) begin
        if (k % 2 == 1) sched_b[l+1][c+1] = 1;
        k++;
      end
    end
    for (int v = 0; v < NV; v++) begin
      for (int i = 0; i < NA; i++) for (int z = 0; z < NA; z++)
        data_a[v][i][z] = (i == 0) ? 0 : $urandom_range(0, 31) - 16;
      for (int i = 0; i < NB; i++) for (int z = 0; z < NB; z++)
        data_b[v][i][z] = (i == 0) ? 0 : ((v == 0) ? -16 : $urandom_range(0, 31) - 16);
    end
  end

  // drive inputs and enables from the cycle count
  always_comb begin
    int c, ka, kb, vva, vvb;
    c = cyc;
    va = (c >= START && c < START + NV * GA);
    vb = (c >= START && c < START + NV * GB);
    ka = va ? (c - START) : 0;
    kb = vb ? (c - START) : 0;
    vva = ka / GA;
    vvb = kb / GB;
    for (int j = 0; j < PA; j++) for (int z = 0; z < NA; z++)
      ia[j][z] = W'(data_a[vva][(ka % GA) * PA + j][z]);
    for (int j = 0; j < PB; j++) for (int z = 0; z < NB; z++)
      ib[j][z] = W'(data_b[vvb][(kb % GB) * PB + j][z]);
    for (int l = 0; l < SLA; l++) ea[l] = (c < HORIZON) ? sched_a[l][c] : 1'b0;
    for (int l = 0; l < SLB; l++) eb[l] = (c < HORIZON) ? sched_b[l][c] : 1'b0;
  end

  initial begin
    int na, nb;
    ivec_t col;
    na = 0; nb = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    while (na < NV || nb < NV) begin
      @(posedge clk);
      #2;
      // vector v of A is complete m cycles after its last group
      if (na < NV && cyc == START + (na + 1) * GA - 1 + MA) begin
        checks++;
        if (!sched_a[SLA][cyc]) begin failures++; $display("A: schedule mismatch"); end
        col = new[NA];
        for (int z = 0; z < NA; z++) begin
          for (int i = 0; i < NA; i++) col[i] = data_a[na][i][z];
          checks++;
          if (int'(oa[z]) != tree_mean(col, 0, NA)) begin
            failures++;
            $display("A v=%0d z=%0d got %0d exp %0d", na, z, oa[z], tree_mean(col, 0, NA));
          end
        end
        na++;
      end
      if (nb < NV && cyc == START + (nb + 1) * GB - 1 + MB) begin
        checks++;
        if (!sched_b[SLB][cyc]) begin failures++; $display("B: schedule mismatch"); end
        col = new[NB];
        for (int z = 0; z < NB; z++) begin
          for (int i = 0; i < NB; i++) col[i] = data_b[nb][i][z];
          checks++;
          if (int'(ob[z]) != tree_mean(col, 0, NB)) begin
            failures++;
            $display("B v=%0d z=%0d got %0d exp %0d", nb, z, ob[z], tree_mean(col, 0, NB));
          end
        end
        nb++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
