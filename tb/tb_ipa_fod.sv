// tb_ipa_fod -- Self-checking testbench of the first-order decoder.
// Two instances: K = 6 (length 64, the default, latency 4) and K = 4
// (length 16, latency 3). Vectors are fed back to back, one per cycle: noisy
// RM(K,1) codewords, fully random vectors and all-equal vectors (ties). Each
// output is compared, exactly LAT cycles after its input, with maximum-
// likelihood decoding by brute-force correlation.
module tb_ipa_fod;
  import tb_ipa_ref_pkg::*;

  localparam int W = 5;
  localparam int KA = 6, NA = 1 << KA, LA = 4;
  localparam int KB = 4, NB = 1 << KB, LB = 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                va, vb, voa, vob;
  logic [4:0]          ta, tb_, toa, tob;
  logic signed [W-1:0] la [NA];
  logic signed [W-1:0] lb [NB];
  logic [NA-1:0]       ya;
  logic [NB-1:0]       yb;

  ipa_fod #(.K(KA), .W(W), .SW(5)) dut_a (
    .clk, .rst_n, .valid_i(va), .sel_i(ta), .llr_i(la), .valid_o(voa), .sel_o(toa), .y_o(ya));
  ipa_fod #(.K(KB), .W(W), .SW(5)) dut_b (
    .clk, .rst_n, .valid_i(vb), .sel_i(tb_), .llr_i(lb), .valid_o(vob), .sel_o(tob), .y_o(yb));

  int checks = 0, failures = 0;
  localparam int T = 300;
  ivec_t ea [T];
  ivec_t eb [T];

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic ivec_t stimulus(int k, int t);
    ivec_t l, c;
    int n;
    n = 1 << k;
    l = new[n];
    case (t % 3)
      0: begin
        c = rand_codeword(k, 1);
        for (int z = 0; z < n; z++)
          l[z] = clip((c[z] ? -6 : 6) + $urandom_range(0, 14) - 7, W);
      end
      1: for (int z = 0; z < n; z++) l[z] = $urandom_range(0, 31) - 16;
      default: for (int z = 0; z < n; z++) l[z] = (t % 2) ? -16 : 3;
    endcase
    return l;
  endfunction

  // driver
  initial begin
    ivec_t l;
    va = 0; vb = 0; ta = 0; tb_ = 0;
    for (int z = 0; z < NA; z++) la[z] = '0;
    for (int z = 0; z < NB; z++) lb[z] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int t = 0; t < T; t++) begin
      #1;
      l = stimulus(KA, t);
      for (int z = 0; z < NA; z++) la[z] = W'(l[z]);
      ea[t] = ref_fod(l);
      l = stimulus(KB, t);
      for (int z = 0; z < NB; z++) lb[z] = W'(l[z]);
      eb[t] = ref_fod(l);
      va = 1; vb = 1; ta = 5'(t); tb_ = 5'(t);
      @(posedge clk);
    end
    #1;
    va = 0; vb = 0;
  end

  // monitors: output t must appear LAT cycles after input t
  initial begin
    int na, nb, cyc, first;
    na = 0; nb = 0; cyc = 0; first = -1;
    @(posedge rst_n);
    while (na < T || nb < T) begin
      @(posedge clk);
      #2;
      cyc++;
      if (va && first < 0) first = cyc;
      if (voa) begin
        checks++;
        if (cyc - first - LA != na || toa != 5'(na)) begin
          failures++;
          $display("A: output %0d at wrong cycle/tag", na);
        end
        for (int j = 0; j < NA; j++) begin
          checks++;
          if (int'(ya[j]) != ea[na][j]) begin
            failures++;
            if (failures < 10) $display("A t=%0d j=%0d got %0d exp %0d", na, j, ya[j], ea[na][j]);
          end
        end
        na++;
      end
      if (vob) begin
        checks++;
        if (cyc - first - LB != nb || tob != 5'(nb)) begin
          failures++;
          $display("B: output %0d at wrong cycle/tag", nb);
        end
        for (int j = 0; j < NB; j++) begin
          checks++;
          if (int'(yb[j]) != eb[nb][j]) begin
            failures++;
            if (failures < 10) $display("B t=%0d j=%0d got %0d exp %0d", nb, j, yb[j], eb[nb][j]);
          end
        end
        nb++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
