// tb_ipa_iteration -- Self-checking testbench of one IPA iteration.
// Two configurations: RM(5,2) with P = 4 (partially parallel, 8 cycles per
// vector) and RM(4,2) with P = 16 (fully parallel, one vector per cycle, no
// divider shift registers). Noisy codewords are streamed at the maximum rate
// and, for the first instance, also with irregular gaps. Each output vector
// must equal the reference iteration (min-sum projection, ML first-order
// decoding, pre-aggregation, floor-mean tree) and appear
//     t = (1 + t_FOD + 1) + (n/P - 1) + m + 2
// cycles after its ValidIn (19 and 11 cycles here).
module tb_ipa_iteration;
  import tb_ipa_ref_pkg::*;

  localparam int W = 5, NV = 24;
  localparam int MA = 5, PA = 4,  NA = 32, GA = 8, TA = 1 + 3 + 1 + (GA - 1) + MA + 2;
  localparam int MB = 4, PB = 16, NB = 16, GB = 1, TB = 1 + 3 + 1 + (GB - 1) + MB + 2;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                via, vib, voa, vob;
  logic signed [W-1:0] lia [NA];
  logic signed [W-1:0] loa [NA];
  logic signed [W-1:0] lib [NB];
  logic signed [W-1:0] lob [NB];

  ipa_iteration #(.M(MA), .P(PA), .W(W)) dut_a (
    .clk, .rst_n, .valid_in(via), .llr_in(lia), .valid_out(voa), .llr_out(loa));
  ipa_iteration #(.M(MB), .P(PB), .W(W)) dut_b (
    .clk, .rst_n, .valid_in(vib), .llr_in(lib), .valid_out(vob), .llr_out(lob));

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  ivec_t in_a [NV];
  ivec_t in_b [NV];
  int    t_a [NV];
  int    t_b [NV];

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic ivec_t noisy(int m);
    ivec_t c, l;
    c = rand_codeword(m, 2);
    l = channel(c, 700, 2, W);
    return l;
  endfunction

  initial begin
    via = 0;
    for (int z = 0; z < NA; z++) lia[z] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int v = 0; v < NV; v++) begin
      in_a[v] = noisy(MA);
      #1;
      t_a[v] = cyc;
      via = 1;
      for (int z = 0; z < NA; z++) lia[z] = W'(in_a[v][z]);
      @(posedge clk);
      #1;
      via = 0;
      // back to back for the first half, then random gaps
      repeat (GA - 1 + ((v >= NV / 2) ? $urandom_range(0, 5) : 0)) @(posedge clk);
    end
  end

  initial begin
    vib = 0;
    for (int z = 0; z < NB; z++) lib[z] = '0;
    repeat (3) @(posedge clk);
    for (int v = 0; v < NV; v++) begin
      in_b[v] = noisy(MB);
      #1;
      t_b[v] = cyc;
      vib = 1;
      for (int z = 0; z < NB; z++) lib[z] = W'(in_b[v][z]);
      @(posedge clk);
    end
    #1;
    vib = 0;
  end

  initial begin
    int na, nb;
    ivec_t e;
    na = 0; nb = 0;
    @(posedge rst_n);
    while (na < NV || nb < NV) begin
      @(posedge clk);
      #2;
      if (voa) begin
        e = ref_iteration(in_a[na], W);
        checks++;
        if (cyc - t_a[na] != TA) begin
          failures++; $display("A: vector %0d latency %0d, expected %0d", na, cyc - t_a[na], TA);
        end
        for (int z = 0; z < NA; z++) begin
          checks++;
          if (int'(loa[z]) != e[z]) begin
            failures++;
            if (failures < 10) $display("A v=%0d z=%0d got %0d exp %0d", na, z, loa[z], e[z]);
          end
        end
        na++;
      end
      if (vob) begin
        e = ref_iteration(in_b[nb], W);
        checks++;
        if (cyc - t_b[nb] != TB) begin
          failures++; $display("B: vector %0d latency %0d, expected %0d", nb, cyc - t_b[nb], TB);
        end
        for (int z = 0; z < NB; z++) begin
          checks++;
          if (int'(lob[z]) != e[z]) begin
            failures++;
            if (failures < 10) $display("B v=%0d z=%0d got %0d exp %0d", nb, z, lob[z], e[z]);
          end
        end
        nb++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
