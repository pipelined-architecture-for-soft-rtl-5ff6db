// tb_ipa_preagg -- Self-checking testbench of the PreAggregation component.
// Two PUs (J = 0 with the dummy projection, J = 3) of an RM(5,2) decoder
// with P = 4 get random decoded projections and LLR vectors (including the
// most negative value, whose negation must clip); the registered outputs are
// compared with the reference pre-aggregation built on the Reorder pairs.
module tb_ipa_preagg;
  import tb_ipa_ref_pkg::*;

  localparam int M = 5, P = 4, W = 5, N = 1 << M, G = N / P, SW = $clog2(G);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                en, v0, v3;
  logic [SW-1:0]       sel;
  logic [N/2-1:0]      y;
  logic signed [W-1:0] llr [N];
  logic signed [W-1:0] o0 [N];
  logic signed [W-1:0] o3 [N];

  ipa_preagg #(.M(M), .P(P), .J(0), .W(W)) dut0 (
    .clk, .rst_n, .en, .sel, .y_i(y), .llr, .valid_o(v0), .agg_o(o0));
  ipa_preagg #(.M(M), .P(P), .J(3), .W(W)) dut3 (
    .clk, .rst_n, .en, .sel, .y_i(y), .llr, .valid_o(v3), .agg_o(o3));

  int checks = 0, failures = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ivec_t l, yv, e0, e3;
    en = 0; sel = 0; y = '0;
    for (int z = 0; z < N; z++) llr[z] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    l = new[N];
    yv = new[N / 2];
    for (int t = 0; t < 200; t++) begin
      int g;
      g = t % G;
      for (int z = 0; z < N; z++) begin
        l[z] = ($urandom_range(0, 5) == 0) ? -16 : $urandom_range(0, 31) - 16;
        llr[z] = W'(l[z]);
      end
      for (int p = 0; p < N / 2; p++) begin
        yv[p] = $urandom_range(0, 1);
        y[p]  = yv[p][0];
      end
      en = 1;
      sel = SW'(g);
      @(posedge clk);
      #1;
      en = 0;
      e0 = ref_preagg(l, yv, g * P, W);
      e3 = ref_preagg(l, yv, g * P + 3, W);
      checks++;
      if (!v0 || !v3) begin failures++; $display("valid low at t=%0d", t); end
      for (int z = 0; z < N; z++) begin
        checks += 2;
        if (int'(o0[z]) != e0[z]) begin
          failures++;
          if (failures < 10) $display("PU0 i=%0d z=%0d got %0d exp %0d", g * P, z, o0[z], e0[z]);
        end
        if (int'(o3[z]) != e3[z]) begin
          failures++;
          if (failures < 10) $display("PU3 i=%0d z=%0d got %0d exp %0d", g * P + 3, z, o3[z], e3[z]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
