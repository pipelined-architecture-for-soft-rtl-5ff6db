// tb_ipa_projection -- Self-checking testbench of the Projection component.
// Two PUs of an RM(5,2) decoder with P = 4 (PU 0, which owns the dummy
// projection i = 0, and PU 3) get random LLR vectors for every group; their
// outputs, one cycle later, are compared with the min-sum projection computed
// by the reference model from the Reorder recursion.
module tb_ipa_projection;
  import tb_ipa_ref_pkg::*;

  localparam int M = 5, P = 4, W = 5, N = 1 << M, G = N / P, SW = $clog2(G);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                en;
  logic [SW-1:0]       sel;
  logic signed [W-1:0] llr [N];
  logic                v0, v3;
  logic [SW-1:0]       s0, s3;
  logic signed [W-1:0] o0 [N/2];
  logic signed [W-1:0] o3 [N/2];

  ipa_projection #(.M(M), .P(P), .J(0), .W(W)) dut0 (
    .clk, .rst_n, .en, .sel, .llr, .valid_o(v0), .sel_o(s0), .proj_o(o0));
  ipa_projection #(.M(M), .P(P), .J(3), .W(W)) dut3 (
    .clk, .rst_n, .en, .sel, .llr, .valid_o(v3), .sel_o(s3), .proj_o(o3));

  int checks = 0, failures = 0;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ivec_t l, e0, e3;
    en = 0; sel = 0;
    for (int z = 0; z < N; z++) llr[z] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    l = new[N];
    for (int t = 0; t < 200; t++) begin
      int g;
      g = t % G;
      for (int z = 0; z < N; z++) begin
        // mostly random values, sometimes the extremes
        l[z] = ($urandom_range(0, 7) == 0) ? ((z % 2) ? 15 : -16) : $urandom_range(0, 31) - 16;
        llr[z] = W'(l[z]);
      end
      en  = 1;
      sel = SW'(g);
      @(posedge clk);
      #1;
      en = 0;
      e0 = ref_project(l, g * P + 0, W);
      e3 = ref_project(l, g * P + 3, W);
      checks++;
      if (!v0 || !v3 || s0 != SW'(g) || s3 != SW'(g)) begin
        failures++;
        $display("valid/sel wrong at t=%0d", t);
      end
      for (int p = 0; p < N / 2; p++) begin
        checks += 2;
        if (int'(o0[p]) != e0[p]) begin
          failures++;
          $display("PU0 i=%0d p=%0d got %0d exp %0d", g * P, p, o0[p], e0[p]);
        end
        if (int'(o3[p]) != e3[p]) begin
          failures++;
          $display("PU3 i=%0d p=%0d got %0d exp %0d", g * P + 3, p, o3[p], e3[p]);
        end
      end
    end
    @(posedge clk);
    #1;
    checks++;
    if (v0) begin failures++; $display("valid stuck"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
