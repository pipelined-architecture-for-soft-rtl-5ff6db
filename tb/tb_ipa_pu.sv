// tb_ipa_pu -- Self-checking testbench of one processing unit.
// PU 1 of an RM(5,2) decoder with P = 4 (8 projections per PU, first-order
// decoder latency 3). Several vectors are streamed back to back, one group
// per cycle, as the projection control would do; the testbench plays the
// aggregation control (agg_en = ValidFOD, agg_sel counting groups, agg_llr =
// the vector the finished projection came from). Every pre-aggregated output
// is compared with the reference chain projection -> ML first-order decoding
// -> pre-aggregation, and must come 1 + 3 + 1 = 5 cycles after its proj_en.
module tb_ipa_pu;
  import tb_ipa_ref_pkg::*;

  localparam int M = 5, P = 4, J = 1, W = 5, N = 1 << M, G = N / P, SW = $clog2(G);
  localparam int LAT = 5, NV = 12;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                proj_en, fod_valid, agg_en, agg_valid;
  logic [SW-1:0]       proj_sel, agg_sel;
  logic signed [W-1:0] proj_llr [N];
  logic signed [W-1:0] agg_llr [N];
  logic signed [W-1:0] agg_o [N];

  ipa_pu #(.M(M), .P(P), .J(J), .W(W)) dut (
    .clk, .rst_n, .proj_en, .proj_sel, .proj_llr, .fod_valid,
    .agg_en, .agg_sel, .agg_llr, .agg_valid, .agg_o);

  int checks = 0, failures = 0;
  ivec_t vecs [NV];
  int cyc = 0, first_en = -1, agg_cnt = 0;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // testbench aggregation control
  assign agg_en  = fod_valid;
  assign agg_sel = SW'(agg_cnt % G);
  always_comb
    for (int z = 0; z < N; z++)
      agg_llr[z] = (agg_cnt / G < NV) ? W'(vecs[agg_cnt / G][z]) : '0;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (fod_valid) agg_cnt <= agg_cnt + 1;
  end

  // driver
  initial begin
    proj_en = 0; proj_sel = 0;
    for (int v = 0; v < NV; v++) begin
      ivec_t c;
      c = rand_codeword(M, 2);
      vecs[v] = new[N];
      for (int z = 0; z < N; z++)
        vecs[v][z] = clip((c[z] ? -5 : 5) + $urandom_range(0, 16) - 8, W);
    end
    for (int z = 0; z < N; z++) proj_llr[z] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int v = 0; v < NV; v++)
      for (int g = 0; g < G; g++) begin
        #1;
        if (first_en < 0) first_en = cyc;
        proj_en  = 1;
        proj_sel = SW'(g);
        for (int z = 0; z < N; z++) proj_llr[z] = W'(vecs[v][z]);
        @(posedge clk);
      end
    #1;
    proj_en = 0;
  end

  // monitor
  initial begin
    int nout;
    ivec_t e;
    nout = 0;
    @(posedge rst_n);
    while (nout < NV * G) begin
      @(posedge clk);
      #2;
      if (agg_valid) begin
        int v, g;
        v = nout / G;
        g = nout % G;
        e = ref_preagg(vecs[v], ref_fod(ref_project(vecs[v], g * P + J, W)), g * P + J, W);
        checks++;
        if (cyc - first_en - LAT != nout) begin
          failures++;
          $display("output %0d at cycle %0d, expected %0d", nout, cyc - first_en, nout + LAT);
        end
        for (int z = 0; z < N; z++) begin
          checks++;
          if (int'(agg_o[z]) != e[z]) begin
            failures++;
            if (failures < 10) $display("v=%0d g=%0d z=%0d got %0d exp %0d", v, g, z, agg_o[z], e[z]);
          end
        end
        nout++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
