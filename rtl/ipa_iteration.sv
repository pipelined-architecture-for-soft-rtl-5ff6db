// ipa_iteration -- One iteration of soft-decision IPA decoding of RM(m,2):
// every projection of L is decoded as a first-order codeword, the decoded
// projections are pre-aggregated against L, and the n pre-aggregated vectors
// are averaged into the new LLR estimate L-hat.
//
// Structure: input register (L) -> P processing units, PU j handling the
// projections i = g*P + j in groups g = 0 .. n/P-1, one group per cycle ->
// tree divider -> output register (L-hat). A register array keeps each L for
// the pre-aggregation step, and the control unit sequences everything. The
// pipeline accepts a new vector every n/P cycles.
//
// Timing: valid_in with llr_in in cycle 0; valid_out is high for one cycle,
// with llr_out held until the next result, in cycle
//     t = (t_proj + t_FOD + t_PreAgg) + (n/P - 1) + m + 2,
// which is 1 + 4 + 1 + 31 + 7 + 2 = 46 at the defaults (RM(7,2), P = 4).
// llr_out is held stable until the next valid_out.
module ipa_iteration #(
  parameter int unsigned M = ipa_pkg::M_DEFAULT,
  parameter int unsigned P = ipa_pkg::P_DEFAULT,
  parameter int unsigned W = ipa_pkg::W_DEFAULT,
  localparam int unsigned N   = 1 << M,
  localparam int unsigned G   = N / P,
  localparam int unsigned SW  = (G > 1) ? $clog2(G) : 1,
  localparam int unsigned SL  = M - $clog2(P),
  localparam int unsigned SLW = (SL > 0) ? SL : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                valid_in,
  input  logic signed [W-1:0] llr_in [N],
  output logic                valid_out,
  output logic signed [W-1:0] llr_out [N]
);

  // Input register.
  logic signed [W-1:0] l_q [N];
  always_ff @(posedge clk)
    if (valid_in) l_q <= llr_in;

  // Control unit.
  logic           wen, proj_en, fod_valid, agg_en, ren, div_valid;
  logic [SW-1:0]  proj_sel, agg_sel;
  logic [SLW-1:0] sr_en;
  logic [P-1:0]   pu_fod_valid, pu_agg_valid;

  ipa_control #(.M(M), .P(P)) u_ctrl (
    .clk, .rst_n, .valid_in, .wen, .proj_en, .proj_sel,
    .fod_valid, .agg_en, .agg_sel, .ren,
    .pu_valid(pu_agg_valid[0]), .sr_en, .div_valid
  );
  assign fod_valid = pu_fod_valid[0];

  // Register array.
  logic signed [W-1:0] l_reg [N];
  ipa_reg_array #(.N(N), .W(W), .DEPTH(ipa_pkg::regarr_depth(M, P))) u_regarr (
    .clk, .rst_n, .wen, .data_in(llr_in), .ren, .data_out(l_reg)
  );

  // Processing units.
  logic signed [W-1:0] agg [P][N];
  for (genvar j = 0; j < P; j++) begin : g_pu
    ipa_pu #(.M(M), .P(P), .J(j), .W(W)) u_pu (
      .clk, .rst_n,
      .proj_en, .proj_sel, .proj_llr(l_q), .fod_valid(pu_fod_valid[j]),
      .agg_en, .agg_sel, .agg_llr(l_reg),
      .agg_valid(pu_agg_valid[j]), .agg_o(agg[j])
    );
  end

  // Tree divider.
  logic signed [W-1:0] avg [N];
  ipa_tree_divider #(.M(M), .P(P), .W(W)) u_div (
    .clk, .rst_n, .in_valid(pu_agg_valid[0]), .in_vec(agg), .sr_en, .avg_o(avg)
  );

  // Output register.
  always_ff @(posedge clk) begin
    if (!rst_n) valid_out <= 1'b0;
    else        valid_out <= div_valid;
    if (div_valid) llr_out <= avg;
  end

  // All PUs run in lock step.
  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
                               pu_fod_valid == {P{pu_fod_valid[0]}} &&
                               pu_agg_valid == {P{pu_agg_valid[0]}});

endmodule
