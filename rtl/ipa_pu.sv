// ipa_pu -- Processing unit: Projection -> first-order decoder ->
// PreAggregation for the projections i = g*P + J, g = 0 .. n/P-1.
//
// The projection side is driven by the projection control (proj_en,
// proj_sel) and reads the iteration's input register (proj_llr). The
// pre-aggregation side is driven by the aggregation control (agg_en, agg_sel)
// and reads the register array (agg_llr), because by the time a decoded
// projection reaches it the input register may already hold the next vector.
// fod_valid (ValidFOD) tells the aggregation control that a decoded projected
// codeword is ready. The group number also travels with the data through the
// first-order decoder; an assertion checks that it agrees with agg_sel.
//
// Timing: agg_valid/agg_o follow proj_en by 1 + LAT + 1 cycles (6 at the
// defaults): t_proj = 1, t_FOD = LAT, t_PreAgg = 1.
module ipa_pu #(
  parameter int unsigned M = ipa_pkg::M_DEFAULT,
  parameter int unsigned P = ipa_pkg::P_DEFAULT,
  parameter int unsigned J = 0,
  parameter int unsigned W = ipa_pkg::W_DEFAULT,
  localparam int unsigned N  = 1 << M,
  localparam int unsigned G  = N / P,
  localparam int unsigned SW = (G > 1) ? $clog2(G) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                proj_en,
  input  logic [SW-1:0]       proj_sel,
  input  logic signed [W-1:0] proj_llr [N],
  output logic                fod_valid,
  input  logic                agg_en,
  input  logic [SW-1:0]       agg_sel,
  input  logic signed [W-1:0] agg_llr [N],
  output logic                agg_valid,
  output logic signed [W-1:0] agg_o [N]
);

  logic                pr_valid;
  logic [SW-1:0]       pr_sel;
  logic signed [W-1:0] pr_vec [N/2];

  ipa_projection #(.M(M), .P(P), .J(J), .W(W)) u_proj (
    .clk, .rst_n, .en(proj_en), .sel(proj_sel), .llr(proj_llr),
    .valid_o(pr_valid), .sel_o(pr_sel), .proj_o(pr_vec)
  );

  logic [SW-1:0]  fod_sel;
  logic [N/2-1:0] fod_y;

  ipa_fod #(.K(M - 1), .W(W), .SW(SW)) u_fod (
    .clk, .rst_n, .valid_i(pr_valid), .sel_i(pr_sel), .llr_i(pr_vec),
    .valid_o(fod_valid), .sel_o(fod_sel), .y_o(fod_y)
  );

  ipa_preagg #(.M(M), .P(P), .J(J), .W(W)) u_preagg (
    .clk, .rst_n, .en(agg_en), .sel(agg_sel), .y_i(fod_y), .llr(agg_llr),
    .valid_o(agg_valid), .agg_o
  );

  // The aggregation state machine must select the projection that the
  // first-order decoder has just finished.
  a_sel_match: assert property (@(posedge clk) disable iff (!rst_n)
                                agg_en |-> (fod_valid && agg_sel == fod_sel));

endmodule
