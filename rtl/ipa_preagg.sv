// ipa_preagg -- PreAggregation component of one processing unit (PU).
//
// Given the decoded projected codeword y^i (n/2 bits) of projection
// i = sel*P + J and the LLR vector L the projection was made from, it forms
//     L_agg^i(ja) = (1 - 2*y^i(p)) * L(jb),
//     L_agg^i(jb) = (1 - 2*y^i(p)) * L(ja)      for every pair p = (ja, jb),
// which is the aggregation rule without the final averaging. Three parts:
//   Extension      copies y^i(p) onto both coordinates of pair p
//                  (y_e(z) = y^i(pair_of(z, i))),
//   ReArrangement  swaps the two LLRs of every pair, L_e(z) = L(z ^ i),
//   TwosComp       negates L_e(z) where y_e(z) = 1.
// Extension and ReArrangement each hold one fixed network per projection of
// this PU (i mod P = J) and a multiplexer driven by sel; i = 0 selects the
// all-zero dummy vector. Negating -2^(W-1) gives +2^(W-1)-1 (clipping, as all
// non-FHT results are kept in range).
//
// Timing: agg_o/valid_o are registered, one cycle after en (t_PreAgg = 1).
// Synchronous active-low reset clears valid_o only.
module ipa_preagg #(
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
  input  logic                en,
  input  logic [SW-1:0]       sel,
  input  logic [N/2-1:0]      y_i,
  input  logic signed [W-1:0] llr [N],
  output logic                valid_o,
  output logic signed [W-1:0] agg_o [N]
);

  // Extension networks and ReArrangement crossbars, one per projection.
  logic [N-1:0]        ext [G];
  logic signed [W-1:0] rea [G][N];
  for (genvar g = 0; g < G; g++) begin : g_net
    localparam int unsigned I = g * P + J;
    for (genvar z = 0; z < N; z++) begin : g_z
      if (I == 0) begin : g_zero
        assign ext[g][z] = 1'b0;
        assign rea[g][z] = '0;
      end else begin : g_wire
        assign ext[g][z] = y_i[ipa_pkg::pair_of(z, I)];
        assign rea[g][z] = llr[z ^ I];
      end
    end
  end

  // Multiplexers.
  logic [N-1:0]        ye;
  logic signed [W-1:0] le [N];
  always_comb begin
    ye = ext[0];
    le = rea[0];
    for (int unsigned g = 1; g < G; g++)
      if (sel == SW'(g)) begin
        ye = ext[g];
        le = rea[g];
      end
  end

  // TwosComp.
  localparam logic signed [W-1:0] MINV = {1'b1, {(W-1){1'b0}}};
  localparam logic signed [W-1:0] MAXV = {1'b0, {(W-1){1'b1}}};
  logic signed [W-1:0] tc [N];
  always_comb
    for (int unsigned z = 0; z < N; z++)
      if (!ye[z])            tc[z] = le[z];
      else if (le[z] == MINV) tc[z] = MAXV;
      else                    tc[z] = -le[z];

  always_ff @(posedge clk) begin
    if (!rst_n) valid_o <= 1'b0;
    else        valid_o <= en;
    if (en) agg_o <= tc;
  end

endmodule
