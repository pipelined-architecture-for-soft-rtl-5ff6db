// ipa_projection -- Projection component of one processing unit (PU).
//
// For the current projection number i = sel*P + J it reorders the n input
// LLRs so that the two coordinates combined by projection i sit next to each
// other (ROC: one fixed crossbar per projection handled by this PU, plus the
// all-zero dummy for i = 0, and a multiplexer driven by sel), then applies the
// min-sum rule to every pair:
//     L^i(p) = min(|L(ja)|, |L(jb)|) * sgn(L(ja)) * sgn(L(jb)),
// with (ja, jb) = (pair_a(p,i), pair_a(p,i) ^ i). Following the paper, PU J
// holds only the crossbars of projections with i mod P = J.
//
// The result is registered: valid_o, sel_o and proj_o follow en/sel by one
// cycle (t_proj = 1). The min-sum magnitude is clipped to 2^(W-1)-1 so that
// results stay in the symmetric W-bit range; the clipping rule and the reset
// (synchronous, active low, clears only the valid bit) are this design's
// choices.
module ipa_projection #(
  parameter int unsigned M = ipa_pkg::M_DEFAULT,   // code length n = 2^M
  parameter int unsigned P = ipa_pkg::P_DEFAULT,   // number of PUs
  parameter int unsigned J = 0,                    // index of this PU
  parameter int unsigned W = ipa_pkg::W_DEFAULT,   // LLR width
  localparam int unsigned N  = 1 << M,
  localparam int unsigned G  = N / P,              // projections per PU
  localparam int unsigned SW = (G > 1) ? $clog2(G) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                en,
  input  logic [SW-1:0]       sel,
  input  logic signed [W-1:0] llr [N],
  output logic                valid_o,
  output logic [SW-1:0]       sel_o,
  output logic signed [W-1:0] proj_o [N/2]
);

  localparam logic [W:0] MAXMAG = (W+1)'((1 << (W - 1)) - 1);

  // ROC: one crossbar per projection of this PU.
  logic signed [W-1:0] cb [G][N];
  for (genvar g = 0; g < G; g++) begin : g_cb
    localparam int unsigned I = g * P + J;
    for (genvar p = 0; p < N / 2; p++) begin : g_pair
      if (I == 0) begin : g_zero
        assign cb[g][2*p]   = '0;
        assign cb[g][2*p+1] = '0;
      end else begin : g_wire
        localparam int unsigned JA = ipa_pkg::pair_a(p, I);
        localparam int unsigned JB = JA ^ I;
        assign cb[g][2*p]   = llr[JA];
        assign cb[g][2*p+1] = llr[JB];
      end
    end
  end

  // ROC multiplexer.
  logic signed [W-1:0] lr [N];
  always_comb begin
    lr = cb[0];
    for (int unsigned g = 1; g < G; g++)
      if (sel == SW'(g)) lr = cb[g];
  end

  // MS: n/2 min-sum units.
  logic signed [W-1:0] ms [N/2];
  always_comb begin
    for (int unsigned p = 0; p < N / 2; p++) begin
      logic [W:0] ma, mb, mn;
      logic       neg;
      ma  = lr[2*p][W-1]   ? (W+1)'(-{lr[2*p][W-1],   lr[2*p]})   : (W+1)'({1'b0, lr[2*p]});
      mb  = lr[2*p+1][W-1] ? (W+1)'(-{lr[2*p+1][W-1], lr[2*p+1]}) : (W+1)'({1'b0, lr[2*p+1]});
      mn  = (ma < mb) ? ma : mb;
      if (mn > MAXMAG) mn = MAXMAG;
      neg = lr[2*p][W-1] ^ lr[2*p+1][W-1];
      ms[p] = neg ? W'(-mn) : W'(mn);
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) valid_o <= 1'b0;
    else        valid_o <= en;
    if (en) begin
      sel_o  <= sel;
      proj_o <= ms;
    end
  end

endmodule
