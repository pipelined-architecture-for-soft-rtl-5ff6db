// sd_ipa_decoder -- Pipelined soft-decision iterative projection-aggregation
// (IPA) decoder for the second-order Reed-Muller code RM(M,2).
//
// NMAX copies of the single-iteration hardware (ipa_iteration) are cascaded:
// the ValidOut and L-hat of iteration k are the ValidIn and L of iteration
// k+1, so the iterations of successive codewords overlap and the decoder
// keeps accepting a codeword every n/P cycles. There is no early stopping:
// every codeword goes through all NMAX iterations, which keeps throughput
// constant. A hard-decision block at the end takes the sign bit of each final
// LLR as the decoded code bit (negative LLR -> 1).
//
// Interface: valid_in high for one cycle with the n channel LLRs on llr_in
// (W-bit two's complement, Q(3:2) at W = 5: value = llr_in / 4); valid_out
// high for one cycle when codeword holds the decoded word, which stays until
// the next one. Latency NMAX * t_(M,2) cycles: 2 * 46 = 92 at the defaults
// (RM(7,2), P = 4 PUs, W = 5, NMAX = 2). Consecutive valid_in pulses must be
// at least n/P cycles apart. Synchronous, active-low reset.
module sd_ipa_decoder #(
  parameter int unsigned M    = ipa_pkg::M_DEFAULT,
  parameter int unsigned P    = ipa_pkg::P_DEFAULT,
  parameter int unsigned W    = ipa_pkg::W_DEFAULT,
  parameter int unsigned NMAX = ipa_pkg::NMAX_DEFAULT,
  localparam int unsigned N   = 1 << M
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                valid_in,
  input  logic signed [W-1:0] llr_in [N],
  output logic                valid_out,
  output logic [N-1:0]        codeword
);

  logic                v     [NMAX+1];
  logic signed [W-1:0] l_vec [NMAX+1][N];

  assign v[0]     = valid_in;
  assign l_vec[0] = llr_in;

  for (genvar k = 0; k < NMAX; k++) begin : g_itr
    ipa_iteration #(.M(M), .P(P), .W(W)) u_itr (
      .clk, .rst_n,
      .valid_in(v[k]), .llr_in(l_vec[k]),
      .valid_out(v[k+1]), .llr_out(l_vec[k+1])
    );
  end

  // Hard-decision block.
  always_comb
    for (int unsigned z = 0; z < N; z++)
      codeword[z] = l_vec[NMAX][z][W-1];

  assign valid_out = v[NMAX];

endmodule
