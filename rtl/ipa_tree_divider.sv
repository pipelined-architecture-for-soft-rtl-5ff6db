// ipa_tree_divider -- Voting step: per-coordinate average of the n
// pre-aggregated vectors L_agg^0 .. L_agg^(n-1) (L_agg^0 is the all-zero
// dummy), computed as a binary tree of "add with one bit of extension, then
// shift right by one" nodes: avg(a,b) = (a + b) >>> 1. Since the mean of two
// halves' means is the mean of the whole, m such levels divide by n = 2^m
// with adders and shifts only. The arithmetic shift rounds towards minus
// infinity; the average of two W-bit values always fits W bits.
//
// With P = 2^p PUs the P vectors of one group arrive together (in_valid).
//   levels 0 .. p-1  plain registers, P/2^(l+1) nodes at level l, each
//                    loaded one cycle after the level before;
//   levels p .. m-1  one two-entry shift register per level. On sr_en[l-p]
//                    the register shifts by one and stores its new input;
//                    the sum of its two entries feeds the next level. The
//                    enables come from the control unit's EnGen counters.
// avg_o is the combinational node after the last shift register (or the
// last parallel register when p = m); it is valid in the cycle after the last
// shift register received its second entry, m cycles after the last group
// arrived, and is captured by the iteration's output register.
module ipa_tree_divider #(
  parameter int unsigned M = ipa_pkg::M_DEFAULT,
  parameter int unsigned P = ipa_pkg::P_DEFAULT,
  parameter int unsigned W = ipa_pkg::W_DEFAULT,
  localparam int unsigned N   = 1 << M,
  localparam int unsigned PL  = $clog2(P),          // parallel levels p
  localparam int unsigned SL  = M - PL,             // shift-register levels m-p
  localparam int unsigned SLW = (SL > 0) ? SL : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic signed [W-1:0] in_vec [P][N],
  input  logic [SLW-1:0]      sr_en,
  output logic signed [W-1:0] avg_o [N]
);

  function automatic logic signed [W-1:0] avg2(logic signed [W-1:0] a,
                                               logic signed [W-1:0] b);
    logic signed [W:0] s;
    s = (W+1)'(a) + (W+1)'(b);
    return W'(s >>> 1);
  endfunction

  // Parallel part: lvl[l] is the input of level l; lvl[0] is the PU outputs.
  logic signed [W-1:0] lvl [PL+1][P][N];
  logic [PL:0]         lvl_v;
  assign lvl[0]   = in_vec;
  assign lvl_v[0] = in_valid;

  for (genvar l = 0; l < PL; l++) begin : g_par
    localparam int unsigned NODES = P >> (l + 1);
    always_ff @(posedge clk) begin
      if (!rst_n) lvl_v[l+1] <= 1'b0;
      else        lvl_v[l+1] <= lvl_v[l];
      if (lvl_v[l])
        for (int unsigned k = 0; k < NODES; k++)
          for (int unsigned z = 0; z < N; z++)
            lvl[l+1][k][z] <= avg2(lvl[l][2*k][z], lvl[l][2*k+1][z]);
    end
    // Slots above NODES are not used at this level.
    for (genvar k = NODES; k < P; k++) begin : g_unused
      assign lvl[l+1][k] = '{default: '0};
    end
  end

  if (SL == 0) begin : g_full_parallel
    assign avg_o = lvl[PL][0];
  end else begin : g_seq
    // sr[l][0] is the newest entry, sr[l][1] the one before.
    logic signed [W-1:0] sr  [SL][2][N];
    logic signed [W-1:0] sum [SL][N];
    always_comb
      for (int unsigned l = 0; l < SL; l++)
        for (int unsigned z = 0; z < N; z++)
          sum[l][z] = avg2(sr[l][0][z], sr[l][1][z]);
    always_ff @(posedge clk)
      for (int unsigned l = 0; l < SL; l++)
        if (sr_en[l]) begin
          sr[l][1] <= sr[l][0];
          sr[l][0] <= (l == 0) ? lvl[PL][0] : sum[l-1];
        end
    assign avg_o = sum[SL-1];
    // EnGen's first enable is the pre-aggregation valid delayed by p cycles,
    // i.e. the valid of the last parallel level.
    a_en0: assert property (@(posedge clk) disable iff (!rst_n) sr_en[0] == lvl_v[PL]);
  end

endmodule
