// ipa_fod -- Soft-input first-order Reed-Muller decoder, RM(K,1), length 2^K.
//
// Three pipelined modules, as in the first-order decoder of the PU:
//   FHT     omega = H_{2^K} * L by K butterfly stages; stage s pairs element k
//           with k + 2^(K-1-s) inside blocks of 2^(K-s), top = a+b,
//           bottom = a-b. Each stage grows the word by one bit (W+K bits at
//           the end), so nothing saturates.
//   Argmax  beta = argmax |omega|, a binary tree of comparators; lambda is
//           the sign of omega(beta). On equal magnitudes the lower index wins
//           (this design's choice).
//   GenMtx  encoder of alpha = (2^K)*lambda + beta:
//           y(j) = lambda ^ parity(beta & j), the codeword of RM(K,1) whose
//           upper half is the lower half XOR the top message bit.
// Registers sit after the FHT (|L^i|), after Argmax (Ind_max) and after
// GenMtx (y^i). With LAT = 4 the FHT is split into two register stages after
// K/2 butterfly levels; with LAT = 3 it is one stage. LAT = 4 for K >= 6
// reproduces the decoder latencies reported for n = 128.
//
// Interface: valid_i/sel_i/llr_i in, valid_o/sel_o/y_o exactly LAT cycles
// later. sel is a tag carried along unchanged. Synchronous active-low reset
// clears the valid pipeline only.
module ipa_fod #(
  parameter int unsigned K   = ipa_pkg::M_DEFAULT - 1,   // log2 of the length
  parameter int unsigned W   = ipa_pkg::W_DEFAULT,       // input LLR width
  parameter int unsigned SW  = 5,                        // tag width
  parameter int unsigned LAT = ipa_pkg::fod_latency(K),  // 3 or 4
  localparam int unsigned NK = 1 << K,
  localparam int unsigned WF = W + K                     // FHT output width
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                valid_i,
  input  logic [SW-1:0]       sel_i,
  input  logic signed [W-1:0] llr_i [NK],
  output logic                valid_o,
  output logic [SW-1:0]       sel_o,
  output logic [NK-1:0]       y_o
);

  localparam int unsigned SPLIT = K / 2;  // register after this many stages when LAT = 4

  // Valid/tag pipeline.
  logic [LAT-1:0] vpipe;
  logic [SW-1:0]  tpipe [LAT];
  always_ff @(posedge clk) begin
    if (!rst_n) vpipe <= '0;
    else        vpipe <= {vpipe[LAT-2:0], valid_i};
    tpipe[0] <= sel_i;
    for (int unsigned s = 1; s < LAT; s++) tpipe[s] <= tpipe[s-1];
  end
  assign valid_o = vpipe[LAT-1];
  assign sel_o   = tpipe[LAT-1];

  // ---------------------------------------------------------------- FHT
  // g_st[s].v holds the values after s butterfly stages, W+s bits wide.
  for (genvar s = 0; s <= K; s++) begin : g_st
    logic signed [W+s-1:0] v [NK];
    if (s == 0) begin : g_in
      assign v = llr_i;
    end else begin : g_bf
      localparam int unsigned SPAN = NK >> s;
      logic signed [W+s-1:0] c [NK];
      always_comb begin
        for (int unsigned k = 0; k < NK; k++) begin
          if ((k & SPAN) == 0)
            c[k] = (W+s)'(g_st[s-1].v[k]) + (W+s)'(g_st[s-1].v[k+SPAN]);
          else
            c[k] = (W+s)'(g_st[s-1].v[k-SPAN]) - (W+s)'(g_st[s-1].v[k]);
        end
      end
      if (LAT == 4 && s == SPLIT) begin : g_reg
        always_ff @(posedge clk) v <= c;
      end else begin : g_comb
        assign v = c;
      end
    end
  end

  // |L^i| register: FHT output.
  logic signed [WF-1:0] omega [NK];
  always_ff @(posedge clk) omega <= g_st[K].v;

  // ---------------------------------------------------------------- Argmax
  logic [K-1:0] beta_c;
  logic         lambda_c;
  always_comb begin
    logic [WF-1:0] mag [NK];
    logic [K-1:0]  idx [NK];
    for (int unsigned k = 0; k < NK; k++) begin
      mag[k] = omega[k][WF-1] ? WF'(-omega[k]) : WF'(omega[k]);
      idx[k] = K'(k);
    end
    for (int unsigned len = NK; len > 1; len = len / 2) begin
      for (int unsigned k = 0; k < len / 2; k++) begin
        if (mag[2*k+1] > mag[2*k]) begin
          mag[k] = mag[2*k+1];
          idx[k] = idx[2*k+1];
        end else begin
          mag[k] = mag[2*k];
          idx[k] = idx[2*k];
        end
      end
    end
    beta_c   = idx[0];
    lambda_c = omega[idx[0]][WF-1];
  end

  // Ind_max register.
  logic [K-1:0] beta_q;
  logic         lambda_q;
  always_ff @(posedge clk) begin
    beta_q   <= beta_c;
    lambda_q <= lambda_c;
  end

  // ---------------------------------------------------------------- GenMtx
  logic [NK-1:0] y_c;
  always_comb
    for (int unsigned j = 0; j < NK; j++)
      y_c[j] = lambda_q ^ (^(beta_q & K'(j)));

  always_ff @(posedge clk) y_o <= y_c;

endmodule
