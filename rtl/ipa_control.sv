// ipa_control -- Control unit of one IPA iteration.
//
// Two state machines run at the same time, because the projection and the
// pre-aggregation of one PU work on different vectors and different
// projection numbers whenever codewords follow each other closely:
//   Projection control   on valid_in (ValidIn) it starts counting the n/P
//                        groups of the new vector, one per cycle, from the
//                        next cycle on: proj_en (En) and proj_sel (Sel_proj).
//                        wen (WEn) stores the vector in the register array.
//   Aggregation control  counts the groups leaving the first-order decoders
//                        (fod_valid, ValidFOD): agg_en/agg_sel (Sel_Agg).
//                        On the last group it pulses ren (REn) to release the
//                        vector from the register array.
//   EnGen                pu_valid delayed by p = log2(P) cycles enables the
//                        first divider shift register; m-p cascaded counters
//                        produce the other enables and div_valid.
// A vector may follow the previous one after n/P cycles or more; an
// assertion checks this. With P = n (fully parallel) there are no shift
// registers and div_valid is pu_valid delayed by m cycles.
module ipa_control #(
  parameter int unsigned M = ipa_pkg::M_DEFAULT,
  parameter int unsigned P = ipa_pkg::P_DEFAULT,
  localparam int unsigned N   = 1 << M,
  localparam int unsigned G   = N / P,
  localparam int unsigned SW  = (G > 1) ? $clog2(G) : 1,
  localparam int unsigned PL  = $clog2(P),
  localparam int unsigned SL  = M - PL,
  localparam int unsigned SLW = (SL > 0) ? SL : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           valid_in,
  output logic           wen,
  output logic           proj_en,
  output logic [SW-1:0]  proj_sel,
  input  logic           fod_valid,
  output logic           agg_en,
  output logic [SW-1:0]  agg_sel,
  output logic           ren,
  input  logic           pu_valid,
  output logic [SLW-1:0] sr_en,
  output logic           div_valid
);

  localparam logic [SW-1:0] LAST = SW'(G - 1);

  // ---------------------------------------------------- projection control
  typedef enum logic {P_IDLE, P_RUN} pstate_e;
  pstate_e       pstate;
  logic [SW-1:0] pcnt;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      pstate <= P_IDLE;
      pcnt   <= '0;
    end else if (valid_in) begin
      pstate <= P_RUN;
      pcnt   <= '0;
    end else if (pstate == P_RUN) begin
      if (pcnt == LAST) pstate <= P_IDLE;
      else              pcnt   <= pcnt + 1'b1;
    end
  end

  assign wen      = valid_in;
  assign proj_en  = (pstate == P_RUN);
  assign proj_sel = pcnt;

  a_spacing: assert property (@(posedge clk) disable iff (!rst_n)
                              valid_in |-> (pstate == P_IDLE || pcnt == LAST));

  // --------------------------------------------------- aggregation control
  logic [SW-1:0] acnt;
  always_ff @(posedge clk) begin
    if (!rst_n)         acnt <= '0;
    else if (fod_valid) acnt <= (acnt == LAST) ? '0 : acnt + 1'b1;
  end

  assign agg_en  = fod_valid;
  assign agg_sel = acnt;
  assign ren     = fod_valid && (acnt == LAST);

  // ------------------------------------------------------------- EnGen
  // pu_valid delayed by p cycles.
  logic [PL:0] vdly;
  assign vdly[0] = pu_valid;
  for (genvar d = 0; d < PL; d++) begin : g_dly
    always_ff @(posedge clk)
      if (!rst_n) vdly[d+1] <= 1'b0;
      else        vdly[d+1] <= vdly[d];
  end

  if (SL > 0) begin : g_engen
    ipa_engen #(.SL(SL)) u_engen (
      .clk, .rst_n, .en0(vdly[PL]), .en(sr_en), .done(div_valid)
    );
  end else begin : g_no_engen
    assign sr_en     = '0;
    assign div_valid = vdly[PL];
  end

endmodule
