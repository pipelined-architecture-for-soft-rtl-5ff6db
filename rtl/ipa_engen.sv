// ipa_engen -- EnGen: enable generator of the tree divider's shift
// registers, part of the control unit.
//
// A chain of SL cascaded modulo-2 counters. Counter l counts the cycles in
// which its enable en[l] is high; when it sees the second one it raises its
// output for exactly one cycle (registered), and that output is the enable of
// the next counter. en[0] is the pre-aggregation valid delayed by
// p = log2(P) cycles (supplied by the caller); en[l] drives the shift
// register of divider level p+l; done is the output of the last counter,
// high in the cycle the divider's result is complete.
module ipa_engen #(
  parameter int unsigned SL = ipa_pkg::M_DEFAULT - $clog2(ipa_pkg::P_DEFAULT)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          en0,
  output logic [SL-1:0] en,
  output logic          done
);

  logic [SL-1:0] cnt;
  logic [SL:0]   chain;

  assign chain[0] = en0;
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cnt          <= '0;
      chain[SL:1]  <= '0;
    end else begin
      for (int unsigned l = 0; l < SL; l++) begin
        if (chain[l]) cnt[l] <= ~cnt[l];
        chain[l+1] <= chain[l] & cnt[l];
      end
    end
  end

  assign en   = chain[SL-1:0];
  assign done = chain[SL];

endmodule
