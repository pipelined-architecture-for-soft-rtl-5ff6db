// ipa_reg_array -- Register array holding the input LLR vector of every
// codeword in flight in one iteration.
//
// The projection side reads a vector from the iteration's input register
// only while it is projecting it; the pre-aggregation side needs the same
// vector again several cycles later, when the input register may already
// hold the next one. Vectors are stored on wen (WEn) at the write counter and
// read at the read counter, which the aggregation control advances with ren
// (REn) when the last group of a vector has been pre-aggregated. DEPTH follows
// D = ceil(t_agg/(n/P)) + 1, which is 2 for RM(7,2) with four PUs.
//
// data_out is the combinational read of the slot at the read counter. An
// assertion flags a write that would overwrite a vector not yet released.
// Synchronous active-low reset clears both counters.
module ipa_reg_array #(
  parameter int unsigned N     = 1 << ipa_pkg::M_DEFAULT,
  parameter int unsigned W     = ipa_pkg::W_DEFAULT,
  parameter int unsigned DEPTH = ipa_pkg::regarr_depth(ipa_pkg::M_DEFAULT, ipa_pkg::P_DEFAULT),
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                wen,
  input  logic signed [W-1:0] data_in [N],
  input  logic                ren,
  output logic signed [W-1:0] data_out [N]
);

  logic signed [W-1:0] mem [DEPTH][N];
  logic [AW-1:0]       wptr, rptr;
  logic [AW:0]         count;

  function automatic logic [AW-1:0] incr(logic [AW-1:0] a);
    return (a == AW'(DEPTH - 1)) ? '0 : a + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
    end else begin
      if (wen) wptr <= incr(wptr);
      if (ren) rptr <= incr(rptr);
      count <= count + (AW+1)'(wen) - (AW+1)'(ren);
    end
    if (wen) mem[wptr] <= data_in;
  end

  assign data_out = mem[rptr];

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
                                  wen |-> (count < (AW+1)'(DEPTH) || ren));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n)
                                   ren |-> (count != '0));

endmodule
