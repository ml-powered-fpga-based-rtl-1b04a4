// fixed_mult: one neural-network multiplier, shaped like a DSP48 slice.
//
// A 27-bit Q10.17 data operand is multiplied by an 18-bit Q6.12 weight. The
// full 45-bit product is Q16.29; as in the paper, the 10 least significant
// integer bits and the 17 most significant fraction bits are kept (product
// bits 38:12), giving a Q10.17 result. Values that do not fit wrap; the paper
// relies on the 10-bit integer range being wide enough, and so does this
// design. Rounding is truncation (this design's choice).
//
// Timing: 2 clock cycles from a/b to p (input register, product register),
// matching the paper's 2-cycle multiply. Fully pipelined.
module fixed_mult
  import qubicml_pkg::*;
(
  input  logic clk,
  input  fx_t  a,
  input  wt_t  b,
  output fx_t  p
);
  fx_t a_q;
  wt_t b_q;
  logic signed [DATA_W+WEIGHT_W-1:0] full;

  assign full = a_q * b_q;

  always_ff @(posedge clk) begin
    a_q <= a;
    b_q <= b;
    p   <= full[WFRAC_W+DATA_W-1:WFRAC_W];
  end
endmodule
