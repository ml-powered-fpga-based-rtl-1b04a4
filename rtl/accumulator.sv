// accumulator: integrates the demodulated I/Q over one readout window.
//
// The window is marked by in_first on its first valid clock and in_last on
// its last (both on the same clock for a one-clock window). On in_first the
// running sums restart from the incoming value; on in_last the completed
// sums are presented as one shot, ADC_acc = I + jQ, with out_valid high for
// one clock. The sums are 32-bit signed, the range the paper gives for
// accumulated data, and wrap on overflow (this design's choice).
//
// Timing: the shot appears one clock after the in_last sample.
module accumulator
  import qubicml_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  logic in_first,
  input  logic in_last,
  input  acc_t in_i,
  input  acc_t in_q,
  output logic out_valid,
  output acc_t acc_i,
  output acc_t acc_q
);
  acc_t run_i, run_q, nxt_i, nxt_q;

  always_comb begin
    nxt_i = (in_first ? '0 : run_i) + in_i;
    nxt_q = (in_first ? '0 : run_q) + in_q;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run_i <= '0; run_q <= '0; out_valid <= 1'b0; acc_i <= '0; acc_q <= '0;
    end else begin
      out_valid <= in_valid && in_last;
      if (in_valid) begin
        run_i <= nxt_i;
        run_q <= nxt_q;
        if (in_last) begin
          acc_i <= nxt_i;
          acc_q <= nxt_q;
        end
      end
    end
  end
endmodule
