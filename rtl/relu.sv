// relu: registered rectified-linear activation over a vector of N Q10.17
// values. A node whose value is negative (sign bit set) outputs 0, otherwise
// its value passes unchanged. One clock cycle of latency, as in the paper;
// valid travels with the data.
module relu
  import qubicml_pkg::*;
#(
  parameter int unsigned N = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  fx_t  [N-1:0]     x,
  output logic             out_valid,
  output fx_t  [N-1:0]     y
);
  always_ff @(posedge clk) begin
    for (int i = 0; i < N; i++)
      y[i] <= x[i][DATA_W-1] ? '0 : x[i];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end
endmodule
