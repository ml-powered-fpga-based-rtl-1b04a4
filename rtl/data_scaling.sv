// data_scaling: division-free normalization of one accumulated shot.
//
// Each component (I and Q, each with its own constants) is mean-shifted and
// scaled to [0,1) with shifts only:
//     norm = ((x + 2^n - mu) << 17) >> (n + 1)
// where mu is the training-set mean and 2^n the power of two nearest the
// largest magnitude after mean shifting, so that max - min = 2^(n+1). The
// "<< 17" moves the result into the 17 fraction bits of the Q10.17 network
// format. Example: x = 48, mu = 0, n = 22 gives 65536 (0.5). This is the
// paper's algorithm. The shift right is arithmetic, so data below the
// expected minimum yields a negative value rather than garbage, and the
// result is truncated to 27 bits (both this design's choices).
//
// Timing: 4 clock cycles (x - mu, + 2^n, << 17, >> (n+1)), as the paper
// gives for normalization; one shot per clock.
module data_scaling
  import qubicml_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  input  acc_t       x_i,
  input  acc_t       x_q,
  input  logic [4:0] n_i,
  input  logic [4:0] n_q,
  input  acc_t       mu_i,
  input  acc_t       mu_q,
  output logic       out_valid,
  output fx_t        norm_i,
  output fx_t        norm_q
);
  localparam int unsigned T_W = ACC_W + 2;        // x - mu + 2^n
  localparam int unsigned S_W = T_W + FRAC_W;     // after << 17

  logic signed [T_W-1:0] d1 [2];
  logic signed [T_W-1:0] d2 [2];
  logic signed [S_W-1:0] d3 [2];
  logic [4:0]            n1 [2], n2 [2], n3 [2];
  logic [3:0]            v;

  acc_t       xin  [2];
  acc_t       muin [2];
  logic [4:0] nin  [2];
  assign xin  = '{x_i, x_q};
  assign muin = '{mu_i, mu_q};
  assign nin  = '{n_i, n_q};

  always_ff @(posedge clk) begin
    for (int c = 0; c < 2; c++) begin
      d1[c] <= T_W'(xin[c]) - T_W'(muin[c]);
      n1[c] <= nin[c];
      d2[c] <= d1[c] + (T_W'(1) << n1[c]);
      n2[c] <= n1[c];
      d3[c] <= S_W'(d2[c]) <<< FRAC_W;
      n3[c] <= n2[c];
    end
    norm_i <= DATA_W'(d3[0] >>> ({1'b0, n3[0]} + 6'd1));
    norm_q <= DATA_W'(d3[1] >>> ({1'b0, n3[1]} + 6'd1));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v <= '0;
    else        v <= {v[2:0], in_valid};
  end
  assign out_valid = v[3];
endmodule
