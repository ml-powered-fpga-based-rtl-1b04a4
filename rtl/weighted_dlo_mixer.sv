// weighted_dlo_mixer: mixes the real ADC samples with the weighted DLO and
// sums the lanes of one clock.
//
// For each of the SPC samples of a clock, the weighted DLO is formed first,
//     dlo_i = W_I * cos,  dlo_q = -W_Q * sin,
// and then multiplied by the ADC sample, giving I_t = W_I a_t cos and
// Q_t = -W_Q a_t sin, i.e. the sample mixed with e^{-j w t} and weighted per
// component. The SPC products are added so that downstream sees one I and one
// Q value per clock. The weighting of the carrier before mixing follows the
// paper; applying W_I to I and W_Q to Q separately (rather than a complex
// product) follows the published weight rule W_I = |Tr_I0 - Tr_I1|,
// W_Q = |Tr_Q0 - Tr_Q1| (real, non-negative, one per component; Tr0/Tr1 are
// the mean |0>/|1> trajectories), and the Q1.15 scaling
// (truncating >>> 15 after each product) is this design's choice.
//
// Timing: 3 clock cycles from in_* to out_*; one row of samples per clock.
// The first/last tags travel with the data to mark readout windows.
module weighted_dlo_mixer
  import qubicml_pkg::*;
#(
  parameter int unsigned SPC = 4
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               in_valid,
  input  logic                               in_first,
  input  logic                               in_last,
  input  adc_t [SPC-1:0] adc,
  input  dlo_t [SPC-1:0] cos_i,
  input  dlo_t [SPC-1:0] sin_i,
  input  envw_t [SPC-1:0] wi,
  input  envw_t [SPC-1:0] wq,
  output logic                               out_valid,
  output logic                               out_first,
  output logic                               out_last,
  output acc_t                               mix_i,
  output acc_t                               mix_q
);
  localparam int unsigned P1_W = DLO_W + DLOW_W + 1;   // weight x carrier
  localparam int unsigned D_W  = P1_W - 15;            // weighted DLO
  localparam int unsigned P2_W = ADC_W + D_W;          // sample x weighted DLO
  localparam int unsigned M_W  = P2_W - 15;

  logic signed [D_W-1:0]   dlo_i  [SPC];
  logic signed [D_W-1:0]   dlo_q  [SPC];
  logic signed [ADC_W-1:0] adc_q  [SPC];
  logic signed [M_W-1:0]   m_i    [SPC];
  logic signed [M_W-1:0]   m_q    [SPC];
  logic signed [P1_W-1:0]  p1_i   [SPC];
  logic signed [P1_W-1:0]  p1_q   [SPC];
  logic signed [P2_W-1:0]  p2_i   [SPC];
  logic signed [P2_W-1:0]  p2_q   [SPC];
  acc_t                    sum_i, sum_q;

  always_comb begin
    for (int k = 0; k < SPC; k++) begin
      p1_i[k] = $signed({1'b0, wi[k]}) * cos_i[k];
      p1_q[k] = -($signed({1'b0, wq[k]}) * sin_i[k]);
      p2_i[k] = adc_q[k] * dlo_i[k];
      p2_q[k] = adc_q[k] * dlo_q[k];
    end
    sum_i = '0;
    sum_q = '0;
    for (int k = 0; k < SPC; k++) begin
      sum_i = sum_i + ACC_W'(m_i[k]);
      sum_q = sum_q + ACC_W'(m_q[k]);
    end
  end

  always_ff @(posedge clk) begin
    for (int k = 0; k < SPC; k++) begin
      // stage 1: weighted DLO
      dlo_i[k] <= D_W'(p1_i[k] >>> 15);
      dlo_q[k] <= D_W'(p1_q[k] >>> 15);
      adc_q[k] <= adc[k];
      // stage 2: mix
      m_i[k]   <= M_W'(p2_i[k] >>> 15);
      m_q[k]   <= M_W'(p2_q[k] >>> 15);
    end
    // stage 3: lane sum
    mix_i <= sum_i;
    mix_q <= sum_q;
  end

  logic [2:0] v, f, l;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v <= '0; f <= '0; l <= '0;
    end else begin
      v <= {v[1:0], in_valid};
      f <= {f[1:0], in_valid & in_first};
      l <= {l[1:0], in_valid & in_last};
    end
  end
  assign out_valid = v[2];
  assign out_first = f[2];
  assign out_last  = l[2];
endmodule
