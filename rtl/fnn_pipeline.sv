// fnn_pipeline: the per-qubit inference pipeline, from one accumulated I/Q
// shot to a state decision.
//
//   data_scaling (4) -> reg (1) -> layer 1, 2->8 (3) -> ReLU (1) -> reg (1)
//   -> layer 2, 8->4 (6) -> ReLU (1) -> reg (1) -> layer 3, 4->1 (5)
//   -> reg (1) -> sigmoid address (2) -> sigmoid table (1)          = 27 cycles
//
// The stage order, the per-stage cycle counts and the 27-cycle total (54 ns
// at a 500 MHz clock) are the paper's; the single-cycle hand-over registers
// between stages are how this design realises the paper's "1 clock cycle"
// steps between them. The pipeline takes a new shot every clock; the model
// and scaling constants come in through `params` and must stay stable while
// shots are in flight.
module fnn_pipeline
  import qubicml_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  acc_t              acc_i,
  input  acc_t              acc_q,
  input  fnn_params_t       params,
  output logic              out_valid,
  output logic [PROB_W-1:0] prob,
  output logic              state
);
  localparam int unsigned LATENCY = 27;

  // normalization
  logic s_v;
  fx_t  s_i, s_q;
  data_scaling u_scale (
    .clk, .rst_n, .in_valid,
    .x_i(acc_i), .x_q(acc_q),
    .n_i(params.n_i), .n_q(params.n_q), .mu_i(params.mu_i), .mu_q(params.mu_q),
    .out_valid(s_v), .norm_i(s_i), .norm_q(s_q)
  );

  // hand-over register
  logic             r0_v;
  fx_t [L0_N-1:0]   r0_x;
  always_ff @(posedge clk) r0_x <= {s_q, s_i};

  // layer 1 + ReLU
  logic           l1_v, a1_v;
  fx_t [L1_N-1:0] l1_y, a1_y;
  dense_layer #(.N_IN(L0_N), .N_OUT(L1_N), .LATENCY(3)) u_l1 (
    .clk, .rst_n, .in_valid(r0_v), .x(r0_x), .w(params.w1), .b(params.b1),
    .out_valid(l1_v), .y(l1_y)
  );
  relu #(.N(L1_N)) u_relu1 (.clk, .rst_n, .in_valid(l1_v), .x(l1_y), .out_valid(a1_v), .y(a1_y));

  logic           r1_v;
  fx_t [L1_N-1:0] r1_x;
  always_ff @(posedge clk) r1_x <= a1_y;

  // layer 2 + ReLU
  logic           l2_v, a2_v;
  fx_t [L2_N-1:0] l2_y, a2_y;
  dense_layer #(.N_IN(L1_N), .N_OUT(L2_N), .LATENCY(6)) u_l2 (
    .clk, .rst_n, .in_valid(r1_v), .x(r1_x), .w(params.w2), .b(params.b2),
    .out_valid(l2_v), .y(l2_y)
  );
  relu #(.N(L2_N)) u_relu2 (.clk, .rst_n, .in_valid(l2_v), .x(l2_y), .out_valid(a2_v), .y(a2_y));

  logic           r2_v;
  fx_t [L2_N-1:0] r2_x;
  always_ff @(posedge clk) r2_x <= a2_y;

  // layer 3
  logic           l3_v;
  fx_t [L3_N-1:0] l3_y;
  dense_layer #(.N_IN(L2_N), .N_OUT(L3_N), .LATENCY(5)) u_l3 (
    .clk, .rst_n, .in_valid(r2_v), .x(r2_x), .w(params.w3), .b(params.b3),
    .out_valid(l3_v), .y(l3_y)
  );

  logic r3_v;
  fx_t  r3_x;
  always_ff @(posedge clk) r3_x <= l3_y[0];

  // sigmoid
  sigmoid_lut u_sig (
    .clk, .rst_n, .in_valid(r3_v), .x(r3_x),
    .out_valid, .prob, .state
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) {r0_v, r1_v, r2_v, r3_v} <= '0;
    else begin
      r0_v <= s_v;
      r1_v <= a1_v;
      r2_v <= a2_v;
      r3_v <= l3_v;
    end
  end

  // The decision appears exactly LATENCY cycles after the shot enters.
  logic [LATENCY-1:0] lat_chk;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) lat_chk <= '0;
    else        lat_chk <= {lat_chk[LATENCY-2:0], in_valid};
  end
  a_latency: assert property (@(posedge clk) disable iff (!rst_n) out_valid == lat_chk[LATENCY-1]);
endmodule
