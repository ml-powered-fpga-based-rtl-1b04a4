// dense_layer: one fully connected layer of the qubit-state network.
//
// Every node multiplies all N_IN inputs by its own weights in parallel
// (N_IN x N_OUT fixed_mult instances, 2 cycles), then reduces the products in
// a registered binary adder tree: each level adds pairs, and the last level
// adds the node's bias as a third operand, so no adder ever has more than
// three operands in one cycle (the paper's rule). With N_IN = 2 the tree is a
// single 3-operand sum (layer 1), with N_IN = 8 it is 4 + 2 + 1 sums
// (layer 2), with N_IN = 4 it is 2 + 1 sums (layer 3), as drawn in the paper.
//
// Timing: 2 + log2(N_IN) cycles of arithmetic. The paper states 3, 6 and 5
// cycles for layers 1, 2 and 3, one more than the arithmetic needs in layers
// 2 and 3; the reason is not given, so this design pads the difference with
// output registers up to LATENCY. A new input vector is accepted every clock.
// Sums wrap at 27 bits (no saturation). N_IN must be a power of two.
module dense_layer
  import qubicml_pkg::*;
#(
  parameter int unsigned N_IN    = 2,
  parameter int unsigned N_OUT   = 8,
  parameter int unsigned LATENCY = 3
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  input  fx_t  [N_IN-1:0]            x,
  input  wt_t  [N_OUT-1:0][N_IN-1:0] w,
  input  fx_t  [N_OUT-1:0]           b,
  output logic                       out_valid,
  output fx_t  [N_OUT-1:0]           y
);
  localparam int unsigned LEVELS = $clog2(N_IN);
  localparam int unsigned PAD    = LATENCY - 2 - LEVELS;

  initial begin
    assert (N_IN >= 2 && (1 << LEVELS) == N_IN)
      else $fatal(1, "dense_layer: N_IN must be a power of two >= 2");
    assert (LATENCY >= 2 + LEVELS)
      else $fatal(1, "dense_layer: LATENCY below arithmetic depth");
  end

  // tree[node][level][index]; level 0 holds the products.
  fx_t tree [N_OUT][LEVELS+1][N_IN];

  for (genvar o = 0; o < N_OUT; o++) begin : g_node
    for (genvar i = 0; i < N_IN; i++) begin : g_mul
      fixed_mult u_mul (.clk(clk), .a(x[i]), .b(w[o][i]), .p(tree[o][0][i]));
    end
    for (genvar l = 1; l <= LEVELS; l++) begin : g_lvl
      for (genvar i = 0; i < (N_IN >> l); i++) begin : g_add
        if (l == LEVELS) begin : g_bias
          always_ff @(posedge clk)
            tree[o][l][i] <= tree[o][l-1][2*i] + tree[o][l-1][2*i+1] + b[o];
        end else begin : g_pair
          always_ff @(posedge clk)
            tree[o][l][i] <= tree[o][l-1][2*i] + tree[o][l-1][2*i+1];
        end
      end
    end
  end

  // Output padding registers (PAD stages, possibly none).
  fx_t [N_OUT-1:0] sums;
  for (genvar o = 0; o < N_OUT; o++) begin : g_sum
    assign sums[o] = tree[o][LEVELS][0];
  end

  if (PAD == 0) begin : g_nopad
    assign y = sums;
  end else begin : g_pad
    fx_t [N_OUT-1:0] pad_q [PAD];
    always_ff @(posedge clk) begin
      pad_q[0] <= sums;
      for (int s = 1; s < PAD; s++) pad_q[s] <= pad_q[s-1];
    end
    assign y = pad_q[PAD-1];
  end

  // Valid follows the data through LATENCY stages.
  logic [LATENCY-1:0] vpipe;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vpipe <= '0;
    else        vpipe <= {vpipe[LATENCY-2:0], in_valid};
  end
  assign out_valid = vpipe[LATENCY-1];
endmodule
