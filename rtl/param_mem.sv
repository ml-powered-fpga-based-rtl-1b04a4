// param_mem: block RAM holding one qubit's trained model, and the sequencer
// that loads it into the parameter registers of the inference pipeline.
//
// The host writes 32-bit words (one value per word, right-aligned, sign
// extended) at the addresses of qubicml_pkg: 52 weights (Q6.12), 13 biases
// (Q10.17) and the scaling constants n_I, n_Q, mu_I, mu_Q. A `load` pulse
// then copies words 0..68 into registers, one word per clock (block-RAM
// read, one clock latency), and raises `ready` when done, 71 clocks after
// `load`. The 52 multipliers need all weights at once, so the pipeline reads
// the registers, never the RAM. Keeping the model in block RAM so that it can
// be swapped per qubit is the paper's; the word map and the load sequencer
// are this design's. `ready` is low from reset and while a load runs.
module param_mem
  import qubicml_pkg::*;
#(
  parameter int unsigned DEPTH = 128
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      we,
  input  logic [$clog2(DEPTH)-1:0]  waddr,
  input  logic [31:0]               wdata,
  input  logic                      load,
  output fnn_params_t               params,
  output logic                      ready
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [31:0]   ram [DEPTH];
  logic [31:0]   rdata;
  logic [AW-1:0] raddr;
  logic          busy, rd_v;
  logic [AW-1:0] rd_idx;
  logic [31:0]   regs [PA_WORDS];

  always_ff @(posedge clk) begin
    if (we) ram[waddr] <= wdata;
    rdata <= ram[raddr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; rd_v <= 1'b0; raddr <= '0; rd_idx <= '0; ready <= 1'b0;
    end else begin
      rd_v   <= busy;
      rd_idx <= raddr;
      if (load) begin
        busy  <= 1'b1;
        raddr <= '0;
        ready <= 1'b0;
      end else if (busy) begin
        if (raddr == AW'(PA_WORDS - 1)) busy <= 1'b0;
        else                            raddr <= raddr + 1'b1;
      end else if (rd_v) begin
        ready <= 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rd_v) regs[rd_idx] <= rdata;
  end

  always_comb begin
    for (int n = 0; n < L1_N; n++) begin
      for (int i = 0; i < L0_N; i++) params.w1[n][i] = wt_t'(regs[PA_W1 + n*L0_N + i]);
      params.b1[n] = fx_t'(regs[PA_B1 + n]);
    end
    for (int n = 0; n < L2_N; n++) begin
      for (int i = 0; i < L1_N; i++) params.w2[n][i] = wt_t'(regs[PA_W2 + n*L1_N + i]);
      params.b2[n] = fx_t'(regs[PA_B2 + n]);
    end
    for (int i = 0; i < L2_N; i++) params.w3[0][i] = wt_t'(regs[PA_W3 + i]);
    params.b3[0] = fx_t'(regs[PA_B3]);
    params.n_i   = regs[PA_NI][4:0];
    params.n_q   = regs[PA_NQ][4:0];
    params.mu_i  = regs[PA_MUI];
    params.mu_q  = regs[PA_MUQ];
  end

  initial assert (DEPTH >= PA_WORDS) else $fatal(1, "param_mem: DEPTH too small");
endmodule
