// qubicml_top: real-time, in-FPGA qubit state discrimination for NUM_QUBITS
// frequency-multiplexed qubits.
//
// All qubits' readout tones arrive on one ADC stream (SPC samples per
// clock). Each qubit has its own readout_channel: its own weighted digital
// local oscillator, accumulator, shot buffer, parameter memory, 2-8-4-1
// neural network with sigmoid output, and result memory. The per-qubit
// decisions (state_valid/state/prob) leave the design for the sequencer,
// which uses them for mid-circuit feed-forward; the accumulated shots
// (acc_*) leave it for the host, which uses them to train the networks.
// Eight channels is the paper's configuration; everything about the host bus
// is this design's choice: cfg_qubit selects the channel a configuration
// write goes to, and rd_qubit/rd_addr read a channel's result memory, the
// data arriving two clocks later on rd_data.
//
// Timing: one clock domain (the paper's 2 ns clock). A decision is ready 27
// clocks after a shot enters the network.
module qubicml_top
  import qubicml_pkg::*;
#(
  parameter int unsigned NUM_QUBITS = 8,
  parameter int unsigned SPC        = 4,
  parameter int unsigned WROWS      = 1024,
  parameter int unsigned BUF_D      = 16,
  parameter int unsigned RES_D      = 1024
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  adc_t [SPC-1:0] adc,
  input  logic [NUM_QUBITS-1:0]             rdo_start,
  input  logic [NUM_QUBITS-1:0][$clog2(WROWS):0] rdo_len,
  input  logic                              cfg_we,
  input  logic [$clog2(NUM_QUBITS)-1:0]     cfg_qubit,
  input  logic [15:0]                       cfg_addr,
  input  logic [31:0]                       cfg_wdata,
  input  logic [$clog2(NUM_QUBITS)-1:0]     rd_qubit,
  input  logic [$clog2(RES_D)-1:0]          rd_addr,
  output logic [31:0]                       rd_data,
  output logic [NUM_QUBITS-1:0][$clog2(RES_D):0] res_count,
  output logic [NUM_QUBITS-1:0]             res_full,
  output logic [NUM_QUBITS-1:0]             acc_valid,
  output acc_t [NUM_QUBITS-1:0]             acc_i,
  output acc_t [NUM_QUBITS-1:0]             acc_q,
  output logic [NUM_QUBITS-1:0]             state_valid,
  output logic [NUM_QUBITS-1:0]             state,
  output logic [NUM_QUBITS-1:0][PROB_W-1:0] prob,
  output logic [NUM_QUBITS-1:0]             params_ready,
  output logic [NUM_QUBITS-1:0]             buf_overflow
);
  logic [31:0] ch_rd [NUM_QUBITS];
  logic [$clog2(NUM_QUBITS)-1:0] rd_qubit_q;

  for (genvar q = 0; q < NUM_QUBITS; q++) begin : g_ch
    readout_channel #(.SPC(SPC), .WROWS(WROWS), .BUF_D(BUF_D), .RES_D(RES_D)) u_ch (
      .clk, .rst_n, .adc,
      .rdo_start(rdo_start[q]), .rdo_len(rdo_len[q]),
      .cfg_we(cfg_we && cfg_qubit == q), .cfg_addr, .cfg_wdata,
      .rd_addr, .rd_data(ch_rd[q]), .res_count(res_count[q]), .res_full(res_full[q]),
      .acc_valid(acc_valid[q]), .acc_i(acc_i[q]), .acc_q(acc_q[q]),
      .state_valid(state_valid[q]), .state(state[q]), .prob(prob[q]),
      .params_ready(params_ready[q]), .buf_overflow(buf_overflow[q])
    );
  end

  always_ff @(posedge clk) begin
    rd_qubit_q <= rd_qubit;
    rd_data    <= ch_rd[rd_qubit_q];
  end
endmodule
