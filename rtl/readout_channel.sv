// readout_channel: everything one qubit needs between the shared ADC stream
// and its state decision.
//
//   ADC --> weighted_dlo_mixer --> accumulator --> acc_buff --> fnn_pipeline --> state
//            ^        ^                 |                          ^              |
//         dlo_nco  dlo_weight_mem       +--> acc stream to host   param_mem   state_buffer
//
// A readout window is requested by the sequencer with rdo_start and its
// length rdo_len in clocks (SPC samples per clock, at most WROWS clocks).
// During the window the channel reads its envelope weights row by row,
// mixes the ADC samples with its own weighted DLO (each qubit has its own
// DLO frequency, which separates the frequency-multiplexed tones), and sums
// them. The finished shot goes to the host stream (acc_*, the data used for
// training) and into acc_buff, from which the inference pipeline takes one
// shot per clock whenever the model parameters are loaded. The decision is
// driven out on state_valid/state/prob for feed-forward and stored in the
// state buffer.
//
// Host registers (cfg_addr[15:14]): 0 = control (word 0 DLO frequency word,
// word 1 DLO phase offset, word 2 command: bit 0 loads the model from the
// parameter memory, bit 1 clears the state buffer); 1 = parameter memory
// word cfg_addr[6:0]; 2 and 3 = envelope weight of sample cfg_addr[11:0] as
// {W_Q, W_I}. This map and the window interface are this design's choices.
//
// Timing: the window occupies the rdo_len clocks after rdo_start; the shot
// leaves the accumulator 5 clocks after the window's last clock, and the
// decision follows 27 clocks after the shot leaves acc_buff (one clock
// after it enters, if the buffer was empty and the model loaded).
module readout_channel
  import qubicml_pkg::*;
#(
  parameter int unsigned SPC      = 4,
  parameter int unsigned WROWS    = 1024,
  parameter int unsigned BUF_D    = 16,
  parameter int unsigned RES_D    = 1024
) (
  input  logic                             clk,
  input  logic                             rst_n,
  // ADC stream (shared by all channels)
  input  adc_t [SPC-1:0] adc,
  // readout window from the sequencer
  input  logic                             rdo_start,
  input  logic        [$clog2(WROWS):0]    rdo_len,
  // host configuration
  input  logic                             cfg_we,
  input  logic        [15:0]               cfg_addr,
  input  logic        [31:0]               cfg_wdata,
  // host read of the state buffer
  input  logic        [$clog2(RES_D)-1:0]  rd_addr,
  output logic        [31:0]               rd_data,
  output logic        [$clog2(RES_D):0]    res_count,
  output logic                             res_full,
  // accumulated shots to the host
  output logic                             acc_valid,
  output acc_t                             acc_i,
  output acc_t                             acc_q,
  // decision
  output logic                             state_valid,
  output logic                             state,
  output logic        [PROB_W-1:0]         prob,
  // status
  output logic                             params_ready,
  output logic                             buf_overflow
);
  localparam int unsigned RW = $clog2(WROWS);

  // ---------------- host registers
  logic [31:0] fword, phase0;
  logic        cmd_load, cmd_clear;
  logic        wr_ctrl, wr_param, wr_wmem;

  assign wr_ctrl  = cfg_we && (cfg_addr[15:14] == REG_CTRL);
  assign wr_param = cfg_we && (cfg_addr[15:14] == REG_PARAM);
  assign wr_wmem  = cfg_we && cfg_addr[15];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fword <= '0; phase0 <= '0; cmd_load <= 1'b0; cmd_clear <= 1'b0;
    end else begin
      cmd_load  <= 1'b0;
      cmd_clear <= 1'b0;
      if (wr_ctrl) begin
        case (cfg_addr[3:0])
          CTRL_FWORD: fword  <= cfg_wdata;
          CTRL_PHASE: phase0 <= cfg_wdata;
          CTRL_CMD: begin
            cmd_load  <= cfg_wdata[0];
            cmd_clear <= cfg_wdata[1];
          end
          default: ;
        endcase
      end
    end
  end

  // ---------------- readout window
  logic          win_active, win_first, win_last;
  logic [RW-1:0] win_row;
  logic [RW:0]   win_left;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      win_active <= 1'b0; win_row <= '0; win_left <= '0;
    end else if (rdo_start && rdo_len != 0) begin
      win_active <= 1'b1;
      win_row    <= '0;
      win_left   <= (rdo_len > (RW+1)'(WROWS)) ? (RW+1)'(WROWS - 1) : rdo_len - 1'b1;
    end else if (win_active) begin
      if (win_left == 0) win_active <= 1'b0;
      else begin
        win_row  <= win_row + 1'b1;
        win_left <= win_left - 1'b1;
      end
    end
  end
  assign win_first = (win_row == 0);
  assign win_last  = (win_left == 0);

  // samples and tags wait one clock for the weight memory and the NCO
  adc_t [SPC-1:0] adc_q;
  logic                             mx_v, mx_f, mx_l;
  always_ff @(posedge clk) adc_q <= adc;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) {mx_v, mx_f, mx_l} <= '0;
    else        {mx_v, mx_f, mx_l} <= {win_active, win_first, win_last};
  end

  // ---------------- DLO, envelope, mixer, accumulator
  dlo_t [SPC-1:0] cos_w, sin_w;
  envw_t [SPC-1:0] wi_w, wq_w;

  dlo_nco #(.SPC(SPC)) u_nco (.clk, .rst_n, .fword, .phase0, .cos_o(cos_w), .sin_o(sin_w));

  dlo_weight_mem #(.SPC(SPC), .DEPTH(WROWS)) u_wmem (
    .clk, .we(wr_wmem), .waddr(cfg_addr[$clog2(WROWS*SPC)-1:0]), .wdata(cfg_wdata),
    .raddr(win_row), .wi_o(wi_w), .wq_o(wq_w)
  );

  logic mo_v, mo_f, mo_l;
  acc_t mo_i, mo_q;
  weighted_dlo_mixer #(.SPC(SPC)) u_mix (
    .clk, .rst_n, .in_valid(mx_v), .in_first(mx_f), .in_last(mx_l),
    .adc(adc_q), .cos_i(cos_w), .sin_i(sin_w), .wi(wi_w), .wq(wq_w),
    .out_valid(mo_v), .out_first(mo_f), .out_last(mo_l), .mix_i(mo_i), .mix_q(mo_q)
  );

  accumulator u_acc (
    .clk, .rst_n, .in_valid(mo_v), .in_first(mo_f), .in_last(mo_l),
    .in_i(mo_i), .in_q(mo_q), .out_valid(acc_valid), .acc_i, .acc_q
  );

  // ---------------- buffer and inference
  logic              buf_empty, buf_full, nn_go;
  logic [2*ACC_W-1:0] buf_data;
  fnn_params_t       params;

  acc_buff #(.DEPTH(BUF_D), .W(2*ACC_W)) u_buf (
    .clk, .rst_n, .push(acc_valid), .push_data({acc_q, acc_i}),
    .pop(nn_go), .pop_data(buf_data), .empty(buf_empty), .full(buf_full),
    .overflow(buf_overflow)
  );

  assign nn_go = !buf_empty && params_ready;

  param_mem u_pmem (
    .clk, .rst_n, .we(wr_param), .waddr(cfg_addr[6:0]), .wdata(cfg_wdata),
    .load(cmd_load), .params, .ready(params_ready)
  );

  fnn_pipeline u_fnn (
    .clk, .rst_n, .in_valid(nn_go),
    .acc_i(acc_t'(buf_data[ACC_W-1:0])), .acc_q(acc_t'(buf_data[2*ACC_W-1:ACC_W])),
    .params, .out_valid(state_valid), .prob, .state
  );

  state_buffer #(.DEPTH(RES_D)) u_res (
    .clk, .rst_n, .clear(cmd_clear), .wr_valid(state_valid), .wr_state(state),
    .wr_prob(prob), .rd_addr, .rd_data, .count(res_count), .full(res_full)
  );
endmodule
