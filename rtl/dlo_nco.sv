// dlo_nco: digital local oscillator (DLO) for demodulating one qubit's
// readout tone out of the shared ADC stream.
//
// A 32-bit phase accumulator advances by SPC * fword every clock, so that
// lane k of clock c carries the phase (c * SPC + k) * fword + phase0, i.e.
// fword is the phase step per ADC sample (f_dlo = fword / 2^32 * f_sample).
// The top LUT_AW bits of each lane's phase index a cosine table of
// 2^LUT_AW signed Q1.15 entries computed at elaboration; the sine is read
// from the same table a quarter turn earlier (sin x = cos(x - pi/2)).
// The paper specifies the DLO by its function, e^{-j w t} at the ADC
// sampling rate; the phase-accumulator structure, the widths and the
// table size are this design's choices.
//
// Timing: free running from reset; cos_o/sin_o are registered, so they
// show the phase the accumulator held one clock earlier. Changing fword or
// phase0 takes effect on the next clock.
module dlo_nco
  import qubicml_pkg::*;
#(
  parameter int unsigned SPC     = 4,
  parameter int unsigned PHASE_W = 32,
  parameter int unsigned LUT_AW  = 10
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic        [PHASE_W-1:0]      fword,
  input  logic        [PHASE_W-1:0]      phase0,
  output dlo_t [SPC-1:0] cos_o,
  output dlo_t [SPC-1:0] sin_o
);
  localparam int unsigned DEPTH = 1 << LUT_AW;
  typedef logic signed [DLO_W-1:0] cos_tab_t [DEPTH];

  function automatic cos_tab_t make_cos();
    cos_tab_t t;
    for (int i = 0; i < DEPTH; i++)
      t[i] = DLO_W'(int'($floor(32767.0 * $cos(2.0 * 3.14159265358979 * real'(i) / real'(DEPTH)) + 0.5)));
    return t;
  endfunction

  localparam cos_tab_t COS_TAB = make_cos();
  localparam logic [LUT_AW-1:0] QUARTER = LUT_AW'(DEPTH / 4);

  logic [PHASE_W-1:0] acc;
  logic [PHASE_W-1:0] lane_ph [SPC];
  logic [LUT_AW-1:0]  idx     [SPC];

  always_comb begin
    for (int k = 0; k < SPC; k++) begin
      lane_ph[k] = acc + PHASE_W'(k) * fword + phase0;
      idx[k]     = lane_ph[k][PHASE_W-1 -: LUT_AW];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) acc <= '0;
    else        acc <= acc + PHASE_W'(SPC) * fword;
  end

  always_ff @(posedge clk) begin
    for (int k = 0; k < SPC; k++) begin
      cos_o[k] <= COS_TAB[idx[k]];
      sin_o[k] <= COS_TAB[idx[k] - QUARTER];
    end
  end
endmodule
