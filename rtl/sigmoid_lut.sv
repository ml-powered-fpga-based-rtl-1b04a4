// sigmoid_lut: output activation of the network by table lookup.
//
// The layer-3 output x (Q10.17) is first quantized to a 12-bit table address
// by comparisons: values below -8 map to address 0x000, values at or above
// +8 map to 0xFFF, and values in between map to floor((x + 8) * 256), i.e.
// steps of 1/256. Entry k holds sigmoid(-8 + (k + 0.5)/256) as an unsigned
// Q0.17 probability that the qubit is in |1>. The state bit is set when the
// probability is at least 0.5, which for this table is exactly x >= 0.
// The 4096-entry table (addresses 000..FFF) and the 2 + 1 cycle split follow
// the paper; the input range, the step, the probability width and the 0.5
// threshold are this design's choices. The table is computed at elaboration
// from 1/(1+exp(-x)), so no data file is needed.
//
// Timing: cycle 1 compares against the range limits, cycle 2 forms the
// address (2 cycles of address calculation), cycle 3 reads the table.
// Latency 3, one input per clock.
module sigmoid_lut
  import qubicml_pkg::*;
#(
  parameter int unsigned ADDR_W = 12
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  fx_t               x,
  output logic              out_valid,
  output logic [PROB_W-1:0] prob,
  output logic              state
);
  localparam int unsigned DEPTH = 1 << ADDR_W;
  localparam int unsigned STEP_SH = FRAC_W - (ADDR_W - 4);   // 1/256 step for ADDR_W = 12
  localparam fx_t X_MIN = -(fx_t'(8) <<< FRAC_W);
  localparam fx_t X_MAX =  (fx_t'(8) <<< FRAC_W);

  typedef logic [PROB_W-1:0] tab_t [DEPTH];

  function automatic tab_t make_table();
    tab_t t;
    for (int k = 0; k < DEPTH; k++) begin
      real xr;
      xr = -8.0 + (real'(k) + 0.5) * 16.0 / real'(DEPTH);
      t[k] = PROB_W'(int'($floor(real'(1 << PROB_W) / (1.0 + $exp(-xr)))));
    end
    return t;
  endfunction

  localparam tab_t TABLE = make_table();

  logic              lo_q, hi_q;
  fx_t               x_q;
  logic [ADDR_W-1:0] addr_q;
  logic [2:0]        v;

  always_ff @(posedge clk) begin
    // address calculation, stage 1: range comparisons
    lo_q <= (x < X_MIN);
    hi_q <= (x >= X_MAX);
    x_q  <= x - X_MIN;
    // address calculation, stage 2: quantize
    if (lo_q)      addr_q <= '0;
    else if (hi_q) addr_q <= '1;
    else           addr_q <= x_q[STEP_SH +: ADDR_W];
    // table read
    prob  <= TABLE[addr_q];
    state <= addr_q[ADDR_W-1];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v <= '0;
    else        v <= {v[1:0], in_valid};
  end
  assign out_valid = v[2];
endmodule
