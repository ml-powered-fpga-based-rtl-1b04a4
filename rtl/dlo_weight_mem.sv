// dlo_weight_mem: the weighted envelope of the DLO, one (W_I, W_Q) pair per
// ADC sample of the readout window.
//
// The paper replaces the flat (square) DLO envelope by a per-sample weight
// w_t = |trj0_t - trj1_t| / max(w), computed offline from the mean readout
// trajectories of the two states, separately for I and Q; this memory holds
// those weights. Each weight is an unsigned Q1.15 number (0x8000 = 1.0).
// The memory is organised as SPC banks so that one row, holding the weights
// of the SPC samples of one clock, is read per clock. Depth and widths are
// this design's choices (1024 rows x 4 samples covers a 2 us readout at
// 2 GS/s). SPC must be a power of two.
//
// Interface: host write of one sample's pair {W_Q, W_I} at sample index
// waddr (bank = waddr % SPC, row = waddr / SPC). Read: raddr is a row; the
// weights appear on wi_o/wq_o one clock later (block-RAM style).
module dlo_weight_mem
  import qubicml_pkg::*;
#(
  parameter int unsigned SPC   = 4,
  parameter int unsigned DEPTH = 1024
) (
  input  logic                            clk,
  input  logic                            we,
  input  logic [$clog2(DEPTH*SPC)-1:0]    waddr,
  input  logic [2*DLOW_W-1:0]             wdata,
  input  logic [$clog2(DEPTH)-1:0]        raddr,
  output envw_t [SPC-1:0] wi_o,
  output envw_t [SPC-1:0] wq_o
);
  localparam int unsigned LOG_SPC = $clog2(SPC);
  localparam int unsigned RAW     = $clog2(DEPTH);

  for (genvar k = 0; k < SPC; k++) begin : g_bank
    logic [2*DLOW_W-1:0] mem [DEPTH];
    logic                bank_we;
    assign bank_we = we && ((32'(waddr) & (SPC - 1)) == k);
    always_ff @(posedge clk) begin
      if (bank_we) mem[RAW'(waddr >> LOG_SPC)] <= wdata;
      {wq_o[k], wi_o[k]} <= mem[raddr];
    end
  end
endmodule
