// state_buffer: memory of the discrimination results of an experiment.
//
// Every valid result is stored at the next address as one 32-bit word
// {14'b0, state, prob}; `count` tells the host how many are stored. When the
// memory is full further results are not stored (`full` stays high) until
// `clear` resets the write address. The host reads any stored word by
// address; rd_data follows rd_addr by one clock (block-RAM read). The paper
// says only that results are kept in a memory buffer; depth, word format and
// the full policy are this design's choices.
module state_buffer
  import qubicml_pkg::*;
#(
  parameter int unsigned DEPTH = 1024
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clear,
  input  logic                     wr_valid,
  input  logic                     wr_state,
  input  logic [PROB_W-1:0]        wr_prob,
  input  logic [$clog2(DEPTH)-1:0] rd_addr,
  output logic [31:0]              rd_data,
  output logic [$clog2(DEPTH):0]   count,
  output logic                     full
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [31:0] mem [DEPTH];

  assign full = (count == (AW+1)'(DEPTH));

  always_ff @(posedge clk) begin
    if (wr_valid && !full) mem[count[AW-1:0]] <= {{(31-PROB_W){1'b0}}, wr_state, wr_prob};
    rd_data <= mem[rd_addr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                 count <= '0;
    else if (clear)             count <= '0;
    else if (wr_valid && !full) count <= count + 1'b1;
  end
endmodule
