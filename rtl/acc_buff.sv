// acc_buff: first-in first-out buffer of accumulated shots between the
// accumulator and the inference pipeline.
//
// The paper names this buffer (ACC_buff, holding I0+jQ0 ... In+jQn) but not
// its organisation; here it is a FIFO of DEPTH entries of W bits ({Q, I}).
// It lets shots wait while a qubit's model parameters are being reloaded.
// A push into a full buffer is dropped and sets the sticky overflow flag,
// which only reset clears. pop_data shows the oldest entry whenever empty is
// low (show-ahead); pop removes it. Push and pop may happen on the same clock.
// DEPTH must be a power of two.
module acc_buff #(
  parameter int unsigned DEPTH = 16,
  parameter int unsigned W     = 64
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         push,
  input  logic [W-1:0] push_data,
  input  logic         pop,
  output logic [W-1:0] pop_data,
  output logic         empty,
  output logic         full,
  output logic         overflow
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [W-1:0] mem [DEPTH];
  logic [AW:0]  wr_ptr, rd_ptr;
  logic         do_push, do_pop;

  assign empty    = (wr_ptr == rd_ptr);
  assign full     = (wr_ptr[AW] != rd_ptr[AW]) && (wr_ptr[AW-1:0] == rd_ptr[AW-1:0]);
  assign do_pop   = pop && !empty;
  assign do_push  = push && !full;
  assign pop_data = mem[rd_ptr[AW-1:0]];

  always_ff @(posedge clk) begin
    if (do_push) mem[wr_ptr[AW-1:0]] <= push_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0; rd_ptr <= '0; overflow <= 1'b0;
    end else begin
      if (do_push) wr_ptr <= wr_ptr + 1'b1;
      if (do_pop)  rd_ptr <= rd_ptr + 1'b1;
      if (push && full) overflow <= 1'b1;
    end
  end

  a_no_pop_empty: assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty));
endmodule
