// tb_state_buffer: stores random results with random gaps, reads them back
// by address (data one clock after the address), fills the buffer to check
// that extra results are not stored and `full` is set, then clears it and
// stores again from address 0.
module tb_state_buffer;
  import qubicml_pkg::*;
  localparam int DEPTH = 1024;
  logic clk = 0, rst_n = 0, clear = 0, wr_valid = 0, wr_state, full;
  logic [PROB_W-1:0] wr_prob;
  logic [9:0] rd_addr;
  logic [31:0] rd_data;
  logic [10:0] count;
  logic [31:0] model [DEPTH];
  int n_st = 0;
  int checks = 0, failures = 0;
  always #1 clk = ~clk;
  state_buffer #(.DEPTH(DEPTH)) dut (.*);

  task automatic store(int n);
    for (int i = 0; i < n; i++) begin
      @(negedge clk);
      wr_valid = 1'($urandom);
      wr_prob = PROB_W'($urandom); wr_state = wr_prob[PROB_W-1];
      if (wr_valid && n_st < DEPTH) begin model[n_st] = {14'b0, wr_state, wr_prob}; n_st++; end
    end
    @(negedge clk); wr_valid = 0;
  endtask

  task automatic readback();
    for (int a = 0; a < n_st; a++) begin
      @(negedge clk); rd_addr = 10'(a);
      @(negedge clk);
      checks++;
      if (rd_data != model[a]) begin
        failures++;
        if (failures < 8) $display("addr %0d got %h exp %h", a, rd_data, model[a]);
      end
    end
    checks += 2;
    if (count != 11'(n_st)) begin failures++; $display("count %0d exp %0d", count, n_st); end
    if (full != (n_st == DEPTH)) failures++;
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    wr_prob = '0; wr_state = 0; rd_addr = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    store(300);  readback();
    store(3000); readback();               // overfills
    @(negedge clk); clear = 1;
    @(negedge clk); clear = 0;
    n_st = 0;
    checks++;
    if (count != 0 || full) failures++;
    store(200); readback();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
