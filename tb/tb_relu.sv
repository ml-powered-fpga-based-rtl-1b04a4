// tb_relu: random vectors through the ReLU; every lane must be max(x, 0)
// one clock later, and valid must follow in_valid by one clock.
module tb_relu;
  import qubicml_pkg::*;
  localparam int N = 8;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  fx_t [N-1:0] x, y, expv [2000];
  logic vexp [2000];
  int checks = 0, failures = 0;
  always #1 clk = ~clk;
  relu #(.N(N)) dut (.clk, .rst_n, .in_valid, .x, .out_valid, .y);

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    x = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      if (n >= 1) begin
        checks++;
        if (out_valid != vexp[n-1]) failures++;
        for (int i = 0; i < N; i++) begin
          checks++;
          if (y[i] != expv[n-1][i]) begin
            failures++;
            if (failures < 5) $display("relu lane %0d got %0d exp %0d", i, y[i], expv[n-1][i]);
          end
        end
      end
      in_valid = 1'($urandom);
      for (int i = 0; i < N; i++) begin
        x[i] = (n % 7 == 0) ? fx_t'(0) : fx_t'($urandom);
        expv[n][i] = (longint'(x[i]) < 0) ? fx_t'(0) : x[i];
      end
      vexp[n] = in_valid;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
