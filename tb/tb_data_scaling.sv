// tb_data_scaling: the paper's worked example (I = 48, n = 22 gives 65536,
// i.e. 0.5) and random shots with random means and exponents, checked
// bit-exactly against ((x + 2^n - mu) << 17) >> (n + 1) and for the 4-clock
// latency of the valid flag.
module tb_data_scaling;
  import qubicml_pkg::*;
  import qubicml_ref_pkg::*;
  localparam int N = 3000;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  acc_t x_i, x_q, mu_i, mu_q;
  logic [4:0] n_i, n_q;
  fx_t norm_i, norm_q;
  longint ei [N], eq [N];
  logic ev [N];
  int checks = 0, failures = 0;
  always #1 clk = ~clk;
  data_scaling dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    {x_i, x_q, mu_i, mu_q, n_i, n_q} = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < N; n++) begin
      @(negedge clk);
      if (n >= 4) begin
        checks += 3;
        if (out_valid != ev[n-4]) failures++;
        if (longint'(norm_i) != ei[n-4]) begin
          failures++;
          if (failures < 5) $display("I at %0d: got %0d exp %0d", n, norm_i, ei[n-4]);
        end
        if (longint'(norm_q) != eq[n-4]) failures++;
      end
      in_valid = 1'($urandom);
      if (n == 0) begin
        x_i = 48; mu_i = 0; n_i = 22;
        x_q = -48; mu_q = 0; n_q = 22;
      end else begin
        n_i = 5'($urandom_range(10, 26));
        n_q = 5'($urandom_range(10, 26));
        mu_i = acc_t'($signed($urandom_range(0, 2000)) - 1000);
        mu_q = acc_t'($signed($urandom_range(0, 2000)) - 1000);
        x_i = acc_t'($signed($urandom_range(0, 1 << (n_i + 1))) - (1 << n_i));
        x_q = acc_t'($signed($urandom_range(0, 1 << (n_q + 1))) - (1 << n_q));
        if (n % 50 == 0) x_i = acc_t'($urandom);   // out of the trained range
      end
      ei[n] = ref_scale(longint'(x_i), longint'(mu_i), int'(n_i));
      eq[n] = ref_scale(longint'(x_q), longint'(mu_q), int'(n_q));
      ev[n] = in_valid;
      if (n == 0) begin
        checks++;
        if (ei[0] != 65536) begin failures++; $display("paper example wrong in model"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
