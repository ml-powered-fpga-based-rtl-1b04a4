// tb_sigmoid_lut: sweeps the layer-3 output over and beyond the table's
// input range. Checks, 3 clocks after each input: the state bit equals
// (x >= 0); the probability equals the table entry the reference address
// selects; and the probability is within 0.003 of the exact sigmoid of x
// inside [-8, 8). Also checks the point printed in the paper's overview
// figure, probability 0.0154 -> state 0.
module tb_sigmoid_lut;
  import qubicml_pkg::*;
  import qubicml_ref_pkg::*;
  localparam int N = 5000;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid, state;
  fx_t x;
  logic [PROB_W-1:0] prob;
  longint xs [N];
  logic   vs [N];
  int checks = 0, failures = 0;
  always #1 clk = ~clk;
  sigmoid_lut dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    x = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < N; n++) begin
      @(negedge clk);
      if (n >= 3) begin
        longint xv; real ex, got;
        xv = xs[n-3];
        checks += 3;
        if (out_valid != vs[n-3]) failures++;
        if (state != (xv >= 0)) begin
          failures++;
          if (failures < 8) $display("state x=%0d got %0b", xv, state);
        end
        if (int'(prob) != ref_sig_entry(ref_sig_addr(xv))) begin
          failures++;
          if (failures < 8) $display("prob x=%0d got %0d exp %0d", xv, prob, ref_sig_entry(ref_sig_addr(xv)));
        end
        if (xv >= -(64'sd8 <<< 17) && xv < (64'sd8 <<< 17)) begin
          ex  = 1.0 / (1.0 + $exp(-real'(xv) / 131072.0));
          got = real'(prob) / 131072.0;
          checks++;
          if (got - ex > 0.003 || ex - got > 0.003) begin
            failures++;
            if (failures < 8) $display("accuracy x=%f got %f exp %f", real'(xv)/131072.0, got, ex);
          end
        end
      end
      in_valid = 1'($urandom);
      case (n % 4)
        0: x = fx_t'(-(64'sd12 <<< 17) + longint'(n) * 800);      // sweep -12 .. +18
        1: x = fx_t'($urandom);                                     // full range
        2: x = fx_t'($signed($urandom_range(0, 4096)) - 2048);      // around 0
        default: x = fx_t'(int'(-4.157 * 131072.0));                // p ~ 0.0154
      endcase
      xs[n] = longint'(x);
      vs[n] = in_valid;
      if (n % 4 == 3) begin
        checks++;
        if (ref_sig_entry(ref_sig_addr(xs[n])) < int'(0.0150 * 131072.0) ||
            ref_sig_entry(ref_sig_addr(xs[n])) > int'(0.0158 * 131072.0)) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
