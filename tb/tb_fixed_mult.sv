// tb_fixed_mult: random Q10.17 x Q6.12 products, including the extremes of
// both operands, checked bit-exactly against the reference model exactly
// two clocks after the operands are applied.
module tb_fixed_mult;
  import qubicml_pkg::*;
  import qubicml_ref_pkg::*;
  localparam int N = 3000;
  logic clk = 0;
  fx_t a, p;
  wt_t b;
  longint expv [N];
  int checks = 0, failures = 0;
  always #1 clk = ~clk;
  fixed_mult dut (.clk, .a, .b, .p);

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    a = '0; b = '0;
    for (int n = 0; n < N; n++) begin
      @(negedge clk);
      if (n >= 2) begin
        checks++;
        if (longint'(p) != expv[n-2]) begin
          failures++;
          if (failures < 5) $display("mult mismatch at %0d: got %0d exp %0d", n, p, expv[n-2]);
        end
      end
      case (n % 5)
        0: begin a = fx_t'(-(64'sd1 <<< 26)); b = wt_t'($urandom); end
        1: begin a = fx_t'($urandom); b = wt_t'(-(1 <<< 17)); end
        2: begin a = fx_t'($urandom_range(0, 262143)); b = wt_t'($urandom_range(0, 16383) - 8192); end
        default: begin a = fx_t'($urandom); b = wt_t'($urandom); end
      endcase
      expv[n] = ref_mult(longint'(a), longint'(b));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
