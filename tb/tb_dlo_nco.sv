// tb_dlo_nco: runs the oscillator at several frequency words and phase
// offsets. For every clock and lane it checks cos and sin against a model
// that tracks the expected phase of sample (c * SPC + k) and evaluates
// 32767*cos / 32767*sin of the top 10 phase bits; it also checks that
// cos^2 + sin^2 stays near full scale.
module tb_dlo_nco;
  import qubicml_pkg::*;
  localparam int SPC = 4;
  logic clk = 0, rst_n = 0;
  logic [31:0] fword, phase0;
  dlo_t [SPC-1:0] cos_o, sin_o;
  int checks = 0, failures = 0;
  always #1 clk = ~clk;
  dlo_nco #(.SPC(SPC)) dut (.*);

  function automatic int mcos(logic [31:0] ph, bit s);
    real a;
    a = 2.0 * 3.14159265358979 * real'(ph[31:22]) / 1024.0;
    if (s) return int'($floor(32767.0 * $sin(a) + 0.5));
    return int'($floor(32767.0 * $cos(a) + 0.5));
  endfunction

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    logic [31:0] acc_m, acc_prev;
    fword = 32'h0123_4567; phase0 = '0;
    repeat (2) @(negedge clk);
    acc_m = '0;
    rst_n = 1;
    for (int n = 0; n < 4000; n++) begin
      if (n % 1000 == 0) begin
        fword  = $urandom;
        phase0 = $urandom;
        if (n == 2000) fword = 32'h0;          // DC: cos = const
      end
      @(posedge clk);
      acc_prev = acc_m;                        // phase used for this clock's table read
      acc_m = acc_m + 32'(SPC) * fword;
      @(negedge clk);
      for (int k = 0; k < SPC; k++) begin
        logic [31:0] ph; int c, s, e;
        ph = acc_prev + 32'(k) * fword + phase0;
        c = mcos(ph, 0); s = mcos(ph, 1);
        checks += 3;
        if (int'(cos_o[k]) - c > 1 || c - int'(cos_o[k]) > 1) begin
          failures++;
          if (failures < 8) $display("n=%0d ph=%h cos lane %0d got %0d exp %0d", n, ph, k, cos_o[k], c);
        end
        if (int'(sin_o[k]) - s > 1 || s - int'(sin_o[k]) > 1) begin
          failures++;
          if (failures < 8) $display("sin lane %0d got %0d exp %0d", k, sin_o[k], s);
        end
        e = int'(cos_o[k]) * int'(cos_o[k]) + int'(sin_o[k]) * int'(sin_o[k]);
        if (e < 32700 * 32700 || e > 32800 * 32800) begin failures++; if (failures < 5) $display("power %0d c=%0d s=%0d", e, cos_o[k], sin_o[k]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
