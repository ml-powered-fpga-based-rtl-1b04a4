// tb_weighted_dlo_mixer: random ADC samples, carriers and envelope weights
// every clock. The lane sums of I = (a * ((W_I*cos) >>> 15)) >>> 15 and
// Q = (a * ((-W_Q*sin) >>> 15)) >>> 15 are checked bit-exactly 3 clocks
// later, together with the valid/first/last tags. A unit weight (0x8000)
// with cos = 32767 must return the sample almost unchanged.
module tb_weighted_dlo_mixer;
  import qubicml_pkg::*;
  localparam int SPC = 4, N = 3000;
  logic clk = 0, rst_n = 0, in_valid = 0, in_first = 0, in_last = 0;
  logic out_valid, out_first, out_last;
  adc_t [SPC-1:0] adc;
  dlo_t [SPC-1:0] cos_i, sin_i;
  envw_t [SPC-1:0] wi, wq;
  acc_t mix_i, mix_q;
  longint ei [N], eq [N];
  logic [2:0] et [N];
  int checks = 0, failures = 0;
  always #1 clk = ~clk;
  weighted_dlo_mixer #(.SPC(SPC)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    adc = '0; cos_i = '0; sin_i = '0; wi = '0; wq = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < N; n++) begin
      @(negedge clk);
      if (n >= 3) begin
        checks += 3;
        if ({out_valid, out_first, out_last} != et[n-3]) failures++;
        if (longint'(mix_i) != ei[n-3]) begin
          failures++;
          if (failures < 8) $display("I at %0d got %0d exp %0d", n, mix_i, ei[n-3]);
        end
        if (longint'(mix_q) != eq[n-3]) failures++;
      end
      in_valid = 1'($urandom); in_first = 1'($urandom); in_last = 1'($urandom);
      ei[n] = 0; eq[n] = 0;
      for (int k = 0; k < SPC; k++) begin
        longint d;
        adc[k] = ADC_W'($urandom); cos_i[k] = DLO_W'($urandom); sin_i[k] = DLO_W'($urandom);
        wi[k] = DLOW_W'($urandom_range(0, 32768)); wq[k] = DLOW_W'($urandom_range(0, 32768));
        if (n % 9 == 0) begin wi[k] = 16'h8000; cos_i[k] = 16'sd32767; end
        d = (longint'(wi[k]) * longint'(cos_i[k])) >>> 15;
        ei[n] += (longint'(adc[k]) * d) >>> 15;
        d = (-(longint'(wq[k]) * longint'(sin_i[k]))) >>> 15;
        eq[n] += (longint'(adc[k]) * d) >>> 15;
        if (n % 9 == 0) begin
          checks++;
          if ((((longint'(adc[k]) * 32767) >>> 15) - longint'(adc[k])) > 1 ||
              (longint'(adc[k]) - ((longint'(adc[k]) * 32767) >>> 15)) > 1) failures++;
        end
      end
      et[n] = {in_valid, in_valid & in_first, in_valid & in_last};
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
