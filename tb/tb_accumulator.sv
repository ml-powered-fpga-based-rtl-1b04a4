// tb_accumulator: windows of random length (1 to 300 clocks) separated by
// random gaps and idle clocks inside, with random I/Q inputs. Each window
// must produce exactly one shot, one clock after its last sample, equal to
// the 32-bit wrapped sum of the window's valid samples; no shot may appear
// otherwise.
module tb_accumulator;
  import qubicml_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0, in_first = 0, in_last = 0, out_valid;
  acc_t in_i, in_q, acc_i, acc_q;
  int checks = 0, failures = 0, shots = 0;
  logic   exp_v;
  longint exp_i, exp_q;
  always #1 clk = ~clk;
  accumulator dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  // advance one clock and check the output that the inputs just applied
  // must produce
  task automatic tick(input logic v, input longint ei, input longint eq);
    exp_v = v; exp_i = ei; exp_q = eq;
    @(negedge clk);
    checks++;
    if (out_valid != exp_v) begin
      failures++;
      if (failures < 8) $display("t=%0t valid got %0b exp %0b", $time, out_valid, exp_v);
    end
    if (exp_v) begin
      checks += 2; shots++;
      if (acc_i != acc_t'(exp_i) || acc_q != acc_t'(exp_q)) begin
        failures++;
        if (failures < 8) $display("shot got %0d,%0d exp %0d,%0d", acc_i, acc_q, acc_t'(exp_i), acc_t'(exp_q));
      end
    end
  endtask

  initial begin
    in_i = '0; in_q = '0; exp_v = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    tick(0, 0, 0);
    for (int w = 0; w < 300; w++) begin
      int len; longint si, sq;
      len = (w % 10 == 0) ? 1 : $urandom_range(1, 300);
      si = 0; sq = 0;
      for (int s = 0; s < len; s++) begin
        // an idle clock inside the window now and then
        if (s > 0 && $urandom_range(0, 7) == 0) begin
          in_valid = 0; in_first = 0; in_last = 0; in_i = acc_t'($urandom);
          tick(0, 0, 0);
        end
        in_valid = 1; in_first = (s == 0); in_last = (s == len - 1);
        in_i = acc_t'($urandom); in_q = acc_t'($urandom);
        if (w % 7 == 0) begin in_i = 32'sh7fff_0000; in_q = 32'sh8000_0000; end
        si += longint'(in_i); sq += longint'(in_q);
        tick(in_last, si, sq);
      end
      in_valid = 0; in_first = 0; in_last = 0;
      repeat ($urandom_range(1, 3)) tick(0, 0, 0);
    end
    checks++;
    if (shots != 300) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
