// tb_param_mem: writes a random model image into the parameter memory,
// loads it and checks every field of the parameter registers against the
// model, that `ready` is low during the load and rises exactly 71 clocks
// after `load`, and that writing the memory alone does not change the
// registers until the next load.
module tb_param_mem;
  import qubicml_pkg::*;
  import qubicml_ref_pkg::*;
  logic clk = 0, rst_n = 0, we = 0, load = 0, ready;
  logic [6:0] waddr;
  logic [31:0] wdata;
  fnn_params_t params, m, old;
  int checks = 0, failures = 0;
  always #1 clk = ~clk;
  param_mem dut (.*);

  task automatic write_image(fnn_params_t p);
    for (int a = 0; a < PA_WORDS; a++) begin
      @(negedge clk); we = 1; waddr = 7'(a); wdata = param_word(p, a);
    end
    @(negedge clk); we = 0;
  endtask

  task automatic do_load();
    int t;
    @(negedge clk); load = 1;
    @(negedge clk); load = 0;
    t = 1;
    while (!ready && t < 200) begin
      checks++;
      if (ready) failures++;
      @(negedge clk); t++;
    end
    checks++;
    if (t != 71) begin
      failures++;
      $display("ready after %0d clocks, expected 71", t);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    waddr = '0; wdata = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    checks++;
    if (ready) failures++;                 // nothing loaded yet
    for (int r = 0; r < 10; r++) begin
      m = rand_model();
      if (r == 0) m = sign_model(22, -1234);
      write_image(m);
      do_load();
      checks++;
      if (params != m) begin
        failures++;
        $display("params differ after load %0d", r);
      end
      // a new image alone does not reach the registers
      old = m;
      m = rand_model();
      write_image(m);
      checks += 2;
      if (params != old) failures++;
      if (!ready) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
