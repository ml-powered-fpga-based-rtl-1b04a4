// tb_dlo_weight_mem: writes a random envelope sample by sample, then reads
// every row and checks that lane k of row r holds sample r*SPC + k, one
// clock after the address. Overwrites a few samples and checks that only
// those change.
module tb_dlo_weight_mem;
  import qubicml_pkg::*;
  localparam int SPC = 4, DEPTH = 1024;
  logic clk = 0, we = 0;
  logic [11:0] waddr;
  logic [31:0] wdata;
  logic [9:0]  raddr;
  envw_t [SPC-1:0] wi_o, wq_o;
  logic [31:0] model [DEPTH*SPC];
  int checks = 0, failures = 0;
  always #1 clk = ~clk;
  dlo_weight_mem #(.SPC(SPC), .DEPTH(DEPTH)) dut (.*);

  task automatic read_all();
    for (int r = 0; r < DEPTH; r++) begin
      @(negedge clk); raddr = 10'(r);
      @(negedge clk);
      for (int k = 0; k < SPC; k++) begin
        checks++;
        if ({wq_o[k], wi_o[k]} != model[r*SPC + k]) begin
          failures++;
          if (failures < 8) $display("row %0d lane %0d got %h exp %h", r, k, {wq_o[k], wi_o[k]}, model[r*SPC+k]);
        end
      end
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    raddr = '0; waddr = '0; wdata = '0;
    for (int i = 0; i < DEPTH*SPC; i++) begin
      @(negedge clk); we = 1; waddr = 12'(i); wdata = $urandom; model[i] = wdata;
    end
    @(negedge clk); we = 0;
    read_all();
    for (int j = 0; j < 50; j++) begin
      @(negedge clk); we = 1; waddr = 12'($urandom); wdata = $urandom; model[waddr] = wdata;
    end
    @(negedge clk); we = 0;
    read_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
