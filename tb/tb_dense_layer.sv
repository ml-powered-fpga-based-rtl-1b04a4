// tb_dense_layer: the three layer shapes of the network (2->8 in 3 clocks,
// 8->4 in 6 clocks, 4->1 in 5 clocks) fed with a new random input vector,
// weight set and bias set every clock. Each node output is checked
// bit-exactly against sum(trunc(x*w)) + b wrapped to 27 bits, exactly
// LATENCY clocks later, and valid must follow in_valid by LATENCY clocks.
// Weights and biases are static parameters in use, so here they change only
// every 40 clocks, and vectors whose flight spans a change are not checked.
module tb_dense_layer;
  import qubicml_pkg::*;
  import qubicml_ref_pkg::*;
  localparam int N = 1500;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;
  always #1 clk = ~clk;

  // layer A: 2 -> 8, latency 3
  logic va, oa; fx_t [1:0] xa; wt_t [7:0][1:0] wa; fx_t [7:0] ba, ya;
  // layer B: 8 -> 4, latency 6
  logic vb, ob; fx_t [7:0] xb; wt_t [3:0][7:0] wb; fx_t [3:0] bb, yb;
  // layer C: 4 -> 1, latency 5
  logic vc, oc; fx_t [3:0] xc; wt_t [0:0][3:0] wc; fx_t [0:0] bc, yc;

  dense_layer #(.N_IN(2), .N_OUT(8), .LATENCY(3)) dut_a (.clk, .rst_n, .in_valid(va), .x(xa), .w(wa), .b(ba), .out_valid(oa), .y(ya));
  dense_layer #(.N_IN(8), .N_OUT(4), .LATENCY(6)) dut_b (.clk, .rst_n, .in_valid(vb), .x(xb), .w(wb), .b(bb), .out_valid(ob), .y(yb));
  dense_layer #(.N_IN(4), .N_OUT(1), .LATENCY(5)) dut_c (.clk, .rst_n, .in_valid(vc), .x(xc), .w(wc), .b(bc), .out_valid(oc), .y(yc));

  longint ea [N][8], eb [N][4], ec [N];
  logic   eva [N], evb [N], evc [N];

  function automatic fx_t rx();
    return fx_t'($signed($urandom_range(0, 1 << 20)) - (1 << 19));   // +-4.0
  endfunction
  function automatic wt_t rw();
    return wt_t'($signed($urandom_range(0, 1 << 15)) - (1 << 14));   // +-4.0
  endfunction

  task automatic chk(input longint got, input longint e, input string what);
    checks++;
    if (got != e) begin
      failures++;
      if (failures < 8) $display("%s: got %0d exp %0d", what, got, e);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    {va, vb, vc} = '0; xa = '0; xb = '0; xc = '0; wa = '0; wb = '0; wc = '0; ba = '0; bb = '0; bc = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < N; n++) begin
      @(negedge clk);
      if (n >= 3 && (n-3)/40 == n/40) begin
        chk(longint'(oa), longint'(eva[n-3]), "A valid");
        for (int o = 0; o < 8; o++) chk(longint'(ya[o]), ea[n-3][o], "A node");
      end
      if (n >= 6 && (n-6)/40 == n/40) begin
        chk(longint'(ob), longint'(evb[n-6]), "B valid");
        for (int o = 0; o < 4; o++) chk(longint'(yb[o]), eb[n-6][o], "B node");
      end
      if (n >= 5 && (n-5)/40 == n/40) begin
        chk(longint'(oc), longint'(evc[n-5]), "C valid");
        chk(longint'(yc[0]), ec[n-5], "C node");
      end
      va = 1'($urandom); vb = 1'($urandom); vc = 1'($urandom);
      for (int i = 0; i < 2; i++) xa[i] = rx();
      for (int i = 0; i < 8; i++) xb[i] = rx();
      for (int i = 0; i < 4; i++) xc[i] = rx();
      if (n % 40 == 0) begin
      for (int o = 0; o < 8; o++) begin
        ba[o] = rx();
        for (int i = 0; i < 2; i++) wa[o][i] = rw();
      end
      for (int o = 0; o < 4; o++) begin
        bb[o] = rx();
        for (int i = 0; i < 8; i++) wb[o][i] = rw();
      end
      bc[0] = rx();
      for (int i = 0; i < 4; i++) wc[0][i] = rw();
      end
      for (int o = 0; o < 8; o++) begin
        ea[n][o] = longint'(ba[o]);
        for (int i = 0; i < 2; i++) ea[n][o] += ref_mult(longint'(xa[i]), longint'(wa[o][i]));
        ea[n][o] = wrap27(ea[n][o]);
      end
      for (int o = 0; o < 4; o++) begin
        eb[n][o] = longint'(bb[o]);
        for (int i = 0; i < 8; i++) eb[n][o] += ref_mult(longint'(xb[i]), longint'(wb[o][i]));
        eb[n][o] = wrap27(eb[n][o]);
      end
      ec[n] = longint'(bc[0]);
      for (int i = 0; i < 4; i++) ec[n] += ref_mult(longint'(xc[i]), longint'(wc[0][i]));
      ec[n] = wrap27(ec[n]);
      eva[n] = va; evb[n] = vb; evc[n] = vc;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
