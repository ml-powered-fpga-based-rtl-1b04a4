// tb_fnn_pipeline: random trained-looking models, each fed with a burst of
// shots (one per clock, with gaps), checked bit-exactly against the
// reference network (scaling, 2-8-4-1 layers with ReLU, sigmoid table).
// Every decision must appear exactly 27 clocks after its shot, the paper's
// inference latency, and no decision may appear without a shot. A second
// part uses a hand-made model that must call |1> exactly when I >= mu.
module tb_fnn_pipeline;
  import qubicml_pkg::*;
  import qubicml_ref_pkg::*;
  localparam int LAT = 27;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid, state;
  acc_t acc_i, acc_q;
  fnn_params_t params;
  logic [PROB_W-1:0] prob;
  int checks = 0, failures = 0, decisions = 0;
  int cyc = 0;
  always #1 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  fnn_pipeline dut (.*);

  typedef struct { int t; int prob; bit st; } exp_t;
  exp_t q [$];

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // checker: at each negedge, out_valid must match an expectation due now
  always @(negedge clk) if (rst_n) begin
    if (q.size() > 0 && q[0].t == cyc) begin
      exp_t e; e = q.pop_front();
      checks += 3;
      if (!out_valid) begin
        failures++;
        if (failures < 8) $display("no decision at cycle %0d", cyc);
      end
      if (int'(prob) != e.prob) begin
        failures++;
        if (failures < 8) $display("prob got %0d exp %0d", prob, e.prob);
      end
      if (state != e.st) failures++;
      decisions++;
    end else if (out_valid) begin
      failures++; checks++;
      if (failures < 8) $display("unexpected decision at cycle %0d", cyc);
    end
  end

  task automatic shot(input longint xi, input longint xq);
    longint o3; int pr; bit st;
    ref_fnn(params, xi, xq, o3, pr, st);
    in_valid = 1; acc_i = acc_t'(xi); acc_q = acc_t'(xq);
    q.push_back('{t: cyc + LAT, prob: pr, st: st});
    @(negedge clk);
    in_valid = 0;
  endtask

  initial begin
    acc_i = '0; acc_q = '0; params = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // random models
    for (int m = 0; m < 40; m++) begin
      params = rand_model();
      @(negedge clk);
      for (int s = 0; s < 60; s++) begin
        longint xi, xq;
        xi = longint'($signed($urandom_range(0, 1 << (params.n_i + 1)))) - (64'sd1 << params.n_i) + longint'(params.mu_i);
        xq = longint'($signed($urandom_range(0, 1 << (params.n_q + 1)))) - (64'sd1 << params.n_q) + longint'(params.mu_q);
        shot(xi, xq);
        if ($urandom_range(0, 3) == 0) @(negedge clk);
      end
      repeat (LAT + 2) @(negedge clk);  // drain before the model changes
    end
    // sign model: |1> iff I >= mu
    params = sign_model(22, 1000);
    @(negedge clk);
    for (int s = 0; s < 400; s++) begin
      longint xi; longint o3; int pr; bit st;
      xi = longint'($signed($urandom_range(0, 1 << 23))) - (64'sd1 << 22) + 1000;
      if (s % 10 == 0) xi = 1000 + (s % 20 == 0 ? 0 : -1);
      ref_fnn(params, xi, 0, o3, pr, st);
      checks++;
      if (st != (xi >= 1000)) begin
        failures++;
        if (failures < 8) $display("sign model reference disagrees for I=%0d", xi);
      end
      shot(xi, longint'($urandom_range(0, 1000)));
    end
    repeat (LAT + 3) @(negedge clk);
    checks++;
    if (q.size() != 0 || decisions == 0) failures++;
    $display("decisions=%0d", decisions);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
