// tb_readout_channel: one qubit channel end to end.
//
// The DLO is set to frequency 0 and phase 45 degrees, so that cos = sin =
// 23170 (0.7071 in Q1.15) in every lane and the expected shot value can be
// computed independently: I = sum (a * ((W_I*23170) >>> 15)) >>> 15 and
// Q = sum (a * ((-W_Q*23170) >>> 15)) >>> 15 over the samples of the
// window, with random ADC samples and a random envelope. Phase 1 issues 20
// windows before any model is loaded: the first 16 shots must wait in the
// shot buffer and the last 4 must be dropped with the overflow flag set.
// Phase 2 loads a random model, which must release the 16 waiting shots, and
// then issues 150 more windows of random length. Every shot on the host
// stream and every decision (bit-exact against the reference network) is
// checked in order, and the result memory is read back at the end.
module tb_readout_channel;
  import qubicml_pkg::*;
  import qubicml_ref_pkg::*;
  localparam int SPC = 4, WROWS = 1024;
  logic clk = 0, rst_n = 0;
  adc_t [SPC-1:0] adc;
  logic rdo_start = 0;
  logic [10:0] rdo_len;
  logic cfg_we = 0;
  logic [15:0] cfg_addr;
  logic [31:0] cfg_wdata;
  logic [9:0] rd_addr;
  logic [31:0] rd_data;
  logic [10:0] res_count;
  logic res_full, acc_valid, state_valid, state, params_ready, buf_overflow;
  acc_t acc_i, acc_q;
  logic [PROB_W-1:0] prob;
  int checks = 0, failures = 0, cyc = 0;
  always #1 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  readout_channel #(.SPC(SPC), .WROWS(WROWS)) dut (.*);

  int unsigned wi_m [WROWS*SPC], wq_m [WROWS*SPC];
  fnn_params_t m;
  typedef struct { longint i; longint q; bit keep; } shot_t;
  typedef struct { int prob; bit st; } dec_t;
  shot_t shots [$];
  dec_t  decs [$];
  dec_t  stored [$];
  int n_shots = 0, n_dec = 0, n_drop = 0;

  function automatic longint lane_i(longint a, int unsigned w);
    return (a * ((longint'(w) * 23170) >>> 15)) >>> 15;
  endfunction
  function automatic longint lane_q(longint a, int unsigned w);
    return (a * ((-(longint'(w) * 23170)) >>> 15)) >>> 15;
  endfunction

  task automatic cfg(input logic [15:0] a, input logic [31:0] d);
    @(negedge clk); cfg_we = 1; cfg_addr = a; cfg_wdata = d;
    @(negedge clk); cfg_we = 0;
  endtask

  // one readout window of len clocks; ADC samples are random
  task automatic window(input int len, input bit keep);
    longint si, sq;
    @(negedge clk);
    rdo_start = 1; rdo_len = 11'(len);
    for (int k = 0; k < SPC; k++) adc[k] = adc_t'($urandom);
    @(negedge clk);
    rdo_start = 0;
    si = 0; sq = 0;
    for (int j = 0; j < len; j++) begin
      for (int k = 0; k < SPC; k++) begin
        adc[k] = adc_t'($urandom);
        si += lane_i(longint'(adc[k]), wi_m[j*SPC + k]);
        sq += lane_q(longint'(adc[k]), wq_m[j*SPC + k]);
      end
      if (j < len - 1) @(negedge clk);
    end
    shots.push_back('{i: si, q: sq, keep: keep});
  endtask

  // host stream and decision checks
  always @(negedge clk) if (rst_n) begin
    if (acc_valid) begin
      shot_t e;
      checks += 2; n_shots++;
      if (shots.size() == 0) failures++;
      else begin
        e = shots.pop_front();
        if (acc_i != acc_t'(e.i) || acc_q != acc_t'(e.q)) begin
          failures++;
          if (failures < 8) $display("shot %0d got %0d,%0d exp %0d,%0d", n_shots, acc_i, acc_q, e.i, e.q);
        end
        if (e.keep) begin
          longint o3; int pr; bit st;
          ref_fnn(m, longint'(acc_t'(e.i)), longint'(acc_t'(e.q)), o3, pr, st);
          decs.push_back('{prob: pr, st: st});
        end else n_drop++;
      end
    end
    if (state_valid) begin
      dec_t d;
      checks++; n_dec++;
      if (decs.size() == 0) failures++;
      else begin
        d = decs.pop_front();
        stored.push_back(d);
        if (int'(prob) != d.prob || state != d.st) begin
          failures++;
          if (failures < 8) $display("decision %0d got %0d/%0b exp %0d/%0b", n_dec, prob, state, d.prob, d.st);
        end
      end
    end
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int k = 0; k < SPC; k++) adc[k] = '0;
    cfg_addr = '0; cfg_wdata = '0; rdo_len = '0; rd_addr = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // DLO: frequency 0, phase 45 degrees
    cfg(16'h0000, 32'h0);
    cfg(16'h0001, 32'h2000_0000);
    // random envelope
    for (int t = 0; t < WROWS*SPC; t++) begin
      wi_m[t] = $urandom_range(0, 32768);
      wq_m[t] = $urandom_range(0, 32768);
      if (t % 97 == 0) begin wi_m[t] = 32768; wq_m[t] = 0; end
      cfg(16'h8000 | 16'(t), {16'(wq_m[t]), 16'(wi_m[t])});
    end
    // model image (not loaded yet)
    m = rand_model();
    m.n_i = 5'd23; m.n_q = 5'd23;
    for (int a = 0; a < PA_WORDS; a++) cfg(16'h4000 | 16'(a), param_word(m, a));

    // phase 1: no model loaded, 20 windows -> 16 wait, 4 dropped
    checks++;
    if (params_ready) failures++;
    for (int w = 0; w < 20; w++) window($urandom_range(1, 40), w < 16);
    repeat (10) @(negedge clk);
    checks += 2;
    if (!buf_overflow) begin failures++; $display("no overflow"); end
    if (n_dec != 0) failures++;

    // phase 2: load the model; waiting shots drain, then more windows
    cfg(16'h0002, 32'h1);
    repeat (120) @(negedge clk);
    checks++;
    if (!params_ready || n_dec != 16) begin failures++; $display("after load: ready=%0b decisions=%0d", params_ready, n_dec); end
    for (int w = 0; w < 150; w++) begin
      window((w % 25 == 0) ? 1024 : $urandom_range(1, 200), 1);
      repeat ($urandom_range(0, 3)) @(negedge clk);
    end
    repeat (60) @(negedge clk);

    // read back the result memory
    checks += 2;
    if (int'(res_count) != stored.size()) failures++;
    if (n_drop != 4) failures++;
    for (int a = 0; a < stored.size(); a++) begin
      @(negedge clk); rd_addr = 10'(a);
      @(negedge clk);
      checks++;
      if (rd_data != {14'b0, stored[a].st, PROB_W'(stored[a].prob)}) failures++;
    end
    // clear command empties it
    cfg(16'h0002, 32'h2);
    @(negedge clk);
    checks++;
    if (res_count != 0) failures++;
    $display("shots=%0d decisions=%0d dropped=%0d", n_shots, n_dec, n_drop);
    checks++;
    if (shots.size() != 0 || decs.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
