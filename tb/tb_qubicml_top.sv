// tb_qubicml_top: the whole design, at its default size (8 qubits), end to
// end. The testbench plays three outside parts: the host (configuration
// writes, result read-back), the qubits' readout signal (one ADC stream
// carrying 8 tones, one per qubit at its own frequency, whose phase is 0 for
// |1> and 180 degrees for |0>, plus noise) and the sequencer (readout
// windows and the feed-forward of a mid-circuit measurement).
//
// Each channel's DLO is tuned to its qubit's tone and its envelope is flat.
// Each channel gets a hand-made model that calls |1> when I >= 0. Checks:
//  * every decision equals the state the signal was prepared in;
//  * every decision is bit-exact against the reference network applied to
//    the shot the channel put on its host stream, and comes 28 clocks after
//    that shot when the model is loaded (1 clock in the shot buffer plus the
//    27-clock network);
//  * shots issued before a model is loaded wait in the buffer, and too many
//    overflow it;
//  * conditional bit flip (mid-circuit measurement): qubit 2 is measured in
//    a random state; if it reads |1> the sequencer flips qubit 1, whose next
//    measurement must then agree with qubit 2 (outcomes 00 or 11 only);
//  * a run-time reload of one qubit's model (an inverted rule) takes
//    effect on the next shot;
//  * the result memories read back what was decided.
// Readout windows have the lengths 500 ns, 600 ns, 1 us, 1.5 us and 2 us
// (250 to 1000 clocks); the feed-forward rounds use 500 ns.
// Each mechanism is counted, and one that never happened is a failure.
module tb_qubicml_top;
  import qubicml_pkg::*;
  import qubicml_ref_pkg::*;
  localparam int NQ = 8, SPC = 4;
  // readout lengths in clocks of 2 ns: 500 ns, 600 ns, 1 us, 1.5 us, 2 us
  localparam int NLEN = 5;
  localparam int LENS [NLEN] = '{250, 300, 500, 750, 1000};
  localparam int ENV_SAMPLES = 1000 * SPC;   // envelope covers the longest window
  int win = 250;                             // current window length in clocks
  int n_len [NLEN] = '{default: 0};
  localparam real PI = 3.14159265358979;

  logic clk = 0, rst_n = 0;
  adc_t [SPC-1:0] adc;
  logic [NQ-1:0] rdo_start;
  logic [NQ-1:0][10:0] rdo_len;
  logic cfg_we = 0;
  logic [2:0] cfg_qubit, rd_qubit;
  logic [15:0] cfg_addr;
  logic [31:0] cfg_wdata, rd_data;
  logic [9:0] rd_addr;
  logic [NQ-1:0][10:0] res_count;
  logic [NQ-1:0] res_full, acc_valid, state_valid, state, params_ready, buf_overflow;
  acc_t [NQ-1:0] acc_i, acc_q;
  logic [NQ-1:0][PROB_W-1:0] prob;

  qubicml_top dut (.*);

  int checks = 0, failures = 0;
  longint cyc = 0;
  always #1 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  // ---------------- qubit signal model
  bit   qstate [NQ];          // state each qubit's tone currently encodes
  real  amp = 1800.0;
  always @(negedge clk) begin
    for (int k = 0; k < SPC; k++) begin
      real s; longint n;
      n = (cyc + 1) * SPC + k;
      s = real'($urandom_range(0, 600)) - 300.0;
      for (int q = 0; q < NQ; q++)
        s += amp * $cos(2.0 * PI * real'(q + 3) * real'(n % 256) / 256.0 + (qstate[q] ? 0.0 : PI));
      adc[k] = adc_t'(int'(s));
    end
  end

  // ---------------- expectations and counters
  fnn_params_t model [NQ];
  bit   exp_state [NQ][$];        // prepared state of each issued window
  longint t_shot [NQ][$];
  int   dec_log [NQ][$];          // {state, prob} of each decision
  int   n_dec = 0, n_wait = 0, n_ovf = 0, n_parallel = 0, n_ff = 0, n_bitexact = 0;
  int   n_reload = 0, lat_ok = 0;

  always @(negedge clk) if (rst_n) begin
    for (int q = 0; q < NQ; q++) begin
      if (acc_valid[q]) begin
        if (!params_ready[q]) n_wait++;
        if ($test$plusargs("trace")) $display("c%0d q%0d shot I=%0d Q=%0d qstate=%0b", cyc, q, acc_i[q], acc_q[q], qstate[q]);
        t_shot[q].push_back(cyc);
        begin
          longint o3; int pr; bit st;
          ref_fnn(model[q], longint'(acc_i[q]), longint'(acc_q[q]), o3, pr, st);
          dec_log[q].push_back({14'b0, st, PROB_W'(pr)});   // expected, replaced below
        end
      end
    end
    if ($countones(rdo_start) > 1) n_parallel++;
  end

  // decisions
  int exp_idx [NQ];
  int got_log [NQ][$];
  bit last_state [NQ];
  bit got_new [NQ];
  always @(negedge clk) if (rst_n) begin
    for (int q = 0; q < NQ; q++) if (state_valid[q]) begin
      int e; bit st_prep; longint ts;
      n_dec++;
      checks += 3;
      e = dec_log[q][exp_idx[q]];
      if ({14'b0, state[q], prob[q]} != 32'(e)) begin
        failures++;
        if (failures < 10) $display("q%0d decision %0d not bit-exact: got %0b/%0d exp %h (log %0d)", q, exp_idx[q], state[q], prob[q], e, dec_log[q].size());
      end else n_bitexact++;
      st_prep = exp_state[q].pop_front();
      if (state[q] != st_prep) begin
        failures++;
        if (failures < 10) $display("q%0d misclassified: got %0b prepared %0b (I=%0d)", q, state[q], st_prep, acc_i[q]);
      end
      ts = t_shot[q].pop_front();
      if (cyc - ts == 28) lat_ok++;
      else if (params_ready[q] && cyc - ts < 28) begin
        failures++;
        $display("q%0d decision after %0d clocks", q, cyc - ts);
      end
      got_log[q].push_back({14'b0, state[q], prob[q]});
      exp_idx[q]++;
      last_state[q] = state[q];
      got_new[q] = 1;
    end
  end

  // ---------------- host and sequencer helpers
  task automatic cfg(input int q, input logic [15:0] a, input logic [31:0] d);
    @(negedge clk); cfg_we = 1; cfg_qubit = 3'(q); cfg_addr = a; cfg_wdata = d;
    @(negedge clk); cfg_we = 0;
  endtask

  task automatic load_model(input int q);
    for (int a = 0; a < PA_WORDS; a++) cfg(q, 16'h4000 | 16'(a), param_word(model[q], a));
    cfg(q, 16'h0002, 32'h1);
    n_reload++;
  endtask

  // start windows on the qubits in mask, each prepared in st[q]
  task automatic measure(input logic [NQ-1:0] mask, input bit st [NQ]);
    @(negedge clk);
    for (int q = 0; q < NQ; q++) if (mask[q]) begin
      qstate[q] = st[q];
      exp_state[q].push_back(st[q]);
      got_new[q] = 0;
    end
    rdo_start = mask;
    for (int q = 0; q < NQ; q++) rdo_len[q] = 11'(win);
    for (int l = 0; l < NLEN; l++) if (LENS[l] == win) n_len[l]++;
    @(negedge clk);
    rdo_start = '0;
    repeat (win + 2) @(negedge clk);
  endtask

  task automatic wait_decisions(input logic [NQ-1:0] mask);
    int t; t = 0;
    while (t < 200) begin
      bit all; all = 1;
      for (int q = 0; q < NQ; q++) if (mask[q] && !got_new[q]) all = 0;
      if (all) break;
      @(negedge clk); t++;
    end
    checks++;
    if (t >= 200) begin failures++; $display("decisions missing"); end
  endtask

  initial begin
    repeat (300000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    bit st [NQ];
    rdo_start = '0; rdo_len = '0; cfg_qubit = '0; cfg_addr = '0; cfg_wdata = '0;
    rd_qubit = '0; rd_addr = '0;
    for (int q = 0; q < NQ; q++) begin qstate[q] = 0; exp_idx[q] = 0; model[q] = sign_model(20, 0); end
    repeat (3) @(negedge clk);
    rst_n = 1;

    // host: DLO frequency of each qubit, flat envelope over the window
    for (int q = 0; q < NQ; q++) begin
      // the oscillator starts turning when its frequency is written; the
      // phase offset aligns it with the signal's time origin (to within
      // a clock, a few tens of degrees at most)
      longint c0, fw;
      fw = (longint'(q + 3) << 32) / 256;
      c0 = cyc;
      cfg(q, 16'h0000, 32'(fw));
      cfg(q, 16'h0001, 32'((c0 + 3) * SPC * fw));
      for (int t = 0; t < ENV_SAMPLES; t++) cfg(q, 16'h8000 | 16'(t), {16'h8000, 16'h8000});
    end

    // 1) qubits 0-3 measured before their models are loaded: the shots
    //    wait; qubit 0 gets 18 windows, which overflows its 16-entry buffer
    for (int r = 0; r < 18; r++) begin
      for (int q = 0; q < NQ; q++) st[q] = 1'($urandom);
      measure((r < 2) ? 8'h0F : 8'h01, st);
    end
    repeat (20) @(negedge clk);
    checks++;
    if (!buf_overflow[0]) begin failures++; $display("no overflow on qubit 0"); end
    else n_ovf++;
    // the two dropped shots of qubit 0 never get a decision
    void'(exp_state[0].pop_back()); void'(exp_state[0].pop_back());
    void'(t_shot[0].pop_back());    void'(t_shot[0].pop_back());
    void'(dec_log[0].pop_back());   void'(dec_log[0].pop_back());
    for (int q = 0; q < NQ; q++) load_model(q);
    repeat (150) @(negedge clk);

    // 2) all qubits in parallel, random states, cycling through the five
    //    readout lengths
    for (int r = 0; r < 30; r++) begin
      win = LENS[r % NLEN];
      for (int q = 0; q < NQ; q++) st[q] = 1'($urandom);
      measure(8'hFF, st);
      wait_decisions(8'hFF);
    end

    // 3) conditional bit flip: Q2 in a random state, measured mid-circuit;
    //    if it reads |1>, Q1 is flipped from |0> to |1> before its readout
    win = 250;                    // 500 ns readout, as in the experiment
    for (int r = 0; r < 40; r++) begin
      bit q2, q1;
      for (int q = 0; q < NQ; q++) st[q] = 0;
      st[2] = 1'($urandom);
      measure(8'h04, st);
      wait_decisions(8'h04);
      q2 = last_state[2];
      st[1] = q2;                 // feed-forward: two X90 = bit flip
      measure(8'h02, st);
      wait_decisions(8'h02);
      q1 = last_state[1];
      n_ff++;
      checks++;
      if (q1 != q2) begin failures++; $display("bit-flip outcome %0b%0b", q1, q2); end
    end

    // 4) reload a model at run time (qubit 5 gets an inverted decision rule)
    model[5].w3[0][0] = -model[5].w3[0][0];
    model[5].w3[0][1] = -model[5].w3[0][1];
    load_model(5);
    repeat (100) @(negedge clk);
    for (int r = 0; r < 10; r++) begin
      for (int q = 0; q < NQ; q++) st[q] = 1'($urandom);
      measure(8'h20, st);
      // expected state is inverted now
      exp_state[5].push_back(!exp_state[5].pop_back());
      wait_decisions(8'h20);
    end

    // 5) host reads every result memory back
    repeat (40) @(negedge clk);
    for (int q = 0; q < NQ; q++) begin
      checks++;
      if (int'(res_count[q]) != got_log[q].size()) begin
        failures++; $display("q%0d count %0d exp %0d", q, res_count[q], got_log[q].size());
      end
      for (int a = 0; a < got_log[q].size(); a++) begin
        @(negedge clk); rd_qubit = 3'(q); rd_addr = 10'(a);
        @(negedge clk); @(negedge clk);
        checks++;
        if (rd_data != 32'(got_log[q][a])) failures++;
      end
    end

    $display("decisions=%0d bit-exact=%0d latency28=%0d waited=%0d overflow=%0d parallel=%0d feed-forward=%0d reloads=%0d",
             n_dec, n_bitexact, lat_ok, n_wait, n_ovf, n_parallel, n_ff, n_reload);
    for (int l = 0; l < NLEN; l++) $display("windows of %0d clocks: %0d", LENS[l], n_len[l]);
    checks += 6 + NLEN;
    for (int l = 0; l < NLEN; l++) if (n_len[l] == 0) begin failures++; $display("no window of %0d clocks", LENS[l]); end
    if (n_wait == 0)     begin failures++; $display("buffer wait never happened"); end
    if (n_ovf == 0)      begin failures++; $display("overflow never happened"); end
    if (n_parallel == 0) begin failures++; $display("parallel readout never happened"); end
    if (n_ff == 0)       begin failures++; $display("feed-forward never happened"); end
    if (lat_ok == 0)     begin failures++; $display("27-clock inference never observed"); end
    if (n_reload <= NQ)  begin failures++; $display("model reload never happened"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
