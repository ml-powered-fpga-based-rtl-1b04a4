// tb_acc_buff: random push/pop traffic against a queue model, including
// long push-only stretches that fill the buffer and overflow it. Checks the
// show-ahead data, empty, full, that a push into a full buffer is dropped
// (even when a pop happens on the same clock) and that the sticky overflow
// flag rises exactly then.
module tb_acc_buff;
  localparam int DEPTH = 16, W = 64;
  logic clk = 0, rst_n = 0, push = 0, pop = 0, empty, full, overflow;
  logic [W-1:0] push_data, pop_data;
  logic [W-1:0] q [$];
  bit ovf_m = 0;
  int checks = 0, failures = 0, overflows = 0;
  always #1 clk = ~clk;
  acc_buff #(.DEPTH(DEPTH), .W(W)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    push_data = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 20000; n++) begin
      @(negedge clk);
      // check state against the model
      checks += 4;
      if (empty != (q.size() == 0)) failures++;
      if (full != (q.size() == DEPTH)) failures++;
      if (overflow != ovf_m) failures++;
      if (q.size() > 0 && pop_data != q[0]) begin
        failures++;
        if (failures < 8) $display("data got %h exp %h", pop_data, q[0]);
      end
      // next operation
      if ((n / 500) % 4 == 1) begin push = 1; pop = 0; end           // fill
      else if ((n / 500) % 4 == 3) begin push = 0; pop = !empty; end // drain
      else begin push = 1'($urandom); pop = 1'($urandom) && !empty; end
      push_data = {$urandom, $urandom};
      // model update for this clock
      // a push into a full buffer is dropped even if a pop frees a slot
      // on the same clock
      begin
        bit was_full; was_full = (q.size() == DEPTH);
        if (pop && q.size() > 0) void'(q.pop_front());
        if (push) begin
          if (!was_full) q.push_back(push_data);
          else begin ovf_m = 1; overflows++; end
        end
      end
    end
    checks++;
    if (overflows == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
