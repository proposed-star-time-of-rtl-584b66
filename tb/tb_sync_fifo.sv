// tb_sync_fifo: random push/pop traffic against a queue reference, checking
// data order, empty/full/count and the overflow strobe on a push while full.
module tb_sync_fifo;
  localparam int W = 20, DEPTH = 16;
  logic clk = 0, rst_n = 0;
  logic push, pop, empty, full, overflow;
  logic [W-1:0] din, dout;
  logic [4:0] count;
  int checks = 0, failures = 0;
  logic [W-1:0] q[$];

  sync_fifo #(.W(W), .DEPTH(DEPTH)) dut (.clk, .rst_n, .push, .din, .pop, .dout, .empty, .full, .count, .overflow);
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    bit exp_ovf;
    automatic int n_ovf = 0, n_full = 0;
    push = 0; pop = 0; din = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 5000; i++) begin
      @(negedge clk);
      check(empty == (q.size() == 0), "empty");
      check(full == (q.size() == DEPTH), "full");
      check(count == 5'(q.size()), "count");
      if (q.size() > 0) check(dout == q[0], "head data");
      if (full) n_full++;
      // bias phases towards filling and draining
      push = ((i / 200) % 2 == 0) ? ($urandom_range(0, 3) != 0) : ($urandom_range(0, 3) == 0);
      pop  = ((i / 200) % 2 == 0) ? ($urandom_range(0, 3) == 0) : ($urandom_range(0, 3) != 0);
      din  = W'($urandom());
      exp_ovf = push && q.size() == DEPTH;
      @(posedge clk);
      if (pop && q.size() > 0) void'(q.pop_front());
      if (push && !exp_ovf) q.push_back(din);
      #1;
      check(overflow == exp_ovf, "overflow strobe");
      if (exp_ovf) n_ovf++;
    end
    check(n_ovf > 0 && n_full > 0, "full and overflow were exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
