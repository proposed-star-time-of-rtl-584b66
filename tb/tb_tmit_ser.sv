// tb_tmit_ser: sends random 21-bit words and decodes the serial line here,
// bit by bit: each word must be a '1' start bit, 21 bits MSB first and an
// idle '0', 23 clocks per word when words are offered back to back.
module tb_tmit_ser;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, sdo;
  logic [20:0] in_word;
  int checks = 0, failures = 0;
  logic [20:0] sent[$];

  tmit_ser dut (.clk, .rst_n, .in_valid, .in_word, .in_ready, .sdo);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  // line decoder
  int nrx = 0;
  longint t_start[$];
  initial begin
    logic [20:0] w;
    forever begin
      @(posedge clk); #1;
      if (rst_n && sdo) begin
        t_start.push_back($time);
        for (int b = 20; b >= 0; b--) begin @(posedge clk); #1; w[b] = sdo; end
        @(posedge clk); #1;
        check(sdo == 0, "idle bit after word");
        check(sent.size() > 0 && w == sent[0], $sformatf("word %h", w));
        if (sent.size() > 0) void'(sent.pop_front());
        nrx++;
      end
    end
  end

  initial begin
    in_valid = 0; in_word = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 300; i++) begin
      @(negedge clk);
      in_valid = 1; in_word = 21'($urandom());
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      sent.push_back(in_word);
      if (i >= 200) begin @(negedge clk); in_valid = 0; repeat ($urandom_range(0, 30)) @(negedge clk); end
    end
    @(negedge clk); in_valid = 0;
    repeat (60) @(posedge clk);
    check(nrx == 300, $sformatf("all words received (%0d)", nrx));
    for (int i = 1; i < 150; i++) check(t_start[i] - t_start[i-1] == 230, "23 clocks per word back to back");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
