// tb_tdrc_deser: drives framed serial words (start bit, 21 bits MSB first,
// one or more idle bits) onto the line and checks each recovered word and
// that out_valid comes one clock after the last bit.
module tb_tdrc_deser;
  logic clk = 0, rst_n = 0;
  logic sdi, out_valid;
  logic [20:0] out_word;
  int checks = 0, failures = 0;
  logic [20:0] sent[$];

  tdrc_deser dut (.clk, .rst_n, .sdi, .out_valid, .out_word);
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

  int nrx = 0;
  always @(posedge clk) if (rst_n && out_valid) begin
    check(sent.size() > 0 && out_word == sent[0], $sformatf("word %h", out_word));
    if (sent.size() > 0) void'(sent.pop_front());
    nrx++;
  end

  initial begin
    logic [20:0] w;
    sdi = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 400; i++) begin
      w = (i == 0) ? '1 : (i == 1) ? '0 : 21'($urandom());
      @(negedge clk); sdi = 1;
      for (int b = 20; b >= 0; b--) begin @(negedge clk); sdi = w[b]; end
      sent.push_back(w);
      @(negedge clk); sdi = 0;
      // the word must be out at the edge that follows its last bit
      check(out_valid == 1, "valid one clock after the last bit");
      repeat ($urandom_range(0, 3)) @(negedge clk);
    end
    repeat (5) @(posedge clk);
    check(nrx == 400 && sent.size() == 0, "all words received");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
