// tb_tcpu_mult_agg: checks the half-tray sum of four partial multiplicities,
// its one-cycle latency, the 7-bit range (4 x 24 = 96 at most) and the flag
// raised when the four strobes do not arrive together.
module tb_tcpu_mult_agg;
  logic clk = 0, rst_n = 0;
  logic [3:0][4:0] pmult;
  logic [3:0] pmult_valid;
  logic [6:0] mult;
  logic mult_valid, skew_err;
  int checks = 0, failures = 0;

  tcpu_mult_agg dut (.clk, .rst_n, .pmult, .pmult_valid, .mult, .mult_valid, .skew_err);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    int exp;
    pmult = '0; pmult_valid = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 300; i++) begin
      @(negedge clk);
      exp = 0;
      for (int k = 0; k < 4; k++) begin
        pmult[k] = (i == 5) ? 5'd24 : 5'($urandom_range(0, 24));
        exp += 32'(pmult[k]);
      end
      pmult_valid = '1;
      @(negedge clk);
      pmult_valid = '0;
      check(mult_valid == 1 && mult == 7'(exp), $sformatf("sum %0d expected %0d", mult, exp));
      if (i == 5) check(mult == 7'd96, "full half tray gives 96");
      @(negedge clk);
      check(mult_valid == 0, "strobe one cycle");
    end
    check(skew_err == 0, "no skew error yet");
    @(negedge clk);
    pmult_valid = 4'b0011;
    @(negedge clk);
    pmult_valid = '0;
    check(mult_valid == 0, "partial strobes are not summed");
    check(skew_err == 1, "skew flagged");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
