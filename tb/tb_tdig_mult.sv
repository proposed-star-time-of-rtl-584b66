// tb_tdig_mult: checks the TDIG multiplicity count against a reference.
// For random gates of random length and random discriminator activity, the
// expected sum is the number of channels that were high in at least one
// gated cycle; it must appear exactly one cycle after the gate falls.
module tb_tdig_mult;
  logic clk = 0, rst_n = 0;
  logic [23:0] disc;
  logic gate;
  logic [4:0] pmult;
  logic pmult_valid;
  int checks = 0, failures = 0;

  tdig_mult dut (.clk, .rst_n, .disc, .gate, .pmult, .pmult_valid);
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    logic [23:0] acc;
    int len, expected;
    disc = '0; gate = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int g = 0; g < 200; g++) begin
      acc = '0;
      len = 1 + $urandom_range(0, 9);
      for (int c = 0; c < len; c++) begin
        @(negedge clk);
        gate = 1;
        disc = (g % 7 == 0) ? '1 : 24'($urandom() & $urandom());
        acc |= disc;
      end
      @(negedge clk);
      gate = 0;
      disc = 24'($urandom());              // activity outside the gate is ignored
      expected = $countones(acc);
      check(pmult_valid == 0, "no strobe while the gate is still sampled high");
      @(posedge clk); #1;
      check(pmult_valid == 1, "strobe at the first edge that samples the gate low");
      check(pmult == 5'(expected), $sformatf("sum %0d expected %0d", pmult, expected));
      @(posedge clk); #1;
      check(pmult_valid == 0, "strobe is one cycle");
      check(pmult == 5'(expected), "sum held");
      repeat ($urandom_range(0, 3)) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
