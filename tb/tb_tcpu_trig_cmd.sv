// tb_tcpu_trig_cmd: sends random trigger words and checks that the queue
// holds exactly the L0 triggers (as readouts) and, with forwarding enabled,
// the aborts and L2-accepts (as forwards), in arrival order; that other
// commands are ignored; and that overflow is flagged when the queue is full.
module tb_tcpu_trig_cmd;
  import tof_pkg::*;
  logic clk = 0, rst_n = 0;
  logic fwd_enable, trg_valid, cmd_valid, cmd_is_readout, cmd_pop, overflow;
  trg_word_t trg_word, cmd_word;
  int checks = 0, failures = 0;
  logic [20:0] q[$];

  tcpu_trig_cmd #(.QDEPTH(16)) dut (.clk, .rst_n, .fwd_enable, .trg_valid, .trg_word,
    .cmd_valid, .cmd_word, .cmd_is_readout, .cmd_pop, .overflow);
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
    automatic logic [3:0] cmds[6] = '{4'h4, 4'hE, 4'hF, 4'h0, 4'h7, 4'h4};
    automatic int n_l0 = 0, n_fwd = 0;
    trg_valid = 0; trg_word = '0; cmd_pop = 0; fwd_enable = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      // compare head with the reference
      check(cmd_valid == (q.size() > 0), "cmd_valid");
      if (q.size() > 0) check({cmd_is_readout, cmd_word} == q[0], "queue head");
      if (i == 1500) fwd_enable = 0;
      trg_valid = ($urandom_range(0, 2) == 0);
      trg_word  = '{trg_cmd: cmds[$urandom_range(0, 5)], daq_cmd: 4'($urandom()), token: 12'($urandom())};
      cmd_pop   = (i > 200 && i < 400) ? 1'b0 : ($urandom_range(0, 2) != 0);
      @(posedge clk);
      if (cmd_pop && q.size() > 0) void'(q.pop_front());
      if (trg_valid) begin
        if (trg_word.trg_cmd == TRG_L0) begin
          if (q.size() < 16) q.push_back({1'b1, trg_word});
          n_l0++;
        end else if (fwd_enable && (trg_word.trg_cmd == TRG_ABORT || trg_word.trg_cmd == TRG_L2_ACCEPT)) begin
          if (q.size() < 16) q.push_back({1'b0, trg_word});
          n_fwd++;
        end
      end
    end
    check(overflow == 1, "overflow flagged after the queue was held full");
    check(n_l0 > 100 && n_fwd > 100, "both kinds exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
