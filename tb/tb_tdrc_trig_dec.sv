// tb_tdrc_trig_dec: random trigger words; checks that L2-accepts push their
// token, aborts invalidate their token, every command reaches the debug FIFO
// only while it is enabled, all one cycle later, and the counters.
module tb_tdrc_trig_dec;
  import tof_pkg::*;
  logic clk = 0, rst_n = 0;
  logic trg_valid, trig_fifo_en, tok_push, trgf_push, inv_valid;
  trg_word_t trg_word, trgf_data;
  token_t tok_data, inv_token;
  logic [15:0] n_accept, n_abort;
  int checks = 0, failures = 0;

  tdrc_trig_dec dut (.clk, .rst_n, .trg_valid, .trg_word, .trig_fifo_en, .tok_push, .tok_data,
    .trgf_push, .trgf_data, .inv_valid, .inv_token, .n_accept, .n_abort);
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

  initial begin
    automatic logic [3:0] cmds[4] = '{4'hF, 4'hE, 4'h4, 4'h1};
    automatic int na = 0, nb = 0;
    trg_valid = 0; trg_word = '0; trig_fifo_en = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      trg_valid = ($urandom_range(0, 1) == 1);
      trig_fifo_en = (i % 500) < 250;
      trg_word = '{trg_cmd: cmds[$urandom_range(0, 3)], daq_cmd: 4'($urandom()), token: 12'($urandom())};
      @(negedge clk);
      check(tok_push == (trg_valid && trg_word.trg_cmd == TRG_L2_ACCEPT), "token push");
      check(inv_valid == (trg_valid && trg_word.trg_cmd == TRG_ABORT), "abort invalidates");
      check(trgf_push == (trg_valid && trig_fifo_en), "trigger FIFO push");
      if (tok_push) check(tok_data == trg_word.token, "token value");
      if (inv_valid) check(inv_token == trg_word.token, "invalidate token");
      if (trgf_push) check(trgf_data == trg_word, "trigger FIFO word");
      na += (trg_valid && trg_word.trg_cmd == TRG_L2_ACCEPT);
      nb += (trg_valid && trg_word.trg_cmd == TRG_ABORT);
      trg_valid = 0;
    end
    @(negedge clk);
    check(n_accept == 16'(na) && n_abort == 16'(nb), "counters");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
