// tb_tcpu: the tray CPU logic as a whole. Trigger words of all kinds arrive on
// the trigger bus; the TDIG cables answer each TDC trigger with random words.
// The output event stream must contain, in command order, a data event for
// each L0 and a trigger command event for each abort and L2-accept (other
// commands dropped), formatted as worked out here. The two half-tray
// multiplicity words must equal the sums of TDIG cards 0-3 and 4-7.
module tb_tcpu;
  import tof_pkg::*;
  localparam int NC = 2;
  logic clk = 0, rst_n = 0;
  logic [7:0][4:0] pmult;
  logic [7:0] pmult_valid;
  logic [1:0][6:0] mult;
  logic [1:0] mult_valid, mult_skew_err;
  logic trg_valid, tdc_trigger, out_valid, out_ready, cmd_overflow;
  trg_word_t trg_word;
  logic [NC-1:0] tdc_valid, tdc_last, tdc_ready;
  logic [NC-1:0][31:0] tdc_data;
  fword_t out_word;
  logic [15:0] events_done;
  int checks = 0, failures = 0;
  fword_t exp_q[$];
  logic [32:0] cab_q[NC][$];
  trg_word_t pend_q[$];

  tcpu dut (.clk, .rst_n, .tray_id(2'd1), .fwd_enable(1'b1), .pmult, .pmult_valid, .mult, .mult_valid,
    .trg_valid, .trg_word, .tdc_trigger, .tdc_valid, .tdc_data, .tdc_last, .tdc_ready,
    .out_valid, .out_word, .out_ready, .cmd_overflow, .mult_skew_err, .events_done);
  always #5 clk = ~clk;

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  always_comb for (int c = 0; c < NC; c++) begin
    tdc_valid[c] = cab_q[c].size() > 0;
    tdc_data[c]  = cab_q[c].size() > 0 ? cab_q[c][0][31:0] : '0;
    tdc_last[c]  = cab_q[c].size() > 0 ? cab_q[c][0][32] : 1'b0;
  end
  // expansion of forwarded commands at the head of the pending queue
  function automatic void expand_forwards();
    while (pend_q.size() > 0 && pend_q[0].trg_cmd != TRG_L0) begin
      exp_q.push_back(soe_word(KIND_TRIG, 2'd1));
      exp_q.push_back('{ctrl: 0, data: pend_q[0]});
      exp_q.push_back(eoe_word());
      void'(pend_q.pop_front());
    end
  endfunction

  // TDIG model: each TDC trigger makes every cable deliver 1..5 words; the
  // expected data event is built for the oldest pending L0 command
  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < NC; c++) if (tdc_valid[c] && tdc_ready[c]) void'(cab_q[c].pop_front());
    if (tdc_trigger) begin
      expand_forwards();
      check(pend_q.size() > 0, "TDC trigger for a pending L0");
      exp_q.push_back(soe_word(KIND_DATA, 2'd1));
      exp_q.push_back('{ctrl: 0, data: pend_q[0]});
      void'(pend_q.pop_front());
      for (int c = 0; c < NC; c++) begin
        int n;
        n = $urandom_range(1, 5);
        for (int k = 0; k < n; k++) begin
          logic [31:0] d;
          d = $urandom();
          cab_q[c].push_back({k == n - 1, d});
          exp_q.push_back('{ctrl: 0, data: {TAG_TDC_HI, d[31:16]}});
          exp_q.push_back('{ctrl: 0, data: {TAG_TDC_LO, d[15:0]}});
        end
      end
      exp_q.push_back(eoe_word());
    end
  end

  int nwords = 0;
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    if (exp_q.size() == 0) expand_forwards();
    if (exp_q.size() == 0) check(0, "output word with nothing expected");
    else begin
      check(out_word == exp_q[0], $sformatf("word %h expected %h", out_word, exp_q[0]));
      void'(exp_q.pop_front());
    end
    nwords++;
  end

  initial begin
    automatic logic [3:0] cmds[5] = '{4'h4, 4'h4, 4'hE, 4'hF, 4'h9};
    automatic int nkept = 0;
    trg_valid = 0; trg_word = '0; out_ready = 1; pmult = '0; pmult_valid = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 60; i++) begin
      int s0, s1;
      @(negedge clk);
      trg_valid = 1;
      trg_word = '{trg_cmd: cmds[$urandom_range(0, 4)], daq_cmd: 4'($urandom()), token: 12'(i)};
      if (trg_word.trg_cmd != 4'h9) begin pend_q.push_back(trg_word); nkept++; end
      s0 = 0; s1 = 0;
      for (int d = 0; d < 8; d++) begin
        pmult[d] = 5'($urandom_range(0, 24));
        if (d < 4) s0 += 32'(pmult[d]); else s1 += 32'(pmult[d]);
      end
      pmult_valid = '1;
      @(negedge clk);
      trg_valid = 0; pmult_valid = '0;
      check(mult_valid == 2'b11 && mult[0] == 7'(s0) && mult[1] == 7'(s1), "half-tray multiplicities");
      repeat ($urandom_range(5, 60)) @(negedge clk);
      out_ready = ($urandom_range(0, 1) == 1);
    end
    out_ready = 1;
    repeat (3000) @(posedge clk);
    check(pend_q.size() == 0 && exp_q.size() == 0, "all commands answered");
    check(events_done == 16'(nkept), "event count");
    check(cmd_overflow == 0 && mult_skew_err == 0, "no errors");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
