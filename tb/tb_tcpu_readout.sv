// tb_tcpu_readout: drives readout and forward commands and two TDIG cables
// with random hit words, stalls and gaps, lets the output drain at random,
// and compares the output word stream with the event format worked out here:
//   data event:    SOE(DATA, tray), trigger word, {8,hi16},{9,lo16} per TDC
//                  word (cable 0 then cable 1), EOE
//   forward event: SOE(TRIG, tray), trigger word, EOE
// A small buffer makes the buffer-full stall happen; it is counted.
// A last event with no gaps and the output always ready checks the rate: one
// TDC word taken every two clocks, and tdc_trigger one clock after the
// command is taken.
module tb_tcpu_readout;
  import tof_pkg::*;
  localparam int NC = 2;
  logic clk = 0, rst_n = 0;
  logic cmd_valid, cmd_is_readout, cmd_pop, tdc_trigger, out_valid, out_ready;
  trg_word_t cmd_word;
  logic [NC-1:0] tdc_valid, tdc_last, tdc_ready;
  logic [NC-1:0][31:0] tdc_data;
  fword_t out_word;
  logic [4:0] buf_level;
  logic [15:0] events_done;
  int checks = 0, failures = 0;
  fword_t exp_q[$];
  logic [32:0] cab_q[NC][$];   // {last, data}
  int n_stall = 0, n_trig = 0;
  bit rate_mode = 0;
  longint cyc = 0, pop_t = -1, trig_t = -1;
  longint acc_t[$];

  tcpu_readout #(.NCABLES(NC), .BUF_DEPTH(16)) dut (.clk, .rst_n, .tray_id(2'd2),
    .cmd_valid, .cmd_word, .cmd_is_readout, .cmd_pop, .tdc_trigger, .tdc_valid, .tdc_data,
    .tdc_last, .tdc_ready, .out_valid, .out_word, .out_ready, .buf_level, .events_done);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  // cable models: present queued words with random gaps
  always_comb begin
    for (int c = 0; c < NC; c++) begin
      tdc_valid[c] = cab_q[c].size() > 0 && gap[c];
      tdc_data[c]  = cab_q[c].size() > 0 ? cab_q[c][0][31:0] : '0;
      tdc_last[c]  = cab_q[c].size() > 0 ? cab_q[c][0][32] : 1'b0;
    end
  end
  logic [NC-1:0] gap;
  always @(negedge clk) for (int c = 0; c < NC; c++) gap[c] = rate_mode || ($urandom_range(0, 3) != 0);
  always @(posedge clk) begin
    cyc++;
    if (rate_mode && tdc_valid[0] && tdc_ready[0]) acc_t.push_back(cyc);
    if (rate_mode && cmd_pop) pop_t = cyc;
    if (rate_mode && tdc_trigger) trig_t = cyc;
    for (int c = 0; c < NC; c++)
      if (tdc_valid[c] && tdc_ready[c]) void'(cab_q[c].pop_front());
    if (tdc_trigger) n_trig++;
    if (buf_level == 5'd16 && |tdc_valid && !(|tdc_ready)) n_stall++;
  end

  // output checker
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    if (exp_q.size() == 0) check(0, "unexpected output word");
    else begin
      check(out_word == exp_q[0], $sformatf("word %h expected %h", out_word, exp_q[0]));
      void'(exp_q.pop_front());
    end
  end

  initial begin
    trg_word_t w;
    automatic int nev = 0, nfwd = 0;
    cmd_valid = 0; cmd_word = '0; cmd_is_readout = 0; out_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    fork
      forever begin @(negedge clk); out_ready = rate_mode || ($urandom_range(0, 2) == 0); end
    join_none
    for (int e = 0; e < 60; e++) begin
      bit ro;
      ro = (e % 3 != 2);
      w = '{trg_cmd: ro ? TRG_L0 : TRG_L2_ACCEPT, daq_cmd: 4'($urandom()), token: 12'(e * 37)};
      exp_q.push_back(soe_word(ro ? KIND_DATA : KIND_TRIG, 2'd2));
      exp_q.push_back('{ctrl: 1'b0, data: w});
      if (ro) begin
        for (int c = 0; c < NC; c++) begin
          int n;
          n = 1 + $urandom_range(0, 6);
          for (int k = 0; k < n; k++) begin
            logic [31:0] d;
            d = $urandom();
            cab_q[c].push_back({k == n - 1, d});
            exp_q.push_back('{ctrl: 1'b0, data: {TAG_TDC_HI, d[31:16]}});
            exp_q.push_back('{ctrl: 1'b0, data: {TAG_TDC_LO, d[15:0]}});
          end
        end
        nev++;
      end else nfwd++;
      exp_q.push_back(eoe_word());
      @(negedge clk);
      cmd_valid = 1; cmd_word = w; cmd_is_readout = ro;
      @(posedge clk);
      while (!cmd_pop) @(posedge clk);
      @(negedge clk);
      cmd_valid = 0;
      repeat ($urandom_range(0, 20)) @(negedge clk);
    end
    while (exp_q.size() > 0) @(posedge clk);
    // rate check
    repeat (5) @(posedge clk);
    @(negedge clk); rate_mode = 1;
    w = '{trg_cmd: TRG_L0, daq_cmd: 4'd1, token: 12'd999};
    exp_q.push_back(soe_word(KIND_DATA, 2'd2));
    exp_q.push_back('{ctrl: 1'b0, data: w});
    for (int c = 0; c < NC; c++) begin
      int n;
      n = (c == 0) ? 12 : 1;
      for (int k = 0; k < n; k++) begin
        logic [31:0] d;
        d = $urandom();
        cab_q[c].push_back({k == n - 1, d});
        exp_q.push_back('{ctrl: 1'b0, data: {TAG_TDC_HI, d[31:16]}});
        exp_q.push_back('{ctrl: 1'b0, data: {TAG_TDC_LO, d[15:0]}});
      end
    end
    exp_q.push_back(eoe_word());
    nev++;
    cmd_valid = 1; cmd_word = w; cmd_is_readout = 1;
    @(posedge clk);
    while (!cmd_pop) @(posedge clk);
    @(negedge clk);
    cmd_valid = 0;
    while (exp_q.size() > 0) @(posedge clk);
    repeat (5) @(posedge clk);
    check(trig_t == pop_t + 1, $sformatf("tdc_trigger %0d clocks after the command", trig_t - pop_t));
    check(acc_t.size() == 12, "all cable words taken");
    for (int i = 1; i < acc_t.size(); i++)
      check(acc_t[i] - acc_t[i-1] == 2, $sformatf("TDC word %0d taken %0d clocks after the previous", i, acc_t[i] - acc_t[i-1]));
    check(events_done == 16'(nev + nfwd), "event counter");
    check(n_trig == nev, $sformatf("one TDC trigger per readout (%0d vs %0d)", n_trig, nev));
    check(n_stall > 0, "buffer-full stall happened");
    $display("readouts=%0d forwards=%0d stall_cycles=%0d", nev, nfwd, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
