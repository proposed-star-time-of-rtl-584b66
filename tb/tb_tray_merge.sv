// tb_tray_merge: four sources send random events (SOE, words, EOE) with random
// gaps while the output stalls at random. Checks that every output event is
// whole and uninterrupted (its words all come from the tray named in its
// SOE), that each source's events arrive in order and complete, and that the
// grant moved between sources (arbitration happened with several pending).
module tb_tray_merge;
  import tof_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [3:0] in_valid, in_ready;
  fword_t [3:0] in_word;
  logic out_valid, out_ready;
  fword_t out_word;
  int checks = 0, failures = 0;
  fword_t src_q[4][$];
  fword_t exp_q[4][$];
  logic [3:0] gap;

  tray_merge dut (.clk, .rst_n, .in_valid, .in_word, .in_ready, .out_valid, .out_word, .out_ready);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  always_comb for (int s = 0; s < 4; s++) begin
    in_valid[s] = src_q[s].size() > 0 && gap[s];
    in_word[s]  = src_q[s].size() > 0 ? src_q[s][0] : '0;
  end
  always @(negedge clk) begin
    for (int s = 0; s < 4; s++) gap[s] = ($urandom_range(0, 4) != 0);
    out_ready = ($urandom_range(0, 3) != 0);
  end

  int cur = -1, switches = 0, last_src = -1, contended = 0;
  always @(posedge clk) if (rst_n) begin
    int pend;
    pend = 0;
    for (int s = 0; s < 4; s++) pend += (src_q[s].size() > 0);
    if (pend > 1) contended++;
    for (int s = 0; s < 4; s++) if (in_valid[s] && in_ready[s]) void'(src_q[s].pop_front());
    if (out_valid && out_ready) begin
      if (cur < 0) begin
        check(out_word.ctrl && out_word.data[19:16] == KIND_DATA, "event starts with SOE");
        cur = int'(out_word.data[15:14]);
        if (cur != last_src) switches++;
      end
      if (exp_q[cur].size() == 0) check(0, "extra word");
      else begin
        check(out_word == exp_q[cur][0], $sformatf("word from tray %0d in order", cur));
        void'(exp_q[cur].pop_front());
      end
      if (out_word.ctrl && out_word.data[19:16] == KIND_EOE) begin
        last_src = cur;
        cur = -1;
      end
    end
  end

  initial begin
    for (int s = 0; s < 4; s++) src_q[s] = {};
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int e = 0; e < 40; e++)
      for (int s = 0; s < 4; s++) begin
        fword_t w;
        w = soe_word(KIND_DATA, 2'(s));
        src_q[s].push_back(w); exp_q[s].push_back(w);
        for (int k = 0; k < $urandom_range(1, 8); k++) begin
          w = '{ctrl: 1'b0, data: {4'(s), 16'(e * 100 + k)}};
          src_q[s].push_back(w); exp_q[s].push_back(w);
        end
        w = eoe_word();
        src_q[s].push_back(w); exp_q[s].push_back(w);
      end
    for (int s = 0; s < 4; s++) while (exp_q[s].size() > 0) @(posedge clk);
    check(switches > 100, $sformatf("grant rotated (%0d switches)", switches));
    check(contended > 0, "several trays pending at once");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
