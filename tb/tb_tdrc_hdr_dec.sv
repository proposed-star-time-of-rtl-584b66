// tb_tdrc_hdr_dec: feeds data events of all four trays, trigger command events
// with extra words, and malformed framing, and checks the region write
// strobes, token, data, header write, trigger decoder output and the framing
// error strobe, each one cycle after its input word.
module tb_tdrc_hdr_dec;
  import tof_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid;
  fword_t in_word;
  logic [3:0] wr_start, wr_data_valid, wr_end;
  token_t wr_token;
  logic [19:0] wr_data;
  logic hdr_wr, trg_valid, frame_err;
  trg_word_t trg_word;
  logic [15:0] data_events, trig_events, extra_words;
  int checks = 0, failures = 0;

  tdrc_hdr_dec dut (.clk, .rst_n, .in_valid, .in_word, .wr_start, .wr_data_valid, .wr_end,
    .wr_token, .wr_data, .hdr_wr, .trg_valid, .trg_word, .frame_err,
    .data_events, .trig_events, .extra_words);
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

  // send one word; sample the outputs it causes
  task automatic send(input fword_t w);
    @(negedge clk); in_valid = 1; in_word = w;
    @(negedge clk); in_valid = 0;
    repeat ($urandom_range(0, 2)) @(negedge clk);
  endtask

  // expectations are checked in a monitor using a reference decoder state
  logic [3:0] e_start, e_data, e_end; logic e_hdr, e_trg, e_err;
  task automatic expect_none(); e_start = 0; e_data = 0; e_end = 0; e_hdr = 0; e_trg = 0; e_err = 0; endtask
  int n_words = 0;
  task automatic sendx(input fword_t w, input logic [3:0] s, input logic [3:0] d, input logic [3:0] e,
                       input logic h, input logic t, input logic er);
    @(negedge clk); in_valid = 1; in_word = w;
    @(negedge clk); in_valid = 0;
    check(wr_start == s && wr_data_valid == d && wr_end == e && hdr_wr == h && trg_valid == t && frame_err == er,
          $sformatf("strobes for word %0d: %b %b %b %b %b %b", n_words, wr_start, wr_data_valid, wr_end, hdr_wr, trg_valid, frame_err));
    if (|s || h) check(wr_token == w.data[11:0] && wr_data == w.data, "token and header word");
    if (|d) check(wr_data == w.data, "payload word");
    if (t) check(trg_word == w.data, "trigger word");
    n_words++;
    @(negedge clk);
    check(wr_start == 0 && wr_data_valid == 0 && wr_end == 0 && hdr_wr == 0 && trg_valid == 0 && frame_err == 0, "strobes last one cycle");
  endtask

  initial begin
    automatic int nd = 0, nt = 0;
    in_valid = 0; in_word = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int e = 0; e < 100; e++) begin
      int tray;
      trg_word_t tw;
      tray = e % 4;
      tw = '{trg_cmd: (e % 5 == 4) ? TRG_ABORT : TRG_L0, daq_cmd: 4'(e), token: 12'($urandom())};
      if (e % 5 != 4) begin
        sendx(soe_word(KIND_DATA, 2'(tray)), 0, 0, 0, 0, 0, 0);
        sendx('{ctrl: 0, data: tw}, 4'(1 << tray), 0, 0, 1, 0, 0);
        for (int k = 0; k < $urandom_range(0, 5); k++)
          sendx('{ctrl: 0, data: 20'($urandom())}, 0, 4'(1 << tray), 0, 0, 0, 0);
        sendx(eoe_word(), 0, 0, 4'(1 << tray), 0, 0, 0);
        nd++;
      end else begin
        sendx(soe_word(KIND_TRIG, 2'(tray)), 0, 0, 0, 0, 0, 0);
        sendx('{ctrl: 0, data: tw}, 0, 0, 0, 0, 1, 0);
        sendx('{ctrl: 0, data: 20'h12345}, 0, 0, 0, 0, 0, 0);   // extra trigger info
        sendx(eoe_word(), 0, 0, 0, 0, 0, 0);
        nt++;
      end
    end
    // malformed: payload outside an event, EOE right after SOE, SOE inside an event
    sendx('{ctrl: 0, data: 20'h00001}, 0, 0, 0, 0, 0, 1);
    sendx(soe_word(KIND_DATA, 2'd1), 0, 0, 0, 0, 0, 0);
    sendx(eoe_word(), 0, 0, 0, 0, 0, 1);
    sendx(soe_word(KIND_DATA, 2'd1), 0, 0, 0, 0, 0, 0);
    sendx('{ctrl: 0, data: 20'h40007}, 4'b0010, 0, 0, 1, 0, 0);
    sendx(soe_word(KIND_DATA, 2'd3), 0, 0, 0, 0, 0, 1);
    sendx('{ctrl: 0, data: 20'h40008}, 4'b1000, 0, 0, 1, 0, 0);
    sendx(eoe_word(), 0, 0, 4'b1000, 0, 0, 0);
    check(data_events == 16'(nd + 2) && trig_events == 16'(nt), "event counters");
    check(extra_words == 16'(nt), "extra trigger words counted");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
