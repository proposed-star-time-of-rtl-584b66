// tb_tdrc: end-to-end test of the receiver card. Events are bit-banged onto
// the serial line in the fibre framing; the VME side then reads them back.
// Checks: data of every tray region and the header region by token; word
// counts; L2-accept -> token FIFO and interrupt, acknowledge vector; abort ->
// locations freed; VME invalidation and reuse of a token; in-use error when a
// token location is written without being invalidated; region overflow past
// TOKEN_WORDS; trigger FIFO contents when enabled and nothing when disabled;
// framing error; processor writes into a tray region and the header region,
// read back with the count and flag unchanged.
module tb_tdrc;
  import tof_pkg::*;
  localparam int TW = 256;
  logic clk = 0, rst_n = 0;
  logic sdi, vme_stb, vme_iack, vme_we, vme_ack, irq;
  logic [23:0] vme_addr;
  logic [31:0] vme_wdata, vme_rdata;
  int checks = 0, failures = 0;

  tdrc dut (.clk, .rst_n, .sdi, .vme_stb, .vme_iack, .vme_we, .vme_addr, .vme_wdata, .vme_ack, .vme_rdata, .irq);
  always #5 clk = ~clk;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic send(input fword_t w);
    @(negedge clk); sdi = 1;
    for (int b = 20; b >= 0; b--) begin @(negedge clk); sdi = w[b]; end
    @(negedge clk); sdi = 0;
  endtask

  function automatic logic [19:0] pat(input int tray, input int tok, input int i);
    return 20'(tray * 131071 + tok * 31 + i * 7);
  endfunction

  task automatic data_event(input int tray, input trg_word_t tw, input int n);
    send(soe_word(KIND_DATA, 2'(tray)));
    send('{ctrl: 0, data: tw});
    for (int i = 0; i < n; i++) send('{ctrl: 0, data: pat(tray, int'(tw.token), i)});
    send(eoe_word());
    repeat (2) @(posedge clk);   // deserializer, header decoder, region commit
  endtask

  task automatic trig_event(input trg_word_t tw);
    send(soe_word(KIND_TRIG, 2'd0));
    send('{ctrl: 0, data: tw});
    send(eoe_word());
  endtask

  task automatic vme(input bit we, input logic [23:0] a, input logic [31:0] d, output logic [31:0] r);
    @(negedge clk); vme_stb = 1; vme_we = we; vme_addr = a; vme_wdata = d;
    @(negedge clk); vme_stb = 0;
    @(negedge clk);
    check(vme_ack == 1, "VME ack");
    r = vme_rdata;
  endtask

  // region write: acknowledged once the region has stored the word
  task automatic vme_region_wr(input logic [23:0] a, input logic [31:0] d);
    int n;
    @(negedge clk); vme_stb = 1; vme_we = 1; vme_addr = a; vme_wdata = d;
    @(negedge clk); vme_stb = 0;
    n = 1;
    while (!vme_ack && n < 50) begin @(negedge clk); n++; end
    check(n == 3, $sformatf("region write acknowledged after %0d cycles", n));
  endtask

  function automatic logic [23:0] ra(input int sel, input int tok, input int idx);
    return {4'(sel), 12'(tok), 8'(idx)};
  endfunction
  localparam logic [23:0] R_TOK = 24'h800000, R_TRG = 24'h800001, R_STAT = 24'h800002,
                          R_CTRL = 24'h800003, R_INV = 24'h800004, R_ERRTOK = 24'h800005;

  int lens[4][3];
  task automatic check_event(input int tok, input int k, input trg_word_t tw);
    logic [31:0] r;
    for (int t = 0; t < 4; t++) begin
      vme(0, ra(5, tok, t), 0, r);
      check(r[15:0] == 16'(lens[t][k]) && r[31] == 0, $sformatf("tray %0d token %0d count %0d", t, tok, r[15:0]));
      for (int i = 0; i < lens[t][k]; i += 3) begin
        vme(0, ra(t, tok, i), 0, r);
        check(r == 32'(pat(t, tok, i)), "event data");
      end
    end
    vme(0, ra(4, tok, 0), 0, r);
    check(r == 32'(tw), "header region holds the trigger word");
  endtask

  initial begin
    logic [31:0] r;
    trg_word_t tw[3];
    sdi = 0; vme_stb = 0; vme_iack = 0; vme_we = 0; vme_addr = 0; vme_wdata = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    vme(1, R_CTRL, 32'h3, r);                         // trigger FIFO and interrupt on
    for (int k = 0; k < 3; k++) begin
      tw[k] = '{trg_cmd: TRG_L0, daq_cmd: 4'(k + 1), token: 12'(100 + 1000 * k)};
      for (int t = 0; t < 4; t++) begin
        lens[t][k] = $urandom_range(0, 30);
        data_event(t, tw[k], lens[t][k]);
      end
    end
    check(irq == 0, "no interrupt before an L2-accept");
    trig_event('{trg_cmd: TRG_L2_ACCEPT, daq_cmd: 4'd1, token: 12'(100)});
    trig_event('{trg_cmd: TRG_ABORT,     daq_cmd: 4'd2, token: 12'(1100)});
    trig_event('{trg_cmd: TRG_L2_ACCEPT, daq_cmd: 4'd3, token: 12'(2100)});
    repeat (5) @(posedge clk);
    check(irq == 1, "interrupt on token FIFO not empty");
    @(negedge clk); vme_iack = 1; @(negedge clk); vme_iack = 0; @(negedge clk);
    check(vme_ack && vme_rdata == 32'hA5, "acknowledge vector");
    // the VME processor's job: read token, read fragments, invalidate
    for (int k = 0; k < 3; k += 2) begin
      vme(0, R_TOK, 0, r);
      check(r == 32'(100 + 1000 * k), $sformatf("token FIFO gives %0d", r));
      check_event(100 + 1000 * k, k, tw[k]);
      vme(1, R_INV, 32'(100 + 1000 * k), r);
    end
    vme(0, R_TOK, 0, r); check(r[31] == 1, "token FIFO empty");
    check(irq == 0, "interrupt cleared");
    for (int k = 0; k < 3; k++) begin
      vme(0, ra(5, 100 + 1000 * k, 0), 0, r);
      check(r[31] == 1, $sformatf("token %0d free again", 100 + 1000 * k));
    end
    // trigger FIFO: the three commands in order
    vme(0, R_TRG, 0, r); check(r == 32'({TRG_L2_ACCEPT, 4'd1, 12'd100}), "trigger FIFO 1");
    vme(0, R_TRG, 0, r); check(r == 32'({TRG_ABORT, 4'd2, 12'd1100}), "trigger FIFO 2");
    vme(0, R_TRG, 0, r); check(r == 32'({TRG_L2_ACCEPT, 4'd3, 12'd2100}), "trigger FIFO 3");
    vme(0, R_TRG, 0, r); check(r[31] == 1, "trigger FIFO empty");
    // reuse of a freed token
    lens[1][0] = 9;
    data_event(1, tw[0], 9);
    vme(0, ra(5, 100, 1), 0, r); check(r == {1'b0, 15'b0, 16'd9}, $sformatf("token reused %h", r));
    vme(0, R_STAT, 0, r); check(r == 0, "no errors yet");
    // in-use error: the same token again without invalidation
    data_event(1, tw[0], 4);
    vme(0, R_STAT, 0, r); check(r[7:0] == 8'b00000010, $sformatf("in-use error status %h", r));
    vme(0, R_ERRTOK, 0, r); check(r == {17'b0, 3'd1, 12'd100}, "error token");
    vme(0, ra(5, 100, 1), 0, r); check(r[15:0] == 16'd9, "old fragment kept");
    // overflow of a location
    data_event(2, '{trg_cmd: TRG_L0, daq_cmd: 4'd0, token: 12'd7}, TW + 3);
    vme(0, R_STAT, 0, r); check(r[15:8] == 8'b00000100, "overflow status");
    vme(0, ra(5, 7, 2), 0, r); check(r[15:0] == 16'(TW), "overflow keeps TOKEN_WORDS words");
    vme(1, R_STAT, 32'h0003_FFFF, r);
    // trigger FIFO disabled
    vme(1, R_CTRL, 32'h2, r);
    trig_event('{trg_cmd: TRG_ABORT, daq_cmd: 4'd0, token: 12'd7});
    vme(0, R_TRG, 0, r); check(r[31] == 1, "trigger FIFO stays empty while disabled");
    vme(0, ra(5, 7, 2), 0, r); check(r[31] == 1, "abort frees the token");
    // processor writes into a tray region and the header region
    vme_region_wr(ra(1, 100, 3), 32'h000A_BC12);
    vme(0, ra(1, 100, 3), 0, r); check(r == 32'h000A_BC12, "processor word in tray region");
    vme(0, ra(5, 100, 1), 0, r); check(r == {1'b0, 15'b0, 16'd9}, "count and flag unchanged by the write");
    vme_region_wr(ra(4, 55, 0), 32'h0007_7777);
    vme(0, ra(4, 55, 0), 0, r); check(r == 32'h0007_7777, "processor word in header region");
    // framing error
    send('{ctrl: 0, data: 20'h1});
    vme(0, R_STAT, 0, r); check(r[17] == 1, "framing error");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
