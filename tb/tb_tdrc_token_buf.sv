// tb_tdrc_token_buf: writes events to random tokens of a full-size region
// (4096 locations x 256 words) and reads them back; checks the word count,
// the invalidate flag being cleared by a write and set by either invalidate
// port, the in-use error (with token) on a write to a location whose flag is
// missing and that the old content survives it, the overflow error past 256
// words, the one-word start+data+end write used by the header region, and
// processor writes: stored a cycle later when the fibre side is idle, held
// back (host_busy) while fibre words are being written, count and flag kept.
// Last, every one of the 4096 locations is filled, so that all tokens are
// outstanding at once; each must then refuse a second write, and all must be
// free again after being invalidated.
module tb_tdrc_token_buf;
  logic clk = 0, rst_n = 0;
  logic wr_start, wr_data_valid, wr_end;
  logic [11:0] wr_token, rd_token;
  logic [19:0] wr_data, rd_data;
  logic [1:0] inv_valid;
  logic [1:0][11:0] inv_token;
  logic [7:0] rd_index;
  logic [8:0] rd_count;
  logic rd_free, err_in_use, err_overflow;
  logic host_wr, host_busy;
  logic [19:0] host_data;
  int busy_cycles;
  logic [11:0] err_token;
  int checks = 0, failures = 0;

  tdrc_token_buf dut (.clk, .rst_n, .wr_start, .wr_token, .wr_data_valid, .wr_data, .wr_end,
    .inv_valid, .inv_token, .rd_token, .rd_index, .rd_data, .rd_count, .rd_free,
    .host_wr, .host_data, .host_busy,
    .err_in_use, .err_overflow, .err_token);
  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic logic [19:0] pat(input int tok, input int i, input int gen);
    return 20'(tok * 977 + i * 13 + gen * 55555);
  endfunction

  task automatic write_event(input int tok, input int n, input int gen, output bit e_use, output bit e_ovf);
    e_use = 0; e_ovf = 0;
    @(negedge clk); wr_start = 1; wr_token = 12'(tok);
    @(negedge clk); wr_start = 0;
    if (err_in_use) e_use = 1;
    for (int i = 0; i < n; i++) begin
      wr_data_valid = 1; wr_data = pat(tok, i, gen);
      @(negedge clk);
      if (err_overflow) e_ovf = 1;
    end
    wr_data_valid = 0; wr_end = 1;
    @(negedge clk); wr_end = 0;
    if (err_overflow) e_ovf = 1;
  endtask

  task automatic read(input int tok, input int i);
    @(negedge clk); rd_token = 12'(tok); rd_index = 8'(i);
    @(negedge clk);
  endtask

  task automatic invalidate(input int port, input int tok);
    @(negedge clk); inv_valid[port] = 1; inv_token[port] = 12'(tok);
    @(negedge clk); inv_valid = '0;
  endtask

  initial begin
    int toks[20], lens[20];
    bit eu, eo;
    wr_start = 0; wr_data_valid = 0; wr_end = 0; wr_token = 0; wr_data = 0;
    inv_valid = 0; inv_token = '0; rd_token = 0; rd_index = 0;
    host_wr = 0; host_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    read(4095, 0); check(rd_free == 1, "all locations free after reset");
    for (int k = 0; k < 20; k++) begin
      toks[k] = (k == 0) ? 4095 : (k * 211 + 5) % 4096;
      lens[k] = (k == 1) ? 256 : $urandom_range(0, 40);
      write_event(toks[k], lens[k], 0, eu, eo);
      check(!eu && !eo, "no error on a free location");
    end
    for (int k = 0; k < 20; k++) begin
      read(toks[k], 0);
      check(rd_count == 9'(lens[k]) && rd_free == 0, $sformatf("count %0d of token %0d", rd_count, toks[k]));
      for (int i = 0; i < lens[k]; i += (lens[k] > 50 ? 17 : 1)) begin
        read(toks[k], i);
        check(rd_data == pat(toks[k], i, 0), "data read back");
      end
    end
    // write to a location still in use: error, old content kept
    write_event(toks[2], 5, 1, eu, eo);
    check(eu == 1, "in-use error");
    check(err_token == 12'(toks[2]), "error token");
    read(toks[2], 0);
    check(rd_count == 9'(lens[2]) && (lens[2] == 0 || rd_data == pat(toks[2], 0, 0)), "old content kept");
    // invalidate (abort port), then reuse
    invalidate(0, toks[2]);
    read(toks[2], 0); check(rd_free == 1, "flag set by port 0");
    write_event(toks[2], 7, 2, eu, eo);
    check(!eu, "reuse after invalidate");
    read(toks[2], 6); check(rd_data == pat(toks[2], 6, 2) && rd_count == 9'd7, "new content");
    invalidate(1, toks[3]);
    read(toks[3], 0); check(rd_free == 1, "flag set by port 1");
    // overflow
    invalidate(0, toks[1]);
    write_event(toks[1], 260, 3, eu, eo);
    check(eo == 1, "overflow error past 256 words");
    read(toks[1], 255); check(rd_data == pat(toks[1], 255, 3) && rd_count == 9'd256, "256 words kept");
    // one-cycle write (start + data + end together)
    @(negedge clk); wr_start = 1; wr_data_valid = 1; wr_end = 1; wr_token = 12'd77; wr_data = 20'hABCDE;
    @(negedge clk); wr_start = 0; wr_data_valid = 0; wr_end = 0;
    read(77, 0); check(rd_data == 20'hABCDE && rd_count == 9'd1 && rd_free == 0, "single-cycle write");
    // processor write with the fibre side idle: stored after one cycle
    @(negedge clk); host_wr = 1; host_data = 20'h13579; rd_token = 12'(toks[0]); rd_index = 8'd2;
    @(negedge clk); host_wr = 0;
    check(host_busy == 1, "holding register loaded");
    @(negedge clk);
    check(host_busy == 0, "processor word stored one cycle later");
    read(toks[0], 2);
    check(rd_data == 20'h13579 && rd_count == 9'(lens[0]) && rd_free == 0, "processor write: word changed, count and flag kept");
    read(toks[0], 3);
    check(lens[0] <= 3 || rd_data == pat(toks[0], 3, 0), "neighbouring word untouched");
    // processor write during a fibre event: waits until the fibre words stop
    @(negedge clk); wr_start = 1; wr_token = 12'd500;
    @(negedge clk); wr_start = 0;
    for (int i = 0; i < 12; i++) begin
      wr_data_valid = 1; wr_data = pat(500, i, 4);
      if (i == 2) begin host_wr = 1; host_data = 20'h2468A; rd_token = 12'd900; rd_index = 8'd9; end
      @(negedge clk);
      host_wr = 0;
    end
    check(host_busy == 1, "processor word held while fibre words arrive");
    wr_data_valid = 0; wr_end = 1;
    busy_cycles = 0;
    @(negedge clk); wr_end = 0;
    while (host_busy && busy_cycles < 10) begin busy_cycles++; @(negedge clk); end
    check(busy_cycles == 0, "processor word stored in the first free cycle");
    read(900, 9); check(rd_data == 20'h2468A, "held processor word stored");
    for (int i = 0; i < 12; i++) begin
      read(500, i); check(rd_data == pat(500, i, 4), "fibre words not disturbed by the processor write");
    end
    read(500, 0); check(rd_count == 9'd12, "fibre event count");
    // all 4096 tokens outstanding at once
    begin
      int n_err, n_bad, n_free;
      n_err = 0; n_bad = 0; n_free = 0;
      for (int t = 0; t < 4096; t++) begin
        invalidate(t % 2, t);
        write_event(t, 1 + t % 3, 5, eu, eo);
        if (eu || eo) n_err++;
      end
      check(n_err == 0, "every location accepts one event");
      for (int t = 0; t < 4096; t++) begin
        read(t, t % 3);
        if (rd_free || rd_count != 9'(1 + t % 3) || rd_data != pat(t, t % 3, 5)) n_bad++;
      end
      check(n_bad == 0, $sformatf("all 4096 locations hold their event (%0d bad)", n_bad));
      n_err = 0;
      for (int t = 0; t < 4096; t += 1) begin
        write_event(t, 1, 6, eu, eo);
        if (eu) n_err++;
      end
      check(n_err == 4096, $sformatf("every outstanding token refuses a second write (%0d)", n_err));
      for (int t = 0; t < 4096; t++) invalidate(t % 2, t);
      for (int t = 0; t < 4096; t++) begin read(t, 0); if (rd_free) n_free++; end
      check(n_free == 4096, "all locations free after invalidation");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
