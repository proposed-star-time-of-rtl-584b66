// tb_tdrc_vme: drives the VME interface alone, with the region, FIFO and error
// inputs driven here. Checks: region reads route the address to rd_token and
// rd_index and return the selected region's word two cycles after the strobe;
// the word-count read; token and trigger FIFO pops (data, empty bit, one pop
// per read); control register; invalidate write; sticky error bits, last
// error token and write-1-to-clear; irq only while enabled and the token FIFO
// is not empty; the acknowledge cycle returning the vector; region writes
// reaching only the addressed region, acknowledged three cycles after the
// strobe, or later while the region holds the word back.
module tb_tdrc_vme;
  import tof_pkg::*;
  logic clk = 0, rst_n = 0;
  logic vme_stb, vme_iack, vme_we, vme_ack, irq;
  logic [23:0] vme_addr;
  logic [31:0] vme_wdata, vme_rdata;
  token_t rd_token, inv_token, tok_dout;
  logic [7:0] rd_index;
  logic [4:0][19:0] rd_data;
  logic [4:0][8:0] rd_count;
  logic [4:0] rd_free, err_in_use, err_overflow;
  logic [4:0][11:0] err_token;
  logic inv_valid, tok_empty, tok_pop, trgf_empty, trgf_pop, trig_fifo_en, frame_err, fifo_ovf;
  logic [12:0] tok_count, trgf_count;
  logic [4:0] host_wr, host_busy;
  int busy_len = 1, busy_left[5], n_host_wr[5], n_wr_other = 0;
  trg_word_t trgf_dout;
  int checks = 0, failures = 0;

  tdrc_vme dut (.*);
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

  // region model: data is a function of the registered address
  logic [11:0] tok_q; logic [7:0] idx_q;
  always @(posedge clk) begin tok_q <= rd_token; idx_q <= rd_index; end
  always_comb for (int r = 0; r < 5; r++) begin
    rd_data[r]  = {4'(r), 4'(idx_q), tok_q};
    rd_count[r] = 9'(tok_q[7:0] + r);
    rd_free[r]  = tok_q[0];
  end
  // holding-register model: busy for busy_len cycles after a write
  always @(posedge clk) for (int r = 0; r < 5; r++) begin
    if (!rst_n) begin busy_left[r] <= 0; n_host_wr[r] <= 0; end
    else if (host_wr[r]) begin busy_left[r] <= busy_len; n_host_wr[r] <= n_host_wr[r] + 1; end
    else if (busy_left[r] > 0) busy_left[r] <= busy_left[r] - 1;
  end
  always_comb for (int r = 0; r < 5; r++) host_busy[r] = busy_left[r] > 0;
  always @(posedge clk) if (rst_n && host_wr != 0 && !(vme_stb && vme_we)) n_wr_other++;

  int n_tok_pop = 0, n_trg_pop = 0, n_inv = 0;
  always @(posedge clk) if (rst_n) begin
    if (tok_pop) n_tok_pop++;
    if (trgf_pop) n_trg_pop++;
    if (inv_valid) begin n_inv++; check(inv_token == 12'h5A5, $sformatf("invalidate token %h at %0t", inv_token, $time)); end
  end

  task automatic cyc(input bit we, input logic [23:0] a, input logic [31:0] d, output logic [31:0] r);
    @(negedge clk); vme_stb = 1; vme_we = we; vme_addr = a; vme_wdata = d;
    @(negedge clk); vme_stb = 0;
    check(vme_ack == 0, "no ack after one cycle");
    @(negedge clk);
    check(vme_ack == 1, "ack two cycles after the strobe");
    r = vme_rdata;
    @(negedge clk);
    check(vme_ack == 0, "ack lasts one cycle");
  endtask

  initial begin
    logic [31:0] r;
    automatic int busy_len_v[10] = '{1, 1, 1, 1, 1, 3, 2, 5, 1, 4};
    vme_stb = 0; vme_iack = 0; vme_we = 0; vme_addr = 0; vme_wdata = 0;
    tok_dout = 12'h123; tok_empty = 1; tok_count = 0; trgf_dout = 20'hABCDE; trgf_empty = 0; trgf_count = 13'd7;
    err_in_use = 0; err_overflow = 0; err_token = '0; frame_err = 0; fifo_ovf = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 100; i++) begin
      int s, t, x;
      s = $urandom_range(0, 4); t = $urandom_range(0, 4095); x = $urandom_range(0, 255);
      cyc(0, {4'(s), 12'(t), 8'(x)}, 0, r);
      check(r == 32'({4'(s), 4'(x), 12'(t)}), $sformatf("region %0d read %h", s, r));
      cyc(0, {4'h5, 12'(t), 8'(s)}, 0, r);
      check(r == {t[0], 15'b0, 16'(t[7:0] + s)}, "count read");
    end
    check(host_wr == 0 && n_wr_other == 0, "reads write no region");
    // region writes
    foreach (busy_len_v[i]) begin
      int s, lat;
      busy_len = busy_len_v[i]; s = i % 5;
      @(negedge clk); vme_stb = 1; vme_we = 1; vme_addr = {4'(s), 12'h321, 8'h45}; vme_wdata = 32'h000F_EDCB; #1;
      check(host_wr == 5'(1 << s) && rd_token == 12'h321 && rd_index == 8'h45, "write routed to one region");
      @(negedge clk); vme_stb = 0;
      lat = 1;
      while (!vme_ack && lat < 20) begin @(negedge clk); lat++; end
      check(lat == 2 + busy_len, $sformatf("write ack after %0d cycles with the word held %0d", lat, busy_len));
      check(n_host_wr[s] == 1 + i / 5, "one write strobe per cycle");
      @(negedge clk); check(vme_ack == 0, "write ack lasts one cycle");
    end
    tok_empty = 0; #1;
    check(irq == 0, "no irq while disabled, even with tokens waiting");
    tok_empty = 1;
    cyc(1, {4'h8, 16'h0, 4'd3}, 32'h3, r);
    check(trig_fifo_en == 1, "trigger FIFO enable");
    cyc(0, {4'h8, 16'h0, 4'd3}, 0, r); check(r == 32'h3, "control read back");
    check(irq == 0, "no irq while token FIFO empty");
    tok_empty = 0; tok_count = 13'd2; #1;
    check(irq == 1, "irq on not empty");
    @(negedge clk); vme_iack = 1; @(negedge clk); vme_iack = 0; @(negedge clk);
    check(vme_ack == 1 && vme_rdata == 32'hA5, "interrupt acknowledge vector");
    @(negedge clk);
    cyc(0, {4'h8, 16'h0, 4'd0}, 0, r); check(r == 32'h123, "token FIFO read");
    check(n_tok_pop == 1, "one token pop");
    tok_empty = 1; #1; check(irq == 0, "irq drops when empty");
    cyc(0, {4'h8, 16'h0, 4'd0}, 0, r); check(r[31] == 1 && n_tok_pop == 1, "empty token FIFO read does not pop");
    cyc(0, {4'h8, 16'h0, 4'd1}, 0, r); check(r == 32'hABCDE && n_trg_pop == 1, "trigger FIFO read");
    cyc(0, {4'h8, 16'h0, 4'd6}, 0, r); check(r == {16'd7, 16'd2}, "FIFO levels");
    cyc(1, {4'h8, 16'h0, 4'd4}, 32'h5A5, r); check(n_inv == 1, "invalidate write");
    // errors
    @(negedge clk); err_in_use = 5'b00100; err_token[2] = 12'h777; frame_err = 1;
    @(negedge clk); err_in_use = 0; frame_err = 0; err_overflow = 5'b00010;
    @(negedge clk); err_overflow = 0;
    cyc(0, {4'h8, 16'h0, 4'd2}, 0, r); check(r == {14'b0, 1'b1, 1'b0, 8'b00000010, 8'b00000100}, $sformatf("status %h", r));
    cyc(0, {4'h8, 16'h0, 4'd5}, 0, r); check(r == {17'b0, 3'd2, 12'h777}, "last error token");
    cyc(1, {4'h8, 16'h0, 4'd2}, 32'h0002_0004, r);
    cyc(0, {4'h8, 16'h0, 4'd2}, 0, r); check(r == {14'b0, 1'b0, 1'b0, 8'b00000010, 8'b0}, "write one to clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
