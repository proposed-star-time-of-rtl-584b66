// tb_tof_tray_group: end-to-end test of four trays, the fibre and the DAQ
// receiver, with every parameter at its default.
//
// The testbench plays the parts outside the logic: discriminators, the HPTDC
// readout chains on each TDIG cable (answering every TDC trigger with random
// hit words), the timebase's multiplicity gate, the STAR trigger, the optical
// link (fiber_tx looped to fiber_rx) and the DAQ crate's VME processor.
// Sequence: multiplicity gates; L0 triggers read out all four trays (one very
// large event fills a TCPU buffer and overflows a token location); L2-accepts
// and aborts passed on by tray 0; the VME processor takes each accepted token
// from the token FIFO on interrupt, reads and checks every tray's fragment and
// the header word, and invalidates the token; aborted tokens must be free; a
// token reused before invalidation must raise the in-use error; the processor
// writes a word into a tray region and reads it back.
// Each mechanism is counted and a failure is counted for any that never
// happened.
module tb_tof_tray_group;
  import tof_pkg::*;
  localparam int NC = 2, TW = 256, NEV = 6;
  logic clk = 0, rst_n = 0;
  logic [3:0][7:0][23:0] disc;
  logic mult_gate, trg_valid;
  trg_word_t trg_word;
  logic [3:0][1:0][6:0] mult;
  logic [3:0][1:0] mult_valid;
  logic [3:0] tdc_trigger;
  logic [3:0][NC-1:0] tdc_valid, tdc_last, tdc_ready;
  logic [3:0][NC-1:0][31:0] tdc_data;
  logic fiber_tx, fiber_rx;
  logic vme_stb, vme_iack, vme_we, vme_ack, irq;
  logic [23:0] vme_addr;
  logic [31:0] vme_wdata, vme_rdata;
  logic [3:0] cmd_overflow;
  logic [3:0][15:0] events_done;
  int checks = 0, failures = 0;

  tof_tray_group dut (.*);
  always #5 clk = ~clk;
  assign fiber_rx = fiber_tx;     // optical link

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  // mechanism counters
  int n_mult = 0, n_l0 = 0, n_fwd_abort = 0, n_fwd_l2 = 0, n_stall = 0, n_contend = 0,
      n_irq = 0, n_abort_free = 0, n_reuse = 0, n_in_use = 0, n_ovf = 0, n_trgfifo = 0, n_host_wr = 0;

  // ---------------- HPTDC readout chain model ----------------
  logic [32:0] cab_q[4][NC][$];
  logic [19:0] exp_frag[4][NEV][$];   // expected region content per tray and event
  int          ev_of_tray[4];
  int          notready_run[4] = '{0, 0, 0, 0};
  int          big_tray = 3, big_ev = 2;
  always_comb for (int t = 0; t < 4; t++) for (int c = 0; c < NC; c++) begin
    tdc_valid[t][c] = cab_q[t][c].size() > 0;
    tdc_data[t][c]  = cab_q[t][c].size() > 0 ? cab_q[t][c][0][31:0] : '0;
    tdc_last[t][c]  = cab_q[t][c].size() > 0 ? cab_q[t][c][0][32] : 1'b0;
  end
  always @(posedge clk) if (rst_n) begin
    for (int t = 0; t < 4; t++) begin
      for (int c = 0; c < NC; c++) begin
        if (tdc_valid[t][c] && tdc_ready[t][c]) void'(cab_q[t][c].pop_front());
      end
      // a TCPU that holds every cable not-ready for 3+ cycles while words
      // wait is stalled by its full event buffer (the state machine alone
      // never idles a cable for more than 2 cycles inside an event)
      if (|tdc_valid[t] && !(|tdc_ready[t])) begin
        notready_run[t]++;
        if (notready_run[t] == 3) n_stall++;
      end else notready_run[t] = 0;
      if (tdc_trigger[t]) begin
        int e;
        e = ev_of_tray[t]++;
        for (int c = 0; c < NC; c++) begin
          int n;
          n = (t == big_tray && e == big_ev) ? 300 : $urandom_range(1, 12);
          for (int k = 0; k < n; k++) begin
            logic [31:0] d;
            d = {4'(t), 4'(c), 8'(e), 16'(k * 7 + $urandom_range(0, 6))};
            cab_q[t][c].push_back({k == n - 1, d});
            exp_frag[t][e].push_back({TAG_TDC_HI, d[31:16]});
            exp_frag[t][e].push_back({TAG_TDC_LO, d[15:0]});
          end
        end
      end
    end
    if ($countones(dut.tr_valid) > 1) n_contend++;
  end

  // ---------------- VME processor ----------------
  task automatic vme(input bit we, input logic [23:0] a, input logic [31:0] d, output logic [31:0] r);
    @(negedge clk); vme_stb = 1; vme_we = we; vme_addr = a; vme_wdata = d;
    @(negedge clk); vme_stb = 0;
    @(negedge clk);
    check(vme_ack == 1, "VME ack");
    r = vme_rdata;
  endtask
  task automatic vme_write_region(input logic [23:0] a, input logic [31:0] d);
    int n;
    @(negedge clk); vme_stb = 1; vme_we = 1; vme_addr = a; vme_wdata = d;
    @(negedge clk); vme_stb = 0;
    n = 1;
    while (!vme_ack && n < 100) begin @(negedge clk); n++; end
    check(vme_ack == 1, "VME region write ack");
  endtask
  function automatic logic [23:0] ra(input int sel, input token_t tok, input int idx);
    return {4'(sel), 12'(tok), 8'(idx)};
  endfunction
  localparam logic [23:0] R_TOK = 24'h800000, R_TRG = 24'h800001, R_STAT = 24'h800002,
                          R_CTRL = 24'h800003, R_INV = 24'h800004;

  task automatic trigger(input trg_word_t w);
    @(negedge clk); trg_valid = 1; trg_word = w;
    @(negedge clk); trg_valid = 0;
  endtask

  task automatic wait_quiet();
    int q;
    q = 0;
    while (q < 100) begin
      @(posedge clk);
      q = (fiber_tx || dut.tr_valid != 0) ? 0 : q + 1;
    end
  endtask

  function automatic token_t tok_of(input int e);
    return token_t'(17 + 613 * e);
  endfunction

  initial begin
    logic [31:0] r;
    trg_word_t tws[NEV];
    disc = '0; mult_gate = 0; trg_valid = 0; trg_word = '0;
    vme_stb = 0; vme_iack = 0; vme_we = 0; vme_addr = 0; vme_wdata = 0;
    for (int t = 0; t < 4; t++) ev_of_tray[t] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    vme(1, R_CTRL, 32'h3, r);

    // ---- multiplicity: disc pattern held through a 4-cycle gate
    for (int g = 0; g < 20; g++) begin
      int exp_m[4][2];
      @(negedge clk);
      for (int t = 0; t < 4; t++) begin
        exp_m[t][0] = 0; exp_m[t][1] = 0;
        for (int d = 0; d < 8; d++) begin
          disc[t][d] = (g == 0) ? '1 : 24'($urandom() & $urandom());
          exp_m[t][d / 4] += $countones(disc[t][d]);
        end
      end
      mult_gate = 1;
      repeat (4) @(negedge clk);
      mult_gate = 0; disc = '0;
      @(negedge clk); @(negedge clk);
      for (int t = 0; t < 4; t++) for (int h = 0; h < 2; h++) begin
        check(mult_valid[t][h] == 1 && mult[t][h] == 7'(exp_m[t][h]),
              $sformatf("multiplicity tray %0d half %0d: %0d vs %0d", t, h, mult[t][h], exp_m[t][h]));
        if (mult_valid[t][h]) n_mult++;
      end
      if (g == 0) check(mult[0][0] == 7'd96, "full half tray = 96");
    end

    // ---- L0 triggers: every tray reads out every event
    for (int e = 0; e < NEV; e++) begin
      tws[e] = '{trg_cmd: TRG_L0, daq_cmd: 4'(e), token: tok_of(e)};
      trigger(tws[e]);
      n_l0++;
      repeat (200) @(negedge clk);
    end
    wait_quiet();
    for (int t = 0; t < 4; t++) check(events_done[t] == 16'(NEV), "all trays read out");

    // ---- decisions: even events accepted, odd events aborted
    for (int e = 0; e < NEV; e++) begin
      trigger('{trg_cmd: (e % 2 == 0) ? TRG_L2_ACCEPT : TRG_ABORT, daq_cmd: 4'(e), token: tok_of(e)});
      if (e % 2 == 0) n_fwd_l2++; else n_fwd_abort++;
    end
    wait_quiet();

    // ---- DAQ readout on interrupt
    for (int k = 0; k < NEV / 2; k++) begin
      int e;
      check(irq == 1, "interrupt pending");
      if (irq) n_irq++;
      vme(0, R_TOK, 0, r);
      e = 2 * k;
      check(r == 32'(tok_of(e)), $sformatf("accepted token %0d", r));
      for (int t = 0; t < 4; t++) begin
        int n;
        n = exp_frag[t][e].size() > TW ? TW : exp_frag[t][e].size();
        vme(0, ra(5, tok_of(e), t), 0, r);
        check(r[15:0] == 16'(n) && r[31] == 0, $sformatf("tray %0d event %0d: %0d words, expected %0d", t, e, r[15:0], n));
        for (int i = 0; i < n; i++) begin
          vme(0, ra(t, tok_of(e), i), 0, r);
          check(r == 32'(exp_frag[t][e][i]), "fragment word");
        end
      end
      vme(0, ra(4, tok_of(e), 0), 0, r);
      check(r == 32'(tws[e]), "header word");
      vme(1, R_INV, 32'(tok_of(e)), r);
    end
    check(irq == 0, "interrupt cleared after the token FIFO is drained");
    // the big event overflowed its token location in tray 3
    vme(0, R_STAT, 0, r);
    check(r[8 + big_tray] == 1, "region overflow reported");
    if (r[8 + big_tray]) n_ovf++;
    check(r[7:0] == 0, "no in-use error so far");
    // aborted events are free, accepted ones were freed by VME
    for (int e = 0; e < NEV; e++) for (int t = 0; t < 4; t++) begin
      vme(0, ra(5, tok_of(e), t), 0, r);
      check(r[31] == 1, "location free after abort or invalidation");
      if (e % 2 == 1 && r[31]) n_abort_free++;
    end
    // trigger FIFO saw the forwarded L2-accepts and aborts, in order
    // (L0 triggers reach the receiver only as data events)
    for (int i = 0; i < NEV; i++) begin
      vme(0, R_TRG, 0, r);
      check(r[31] == 0 && r[19:0] == 20'({i % 2 == 0 ? TRG_L2_ACCEPT : TRG_ABORT, 4'(i), tok_of(i)}),
            $sformatf("trigger FIFO entry %0d: %h", i, r));
      if (r[31] == 0) n_trgfifo++;
    end
    vme(0, R_TRG, 0, r); check(r[31] == 1, "trigger FIFO drained");

    // ---- token reuse: valid after invalidation, error without it
    tws[0] = '{trg_cmd: TRG_L0, daq_cmd: 4'd9, token: tok_of(0)};
    trigger(tws[0]);
    wait_quiet();
    vme(0, R_STAT, 0, r); check(r[7:0] == 0, "reuse of an invalidated token is clean");
    if (r[7:0] == 0) n_reuse++;
    trigger(tws[0]);
    wait_quiet();
    vme(0, R_STAT, 0, r); check(r[3:0] == 4'hF, $sformatf("in-use error in all tray regions: %h", r));
    if (r[3:0] == 4'hF) n_in_use++;
    check(cmd_overflow == 0, "no command queue overflow");

    // ---- processor write into a tray region
    vme_write_region(ra(2, tok_of(0), 5), 32'h000C_0FFE);
    vme(0, ra(2, tok_of(0), 5), 0, r); check(r == 32'h000C_0FFE, "processor word read back");
    if (r == 32'h000C_0FFE) n_host_wr++;

    $display("mechanisms: mult=%0d l0=%0d fwd_l2=%0d fwd_abort=%0d buffer_stall=%0d merge_contention=%0d irq=%0d abort_free=%0d reuse=%0d in_use_err=%0d region_ovf=%0d trig_fifo=%0d vme_region_write=%0d",
             n_mult, n_l0, n_fwd_l2, n_fwd_abort, n_stall, n_contend, n_irq, n_abort_free, n_reuse, n_in_use, n_ovf, n_trgfifo, n_host_wr);
    check(n_mult > 0, "mechanism: multiplicity");
    check(n_l0 > 0, "mechanism: L0 readout");
    check(n_fwd_l2 > 0 && n_fwd_abort > 0, "mechanism: command forwarding");
    check(n_stall > 0, "mechanism: buffer-full stall");
    check(n_contend > 0, "mechanism: tray merge contention");
    check(n_irq > 0, "mechanism: token FIFO interrupt");
    check(n_abort_free > 0, "mechanism: abort invalidation");
    check(n_reuse > 0, "mechanism: token reuse after VME invalidation");
    check(n_in_use > 0, "mechanism: in-use error");
    check(n_ovf > 0, "mechanism: token location overflow");
    check(n_trgfifo > 0, "mechanism: trigger FIFO");
    check(n_host_wr > 0, "mechanism: processor write into a token region");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
