// tof_tray_group: digital readout of one group of four TOF trays and the DAQ
// receiver card that takes their fibre.
//
// Per tray: 8 TDIG multiplicity units (24 channels each, 192 channels per
// tray) feeding a TCPU. The TCPUs of the four trays send their events to the
// first tray, whose tray_merge combines them and whose TMIT serializer drives
// the fibre. The TDRC at the other end stores the events by tray and token for
// the DAQ's VME processor. The trigger word bus is broadcast to all four TCPUs;
// only tray 0 passes aborts and L2-accepts on to DAQ. The structure (8 TDIG
// per tray, one TCPU per tray, four trays per transmitter, one receiver per
// four trays) follows the paper.
//
// Parts without logic of their own are outside this module and meet it at its
// ports: the discriminators (disc), the HPTDC readout chains on the TDIG
// cables (tdc_*), the timebase that makes the multiplicity gate (mult_gate),
// the STAR trigger (trg_*, mult*) and the optical link (fiber_tx must be wired
// to fiber_rx through the transmitter, fibre and receiver). One clock drives
// everything, which is this design's simplification.
module tof_tray_group
  import tof_pkg::*;
#(
  parameter int NCABLES     = 2,
  parameter int BUF_DEPTH   = 1024,
  parameter int TOKEN_WORDS = 256
) (
  input  logic                                       clk,
  input  logic                                       rst_n,
  // front end and timebase
  input  logic [NTRAYS-1:0][NTDIG-1:0][NCH_TDIG-1:0] disc,
  input  logic                                       mult_gate,
  // STAR trigger
  input  logic                                       trg_valid,
  input  trg_word_t                                  trg_word,
  output logic [NTRAYS-1:0][1:0][MULT_W-1:0]         mult,
  output logic [NTRAYS-1:0][1:0]                     mult_valid,
  // TDIG data cables (HPTDC readout chains)
  output logic [NTRAYS-1:0]                          tdc_trigger,
  input  logic [NTRAYS-1:0][NCABLES-1:0]             tdc_valid,
  input  logic [NTRAYS-1:0][NCABLES-1:0][TDC_W-1:0]  tdc_data,
  input  logic [NTRAYS-1:0][NCABLES-1:0]             tdc_last,
  output logic [NTRAYS-1:0][NCABLES-1:0]             tdc_ready,
  // optical link
  output logic                                       fiber_tx,
  input  logic                                       fiber_rx,
  // VME
  input  logic                                       vme_stb,
  input  logic                                       vme_iack,
  input  logic                                       vme_we,
  input  logic [23:0]                                vme_addr,
  input  logic [31:0]                                vme_wdata,
  output logic                                       vme_ack,
  output logic [31:0]                                vme_rdata,
  output logic                                       irq,
  // status
  output logic [NTRAYS-1:0]                          cmd_overflow,
  output logic [NTRAYS-1:0][15:0]                    events_done
);

  logic [NTRAYS-1:0] tr_valid, tr_ready;
  fword_t [NTRAYS-1:0] tr_word;

  for (genvar t = 0; t < NTRAYS; t++) begin : g_tray
    logic [NTDIG-1:0][PMULT_W-1:0] pmult;
    logic [NTDIG-1:0]              pmult_valid;

    for (genvar d = 0; d < NTDIG; d++) begin : g_tdig
      tdig_mult #(.NCH(NCH_TDIG), .PMULT_W(PMULT_W)) u_mult (
        .clk, .rst_n, .disc(disc[t][d]), .gate(mult_gate),
        .pmult(pmult[d]), .pmult_valid(pmult_valid[d])
      );
    end

    tcpu #(.NCABLES(NCABLES), .BUF_DEPTH(BUF_DEPTH)) u_tcpu (
      .clk, .rst_n,
      .tray_id      (2'(t)),
      .fwd_enable   (t == 0),
      .pmult, .pmult_valid,
      .mult         (mult[t]),
      .mult_valid   (mult_valid[t]),
      .trg_valid, .trg_word,
      .tdc_trigger  (tdc_trigger[t]),
      .tdc_valid    (tdc_valid[t]),
      .tdc_data     (tdc_data[t]),
      .tdc_last     (tdc_last[t]),
      .tdc_ready    (tdc_ready[t]),
      .out_valid    (tr_valid[t]),
      .out_word     (tr_word[t]),
      .out_ready    (tr_ready[t]),
      .cmd_overflow (cmd_overflow[t]),
      .mult_skew_err(),
      .events_done  (events_done[t])
    );
  end

  // tray 0: merge of the four trays and the fibre transmitter
  logic   tx_valid, tx_ready;
  fword_t tx_word;

  tray_merge #(.NIN(NTRAYS)) u_merge (
    .clk, .rst_n,
    .in_valid(tr_valid), .in_word(tr_word), .in_ready(tr_ready),
    .out_valid(tx_valid), .out_word(tx_word), .out_ready(tx_ready)
  );

  tmit_ser #(.WORD_W(FWORD_W)) u_tmit (
    .clk, .rst_n, .in_valid(tx_valid), .in_word(tx_word), .in_ready(tx_ready), .sdo(fiber_tx)
  );

  // DAQ receiver
  tdrc #(.TOKEN_WORDS(TOKEN_WORDS)) u_tdrc (
    .clk, .rst_n, .sdi(fiber_rx),
    .vme_stb, .vme_iack, .vme_we, .vme_addr, .vme_wdata, .vme_ack, .vme_rdata, .irq
  );

endmodule
