// tcpu: logic of the tray CPU card (TCPU), the data concentrator of one tray.
//
// Inside:
//   tcpu_trig_cmd  - keeps L0 triggers (readout) and, when fwd_enable is set,
//                    aborts and L2-accepts (passed on to DAQ) in one queue
//   tcpu_readout   - triggers the TDIG cards, reads their data cables,
//                    formats events and buffers them for the fibre
//   2 x tcpu_mult_agg - add the partial multiplicity sums of TDIG cards 0-3
//                    and 4-7 into two 7-bit words for the STAR trigger
// The functions (readout on trigger commands, buffering, passing commands on,
// two half-tray multiplicity words) follow the paper; which TDIG cards form a
// half tray and the internal interfaces are this design's choices. The
// embedded processor, JTAG configuration, CAN bus and clock PLL of the card
// are not part of this logic. The event stream leaves on out_valid/out_word/
// out_ready, towards the transmitter or the tray-to-tray link.
module tcpu
  import tof_pkg::*;
#(
  parameter int NCABLES   = 2,
  parameter int BUF_DEPTH = 1024,
  parameter int QDEPTH    = 16
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic [1:0]                    tray_id,
  input  logic                          fwd_enable,
  // multiplicity
  input  logic [NTDIG-1:0][PMULT_W-1:0] pmult,
  input  logic [NTDIG-1:0]              pmult_valid,
  output logic [1:0][MULT_W-1:0]        mult,
  output logic [1:0]                    mult_valid,
  // trigger commands
  input  logic                          trg_valid,
  input  trg_word_t                     trg_word,
  // TDIG data cables
  output logic                          tdc_trigger,
  input  logic [NCABLES-1:0]            tdc_valid,
  input  logic [NCABLES-1:0][TDC_W-1:0] tdc_data,
  input  logic [NCABLES-1:0]            tdc_last,
  output logic [NCABLES-1:0]            tdc_ready,
  // event stream
  output logic                          out_valid,
  output fword_t                        out_word,
  input  logic                          out_ready,
  // status
  output logic                          cmd_overflow,
  output logic [1:0]                    mult_skew_err,
  output logic [15:0]                   events_done
);

  localparam int HALF = NTDIG / 2;

  logic      cmd_valid, cmd_is_readout, cmd_pop;
  trg_word_t cmd_word;

  tcpu_trig_cmd #(.QDEPTH(QDEPTH)) u_cmd (
    .clk, .rst_n, .fwd_enable, .trg_valid, .trg_word,
    .cmd_valid, .cmd_word, .cmd_is_readout, .cmd_pop, .overflow(cmd_overflow)
  );

  tcpu_readout #(.NCABLES(NCABLES), .BUF_DEPTH(BUF_DEPTH)) u_ro (
    .clk, .rst_n, .tray_id,
    .cmd_valid, .cmd_word, .cmd_is_readout, .cmd_pop,
    .tdc_trigger, .tdc_valid, .tdc_data, .tdc_last, .tdc_ready,
    .out_valid, .out_word, .out_ready,
    .buf_level(), .events_done
  );

  for (genvar h = 0; h < 2; h++) begin : g_half
    tcpu_mult_agg #(.NTDIG(HALF), .PMULT_W(PMULT_W), .MULT_W(MULT_W)) u_agg (
      .clk, .rst_n,
      .pmult      (pmult[h*HALF +: HALF]),
      .pmult_valid(pmult_valid[h*HALF +: HALF]),
      .mult       (mult[h]),
      .mult_valid (mult_valid[h]),
      .skew_err   (mult_skew_err[h])
    );
  end

endmodule
