// tof_pkg: constants and types shared by the TOF tray readout and DAQ receiver.
//
// The readout chain moves two kinds of information: trigger words, which the
// STAR trigger broadcasts to every tray, and fibre words, which travel from the
// tray CPU (TCPU) through the transmitter (TMIT) to the DAQ receiver (TDRC).
//
// Trigger word (20 bits): {trigger command[3:0], DAQ command[3:0], token[11:0]}.
// The 12-bit token, the 20-bit fibre word and the 5-bit / 7-bit multiplicity
// widths follow the paper; the 4+4 split of the command fields and the command
// codes below are this design's choice, as the encodings are not published.
//
// Fibre word (21 bits): a control flag plus 20 data bits. Control words frame
// events:
//   SOE (start of event) {kind[3:0], tray[1:0], 14'b0}, kind = KIND_DATA or KIND_TRIG
//   EOE (end of event)   {KIND_EOE, 16'b0}
// An event is SOE, one trigger word, zero or more payload words, EOE. Payload
// words of a data event are halves of 32-bit TDC words: {tag[3:0], half[15:0]}.
package tof_pkg;

  localparam int TOKEN_W  = 12;   // trigger token width
  localparam int NTOKENS  = 4096; // 2**TOKEN_W tokens
  localparam int FIBER_W  = 20;   // fibre word width
  localparam int PMULT_W  = 5;    // TDIG partial multiplicity sum
  localparam int MULT_W   = 7;    // half-tray multiplicity word to trigger
  localparam int TDC_W    = 32;   // TDC hit word
  localparam int NCH_TDIG = 24;   // channels per TDIG card
  localparam int NTDIG    = 8;    // TDIG cards per tray
  localparam int NTRAYS   = 4;    // trays sharing one fibre

  typedef logic [TOKEN_W-1:0] token_t;

  typedef enum logic [3:0] {
    TRG_NONE      = 4'h0,
    TRG_L0        = 4'h4,   // Level-0 trigger: read the TDCs out
    TRG_ABORT     = 4'hE,   // trigger abort: the token's data is not needed
    TRG_L2_ACCEPT = 4'hF    // Level-2 accept: the event goes to DAQ
  } trg_cmd_e;

  typedef struct packed {
    logic [3:0] trg_cmd;
    logic [3:0] daq_cmd;
    token_t     token;
  } trg_word_t;

  typedef enum logic [3:0] {
    KIND_DATA = 4'h1,   // data event from a tray
    KIND_TRIG = 4'h2,   // trigger command event
    KIND_EOE  = 4'hE    // end of event
  } kind_e;

  typedef struct packed {
    logic [3:0]  kind;
    logic [1:0]  tray;
    logic [13:0] rsvd;
  } ctrl_word_t;

  typedef struct packed {
    logic               ctrl;   // 1: framing control word
    logic [FIBER_W-1:0] data;
  } fword_t;

  localparam int FWORD_W = FIBER_W + 1;

  // Tags of the two fibre words that carry one 32-bit TDC word
  localparam logic [3:0] TAG_TDC_HI = 4'h8;
  localparam logic [3:0] TAG_TDC_LO = 4'h9;

  function automatic fword_t soe_word(input kind_e kind, input logic [1:0] tray);
    ctrl_word_t c;
    c = '{kind: kind, tray: tray, rsvd: '0};
    return '{ctrl: 1'b1, data: c};
  endfunction

  function automatic fword_t eoe_word();
    ctrl_word_t c;
    c = '{kind: KIND_EOE, tray: 2'd0, rsvd: '0};
    return '{ctrl: 1'b1, data: c};
  endfunction

endpackage
