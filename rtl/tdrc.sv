// tdrc: logic of the TOF DAQ receiver card (TDRC).
//
// Receives the fibre of one group of four trays and keeps their event
// fragments until the VME processor of the DAQ crate reads them:
//   deserializer -> header decoder -+-> data events: tray regions 0..3
//                                   |                + header region
//                                   +-> trigger command events: trigger decoder
//   trigger decoder -> token FIFO (L2-accepted tokens), trigger FIFO (debug),
//                      invalidation of aborted tokens
//   VME interface <-> regions (read and write), FIFOs, invalidation, errors,
//                     interrupt
// Each region has NTOKENS = 4096 token-addressed locations, as in the paper;
// a tray region location holds TOKEN_WORDS words, the header region one word
// (the event's trigger word). Region size, FIFO depths and the bus timing are
// this design's choices. Latency: a fibre word reaches its region 3 cycles
// after its last serial bit (deserializer, header decoder, region write).
module tdrc
  import tof_pkg::*;
#(
  parameter int TOKEN_WORDS = 256,
  parameter int TOK_DEPTH   = 4096,
  parameter int TRGF_DEPTH  = 1024
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        sdi,
  input  logic        vme_stb,
  input  logic        vme_iack,
  input  logic        vme_we,
  input  logic [23:0] vme_addr,
  input  logic [31:0] vme_wdata,
  output logic        vme_ack,
  output logic [31:0] vme_rdata,
  output logic        irq
);

  localparam int NREG = NTRAYS + 1;     // tray regions + header region
  localparam int IW   = (TOKEN_WORDS > 1) ? $clog2(TOKEN_WORDS) : 1;
  localparam int CW   = $clog2(TOKEN_WORDS + 1);
  localparam int FCW  = $clog2(((TOK_DEPTH > TRGF_DEPTH) ? TOK_DEPTH : TRGF_DEPTH) + 1);

  // deserializer
  logic   fw_valid;
  fword_t fw_word;
  tdrc_deser #(.WORD_W(FWORD_W)) u_deser (.clk, .rst_n, .sdi, .out_valid(fw_valid), .out_word(fw_word));

  // header decoder
  logic [NTRAYS-1:0] wr_start, wr_data_valid, wr_end;
  token_t            wr_token;
  logic [FIBER_W-1:0] wr_data;
  logic              hdr_wr, trg_valid, frame_err;
  trg_word_t         trg_word;
  tdrc_hdr_dec #(.NREG(NTRAYS)) u_hdr (
    .clk, .rst_n, .in_valid(fw_valid), .in_word(fw_word),
    .wr_start, .wr_data_valid, .wr_end, .wr_token, .wr_data, .hdr_wr,
    .trg_valid, .trg_word, .frame_err,
    .data_events(), .trig_events(), .extra_words()
  );

  // trigger decoder
  logic      tok_push, trgf_push, abort_inv, trig_fifo_en;
  token_t    tok_data, abort_token;
  trg_word_t trgf_data;
  tdrc_trig_dec u_trig (
    .clk, .rst_n, .trg_valid, .trg_word, .trig_fifo_en,
    .tok_push, .tok_data, .trgf_push, .trgf_data,
    .inv_valid(abort_inv), .inv_token(abort_token), .n_accept(), .n_abort()
  );

  // VME side signals
  token_t                        rd_token, vme_inv_token;
  logic [NREG-1:0]               host_wr, host_busy;
  logic [IW-1:0]                 rd_index;
  logic [NREG-1:0][FIBER_W-1:0]  rd_data;
  logic [NREG-1:0][CW-1:0]       rd_count;
  logic [NREG-1:0]               rd_free, err_in_use, err_overflow;
  logic [NREG-1:0][TOKEN_W-1:0]  err_token;
  logic                          vme_inv;

  // token memory regions: one per tray, checked before every write
  for (genvar r = 0; r < NTRAYS; r++) begin : g_tray
    tdrc_token_buf #(
      .NTOKENS(NTOKENS), .TOKEN_WORDS(TOKEN_WORDS), .W(FIBER_W), .CHECK_FLAG(1'b1)
    ) u_buf (
      .clk, .rst_n,
      .wr_start     (wr_start[r]),
      .wr_token     (wr_token),
      .wr_data_valid(wr_data_valid[r]),
      .wr_data      (wr_data),
      .wr_end       (wr_end[r]),
      .inv_valid    ({vme_inv, abort_inv}),
      .inv_token    ({vme_inv_token, abort_token}),
      .rd_token     (rd_token),
      .rd_index     (rd_index),
      .host_wr      (host_wr[r]),
      .host_data    (vme_wdata[FIBER_W-1:0]),
      .host_busy    (host_busy[r]),
      .rd_data      (rd_data[r]),
      .rd_count     (rd_count[r]),
      .rd_free      (rd_free[r]),
      .err_in_use   (err_in_use[r]),
      .err_overflow (err_overflow[r]),
      .err_token    (err_token[r])
    );
  end

  // header region: one word per token, written by every tray's data event
  logic hdr_cnt;
  tdrc_token_buf #(
    .NTOKENS(NTOKENS), .TOKEN_WORDS(1), .W(FIBER_W), .CHECK_FLAG(1'b0)
  ) u_hdr_buf (
    .clk, .rst_n,
    .wr_start     (hdr_wr),
    .wr_token     (wr_token),
    .wr_data_valid(hdr_wr),
    .wr_data      (wr_data),
    .wr_end       (hdr_wr),
    .inv_valid    ({vme_inv, abort_inv}),
    .inv_token    ({vme_inv_token, abort_token}),
    .rd_token     (rd_token),
    .rd_index     (1'b0),
    .host_wr      (host_wr[NTRAYS]),
    .host_data    (vme_wdata[FIBER_W-1:0]),
    .host_busy    (host_busy[NTRAYS]),
    .rd_data      (rd_data[NTRAYS]),
    .rd_count     (hdr_cnt),
    .rd_free      (rd_free[NTRAYS]),
    .err_in_use   (err_in_use[NTRAYS]),
    .err_overflow (err_overflow[NTRAYS]),
    .err_token    (err_token[NTRAYS])
  );
  assign rd_count[NTRAYS] = CW'(hdr_cnt);

  // token and trigger FIFOs
  token_t           tok_dout;
  trg_word_t        trgf_dout;
  logic             tok_empty, trgf_empty, tok_pop, trgf_pop, tok_ovf, trgf_ovf;
  logic [$clog2(TOK_DEPTH+1)-1:0]  tok_count;
  logic [$clog2(TRGF_DEPTH+1)-1:0] trgf_count;

  sync_fifo #(.W(TOKEN_W), .DEPTH(TOK_DEPTH)) u_tok_fifo (
    .clk, .rst_n, .push(tok_push), .din(tok_data), .pop(tok_pop), .dout(tok_dout),
    .empty(tok_empty), .full(), .count(tok_count), .overflow(tok_ovf)
  );
  sync_fifo #(.W(FIBER_W), .DEPTH(TRGF_DEPTH)) u_trg_fifo (
    .clk, .rst_n, .push(trgf_push), .din(trgf_data), .pop(trgf_pop), .dout(trgf_dout),
    .empty(trgf_empty), .full(), .count(trgf_count), .overflow(trgf_ovf)
  );

  tdrc_vme #(.NREG(NREG), .IW(IW), .CW(CW), .FCW(FCW)) u_vme (
    .clk, .rst_n,
    .vme_stb, .vme_iack, .vme_we, .vme_addr, .vme_wdata, .vme_ack, .vme_rdata, .irq,
    .rd_token, .rd_index, .rd_data, .rd_count, .rd_free, .host_wr, .host_busy,
    .inv_valid(vme_inv), .inv_token(vme_inv_token),
    .tok_dout, .tok_empty, .tok_count(FCW'(tok_count)), .tok_pop,
    .trgf_dout, .trgf_empty, .trgf_count(FCW'(trgf_count)), .trgf_pop, .trig_fifo_en,
    .err_in_use, .err_overflow, .err_token, .frame_err, .fifo_ovf(tok_ovf || trgf_ovf)
  );

endmodule
