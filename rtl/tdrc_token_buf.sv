// tdrc_token_buf: one token memory region of the TDRC.
//
// Holds the event fragments of one tray, addressed by trigger token: NTOKENS
// locations of TOKEN_WORDS words each, a word count per location and an
// "invalidate" flag per location. A set flag means the location's old content
// is no longer needed and it may be written.
//
// Write: wr_start opens location wr_token. If CHECK_FLAG is set and the
// location's invalidate flag is missing, err_in_use pulses (with err_token)
// and the event is dropped, leaving the old content intact. Otherwise the
// following wr_data_valid words are stored at index 0, 1, ...; words beyond
// TOKEN_WORDS are dropped and pulse err_overflow. wr_end commits: the word
// count is stored and the invalidate flag cleared. wr_start, a data word and
// wr_end may fall in the same cycle (the header region writes one word so).
// Invalidate: inv_valid[i] sets the flag of inv_token[i]; two ports serve the
// trigger decoder (aborts) and the VME processor. An invalidate wins over a
// commit to the same token in the same cycle.
// Read: rd_data, rd_count and rd_free show location rd_token, word rd_index,
// one cycle after the address.
// Processor write: host_wr stores host_data at location rd_token, word
// rd_index (the processor's address, shared with reads). The word waits in a
// one-entry holding register while the fibre side writes, and goes into the
// memory in the first cycle without a fibre write; host_busy is high while it
// waits. A processor write changes neither the count nor the flag.
//
// The 4096 token-addressed locations, the invalidate flag, the check before
// writing and the error report follow the paper. The location size, dropping
// the event on error, the two invalidate ports and the holding register that
// gives the fibre priority over processor writes are this design's choices.
// All flags are set at reset; the counts are not reset (read them only for a
// committed token).
module tdrc_token_buf #(
  parameter int NTOKENS     = 4096,
  parameter int TOKEN_WORDS = 256,
  parameter int W           = 20,
  parameter bit CHECK_FLAG  = 1'b1,
  localparam int TW = $clog2(NTOKENS),
  localparam int IW = (TOKEN_WORDS > 1) ? $clog2(TOKEN_WORDS) : 1,
  localparam int CW = $clog2(TOKEN_WORDS + 1)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               wr_start,
  input  logic [TW-1:0]      wr_token,
  input  logic               wr_data_valid,
  input  logic [W-1:0]       wr_data,
  input  logic               wr_end,
  input  logic [1:0]         inv_valid,
  input  logic [1:0][TW-1:0] inv_token,
  input  logic [TW-1:0]      rd_token,
  input  logic [IW-1:0]      rd_index,
  input  logic               host_wr,
  input  logic [W-1:0]       host_data,
  output logic               host_busy,
  output logic [W-1:0]       rd_data,
  output logic [CW-1:0]      rd_count,
  output logic               rd_free,
  output logic               err_in_use,
  output logic               err_overflow,
  output logic [TW-1:0]      err_token
);

  localparam int AW = (TOKEN_WORDS > 1) ? TW + IW : TW;   // memory address width

  logic [W-1:0]       mem [NTOKENS * TOKEN_WORDS];
  logic [CW-1:0]      cnt [NTOKENS];
  logic [NTOKENS-1:0] free_q;

  logic [TW-1:0] cur_tok;
  logic [CW-1:0] idx;
  logic          active, drop;

  // effective write state this cycle (a start takes effect immediately)
  logic [TW-1:0] s_tok;
  logic [CW-1:0] s_idx, n_idx;
  logic          s_active, s_drop, blocked, do_write, ovf;
  logic [AW-1:0] hold_addr;
  logic [W-1:0]  hold_data;

  assign blocked  = CHECK_FLAG && !free_q[wr_token];
  assign s_tok    = wr_start ? wr_token : cur_tok;
  assign s_idx    = wr_start ? '0 : idx;
  assign s_drop   = wr_start ? blocked : drop;
  assign s_active = wr_start || active;
  assign do_write = wr_data_valid && s_active && !s_drop && (s_idx < CW'(TOKEN_WORDS));
  assign ovf      = wr_data_valid && s_active && !s_drop && (s_idx >= CW'(TOKEN_WORDS));
  assign n_idx    = s_idx + CW'(do_write);

  function automatic logic [AW-1:0] addr(input logic [TW-1:0] t, input logic [IW-1:0] i);
    return AW'(t) * AW'(TOKEN_WORDS) + AW'(i);
  endfunction

  always_ff @(posedge clk) begin
    if (do_write)       mem[addr(s_tok, s_idx[IW-1:0])] <= wr_data;
    else if (host_busy) mem[hold_addr] <= hold_data;
    if (host_wr) begin
      hold_addr <= addr(rd_token, rd_index);
      hold_data <= host_data;
    end
    if (wr_end && s_active && !s_drop) cnt[s_tok] <= n_idx;
    rd_data  <= mem[addr(rd_token, rd_index)];
    rd_count <= cnt[rd_token];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      free_q       <= '1;
      cur_tok      <= '0;
      idx          <= '0;
      active       <= 1'b0;
      drop         <= 1'b0;
      rd_free      <= 1'b1;
      host_busy    <= 1'b0;
      err_in_use   <= 1'b0;
      err_overflow <= 1'b0;
      err_token    <= '0;
    end else begin
      cur_tok      <= s_tok;
      idx          <= n_idx;
      drop         <= s_drop;
      active       <= s_active && !wr_end;
      err_in_use   <= wr_start && blocked;
      err_overflow <= ovf;
      if (wr_start && blocked) err_token <= wr_token;
      if (wr_end && s_active && !s_drop) free_q[s_tok] <= 1'b0;
      for (int i = 0; i < 2; i++)
        if (inv_valid[i]) free_q[inv_token[i]] <= 1'b1;
      rd_free <= free_q[rd_token];
      if (host_wr)        host_busy <= 1'b1;
      else if (!do_write) host_busy <= 1'b0;
    end
  end

  // a new processor write must wait until the previous one is stored
  ap_host_wr_not_busy: assert property (@(posedge clk) disable iff (!rst_n)
    host_wr |-> !host_busy);

endmodule
