// tdrc_trig_dec: trigger decoder of the TDRC.
//
// Acts on each trigger command event passed on by the header decoder:
//   L2-accept -> the token is pushed into the token FIFO, where the VME
//                processor finds the events it must read out (tok_push)
//   abort     -> the invalidate flag of the token's location is set in every
//                region so the location can be reused (inv_valid)
//   any       -> the trigger word is pushed into the trigger (debug) FIFO
//                when trig_fifo_en is set (trgf_push)
// These actions follow the paper. The command codes and keeping the whole
// trigger word as the debug record are this design's choices. Outputs are
// registered, one cycle after trg_valid. n_accept and n_abort count the
// commands seen.
module tdrc_trig_dec
  import tof_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      trg_valid,
  input  trg_word_t trg_word,
  input  logic      trig_fifo_en,
  output logic      tok_push,
  output token_t    tok_data,
  output logic      trgf_push,
  output trg_word_t trgf_data,
  output logic      inv_valid,
  output token_t    inv_token,
  output logic [15:0] n_accept,
  output logic [15:0] n_abort
);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      tok_push  <= 1'b0;
      tok_data  <= '0;
      trgf_push <= 1'b0;
      trgf_data <= '0;
      inv_valid <= 1'b0;
      inv_token <= '0;
      n_accept  <= '0;
      n_abort   <= '0;
    end else begin
      tok_push  <= trg_valid && (trg_word.trg_cmd == TRG_L2_ACCEPT);
      inv_valid <= trg_valid && (trg_word.trg_cmd == TRG_ABORT);
      trgf_push <= trg_valid && trig_fifo_en;
      if (trg_valid) begin
        tok_data  <= trg_word.token;
        inv_token <= trg_word.token;
        trgf_data <= trg_word;
        if (trg_word.trg_cmd == TRG_L2_ACCEPT) n_accept <= n_accept + 1'b1;
        if (trg_word.trg_cmd == TRG_ABORT)     n_abort  <= n_abort + 1'b1;
      end
    end
  end

endmodule
