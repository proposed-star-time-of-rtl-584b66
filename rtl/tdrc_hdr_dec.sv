// tdrc_hdr_dec: header decoder and data distribution of the TDRC.
//
// Parses the stream of fibre words into events and steers them:
//  * data event (SOE kind DATA, tray t): the trigger word that follows opens
//    token location 'token' in tray region t (wr_start[t]) and is written to
//    the header region (hdr_wr); each payload word is written to region t
//    (wr_data_valid[t]); the EOE word closes the event (wr_end[t]).
//  * trigger command event (SOE kind TRIG): the trigger word goes to the
//    trigger decoder (trg_valid); further words are extra trigger information
//    and are only counted.
// Telling the two event types apart by their header and routing data by tray
// and token follow the paper; the framing words are this design's encoding.
// A word that breaks the framing (payload outside an event, EOE right after
// SOE, a new SOE inside an event) raises the one-cycle frame_err strobe; an
// event cut short this way is never closed, so its token location is not
// committed. All outputs are registered: one cycle after the input word.
module tdrc_hdr_dec
  import tof_pkg::*;
#(
  parameter int NREG = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  fword_t            in_word,
  // token buffer regions
  output logic [NREG-1:0] wr_start,
  output logic [NREG-1:0] wr_data_valid,
  output logic [NREG-1:0] wr_end,
  output token_t            wr_token,
  output logic [FIBER_W-1:0] wr_data,
  output logic              hdr_wr,
  // trigger decoder
  output logic              trg_valid,
  output trg_word_t         trg_word,
  // status
  output logic              frame_err,
  output logic [15:0]       data_events,
  output logic [15:0]       trig_events,
  output logic [15:0]       extra_words
);

  typedef enum logic [1:0] {H_WAIT_SOE, H_GET_TRG, H_PAYLOAD} hstate_e;
  hstate_e      st;
  logic         is_data;
  logic [1:0]   tray;
  ctrl_word_t   cw;
  logic         is_soe, is_eoe;

  assign cw     = in_word.data;
  assign is_soe = in_word.ctrl && (cw.kind == KIND_DATA || cw.kind == KIND_TRIG);
  assign is_eoe = in_word.ctrl && (cw.kind == KIND_EOE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st            <= H_WAIT_SOE;
      is_data       <= 1'b0;
      tray          <= '0;
      wr_start      <= '0;
      wr_data_valid <= '0;
      wr_end        <= '0;
      wr_token      <= '0;
      wr_data       <= '0;
      hdr_wr        <= 1'b0;
      trg_valid     <= 1'b0;
      trg_word      <= '0;
      frame_err     <= 1'b0;
      data_events   <= '0;
      trig_events   <= '0;
      extra_words   <= '0;
    end else begin
      wr_start      <= '0;
      wr_data_valid <= '0;
      wr_end        <= '0;
      hdr_wr        <= 1'b0;
      trg_valid     <= 1'b0;
      frame_err     <= 1'b0;
      if (in_valid) begin
        if (is_soe) begin
          if (st != H_WAIT_SOE) frame_err <= 1'b1;
          is_data <= (cw.kind == KIND_DATA);
          tray    <= cw.tray;
          st      <= H_GET_TRG;
        end else if (is_eoe) begin
          if (st == H_PAYLOAD) begin
            if (is_data) wr_end[tray] <= 1'b1;
          end else begin
            frame_err <= 1'b1;
          end
          st <= H_WAIT_SOE;
        end else if (in_word.ctrl) begin
          frame_err <= 1'b1;                 // unknown control word
        end else begin
          unique case (st)
            H_WAIT_SOE: frame_err <= 1'b1;
            H_GET_TRG: begin
              trg_word <= in_word.data;
              wr_token <= in_word.data[TOKEN_W-1:0];
              wr_data  <= in_word.data;
              if (is_data) begin
                wr_start[tray] <= 1'b1;
                hdr_wr         <= 1'b1;
                data_events    <= data_events + 1'b1;
              end else begin
                trg_valid      <= 1'b1;
                trig_events    <= trig_events + 1'b1;
              end
              st <= H_PAYLOAD;
            end
            H_PAYLOAD: begin
              wr_data <= in_word.data;
              if (is_data) wr_data_valid[tray] <= 1'b1;
              else         extra_words <= extra_words + 1'b1;
            end
            default: st <= H_WAIT_SOE;
          endcase
        end
      end
    end
  end

endmodule
