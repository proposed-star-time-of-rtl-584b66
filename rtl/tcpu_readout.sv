// tcpu_readout: readout control, data formatting and event buffer of the TCPU.
//
// Takes commands in order from the trigger command queue. For an L0 readout
// command it pulses tdc_trigger to the TDIG cards, writes a start-of-event
// word and the trigger word into the event buffer, then reads each TDIG data
// cable in turn (cable 0 first) until that cable marks its last word, and
// closes the event with an end-of-event word. Each 32-bit TDC word becomes two
// 20-bit fibre words, {TAG_TDC_HI, bits 31:16} then {TAG_TDC_LO, bits 15:0}.
// A forwarded command (abort, L2-accept) becomes a trigger command event: SOE,
// trigger word, EOE. The buffer drains to the transmitter or tray link through
// out_valid/out_word/out_ready.
//
// Triggering readout on a trigger command, reading the TDIG cables and
// formatting and buffering the data follow the paper; the event framing, the
// word split, the cable order and the buffer depth are this design's choices.
// Flow control: when the buffer is full the state machine waits and holds
// tdc_ready low, so the TDIG side stalls instead of losing words. One word is
// written per cycle at most; a TDC word takes two cycles.
module tcpu_readout
  import tof_pkg::*;
#(
  parameter int NCABLES   = 2,
  parameter int BUF_DEPTH = 1024
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic [1:0]                    tray_id,
  // command queue head
  input  logic                          cmd_valid,
  input  trg_word_t                     cmd_word,
  input  logic                          cmd_is_readout,
  output logic                          cmd_pop,
  // TDIG cables
  output logic                          tdc_trigger,
  input  logic [NCABLES-1:0]            tdc_valid,
  input  logic [NCABLES-1:0][TDC_W-1:0] tdc_data,
  input  logic [NCABLES-1:0]            tdc_last,
  output logic [NCABLES-1:0]            tdc_ready,
  // formatted output stream
  output logic                          out_valid,
  output fword_t                        out_word,
  input  logic                          out_ready,
  // status
  output logic [$clog2(BUF_DEPTH+1)-1:0] buf_level,
  output logic [15:0]                   events_done
);

  localparam int CIDX_W = (NCABLES > 1) ? $clog2(NCABLES) : 1;

  typedef enum logic [2:0] {S_IDLE, S_SOE, S_TRG, S_CABLE, S_LO, S_EOE} state_e;
  state_e state;

  logic [CIDX_W-1:0] cable;
  logic              readout;      // current event is a data event
  trg_word_t         trg_q;
  logic [15:0]       lo_half;
  logic              lo_last;

  // buffer write port
  logic   wr;
  fword_t wr_word;
  logic   buf_full, buf_empty;

  sync_fifo #(.W(FWORD_W), .DEPTH(BUF_DEPTH)) u_buf (
    .clk, .rst_n,
    .push (wr),
    .din  (wr_word),
    .pop  (out_ready && !buf_empty),
    .dout (out_word),
    .empty(buf_empty),
    .full (buf_full),
    .count(buf_level),
    .overflow()
  );
  assign out_valid = !buf_empty;

  logic take;   // accept a TDC word from the current cable this cycle
  assign take = (state == S_CABLE) && !buf_full && tdc_valid[cable];

  always_comb begin
    tdc_ready        = '0;
    tdc_ready[cable] = (state == S_CABLE) && !buf_full;
  end

  always_comb begin
    wr      = 1'b0;
    wr_word = '0;
    if (!buf_full) begin
      unique case (state)
        S_SOE:   begin wr = 1'b1; wr_word = soe_word(readout ? KIND_DATA : KIND_TRIG, tray_id); end
        S_TRG:   begin wr = 1'b1; wr_word = '{ctrl: 1'b0, data: trg_q}; end
        S_CABLE: if (tdc_valid[cable]) begin
                   wr = 1'b1; wr_word = '{ctrl: 1'b0, data: {TAG_TDC_HI, tdc_data[cable][31:16]}};
                 end
        S_LO:    begin wr = 1'b1; wr_word = '{ctrl: 1'b0, data: {TAG_TDC_LO, lo_half}}; end
        S_EOE:   begin wr = 1'b1; wr_word = eoe_word(); end
        default: ;
      endcase
    end
  end

  assign cmd_pop = (state == S_IDLE) && cmd_valid;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      cable       <= '0;
      readout     <= 1'b0;
      trg_q       <= '0;
      lo_half     <= '0;
      lo_last     <= 1'b0;
      tdc_trigger <= 1'b0;
      events_done <= '0;
    end else begin
      tdc_trigger <= 1'b0;
      unique case (state)
        S_IDLE: if (cmd_valid) begin
          trg_q       <= cmd_word;
          readout     <= cmd_is_readout;
          tdc_trigger <= cmd_is_readout;
          cable       <= '0;
          state       <= S_SOE;
        end
        S_SOE: if (!buf_full) state <= S_TRG;
        S_TRG: if (!buf_full) state <= readout ? S_CABLE : S_EOE;
        S_CABLE: if (take) begin
          lo_half <= tdc_data[cable][15:0];
          lo_last <= tdc_last[cable];
          state   <= S_LO;
        end
        S_LO: if (!buf_full) begin
          if (!lo_last) state <= S_CABLE;
          else if (cable == CIDX_W'(NCABLES - 1)) state <= S_EOE;
          else begin
            cable <= cable + 1'b1;
            state <= S_CABLE;
          end
        end
        S_EOE: if (!buf_full) begin
          events_done <= events_done + 1'b1;
          state       <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
