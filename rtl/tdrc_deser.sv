// tdrc_deser: fibre deserializer of the TDRC receiver card.
//
// Recovers the 21-bit fibre words (control flag + 20 data bits) sent by the
// transmitter's serializer: while idle it waits for a '1' start bit, then
// shifts in WORD_W bits, most significant first, and presents the word with a
// one-cycle out_valid strobe in the cycle after its last bit. The framing
// (start bit, 21 bits, at least one idle bit) matches the serializer and is
// this design's choice; the line is assumed bit-synchronous with clk (clock
// recovery belongs to the optical receiver). Presenting the fibre data as
// 20-bit words to the header decoder follows the paper.
module tdrc_deser #(
  parameter int WORD_W = 21
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              sdi,
  output logic              out_valid,
  output logic [WORD_W-1:0] out_word
);

  logic [WORD_W-2:0]           sh;   // bits received so far
  logic [$clog2(WORD_W+1)-1:0] left;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      sh        <= '0;
      left      <= '0;
      out_valid <= 1'b0;
      out_word  <= '0;
    end else begin
      out_valid <= 1'b0;
      if (left == '0) begin
        if (sdi) left <= ($bits(left))'(WORD_W);
      end else begin
        sh   <= {sh[WORD_W-3:0], sdi};
        left <= left - 1'b1;
        if (left == 1) begin
          out_word  <= {sh[WORD_W-2:0], sdi};
          out_valid <= 1'b1;
        end
      end
    end
  end

endmodule
