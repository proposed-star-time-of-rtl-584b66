// tmit_ser: serializer of the TMIT transmitter card.
//
// Takes formatted 21-bit fibre words (control flag + 20 data bits) and sends
// them bit-serially on sdo, one bit per clock. Each word is framed as a start
// bit '1', the 21 bits most significant first, and one idle '0' bit, so a word
// takes WORD_W+2 = 23 clocks; the line rests at '0' between words. in_ready is
// high only while the serializer is idle, so a word is accepted in the cycle
// in which its start bit goes out. Serializing the buffer's words onto the
// fibre follows the paper; the line framing is this design's choice (the
// paper leaves the protocol to a PLD or a link chip).
module tmit_ser #(
  parameter int WORD_W = 21
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  logic [WORD_W-1:0] in_word,
  output logic              in_ready,
  output logic              sdo
);

  logic [WORD_W:0]            sh;      // word followed by the idle bit
  logic [$clog2(WORD_W+2)-1:0] left;   // bits still to send after the start bit

  assign in_ready = (left == '0);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      sh   <= '0;
      left <= '0;
      sdo  <= 1'b0;
    end else if (left == '0) begin
      if (in_valid) begin
        sdo  <= 1'b1;                    // start bit
        sh   <= {in_word, 1'b0};
        left <= ($bits(left))'(WORD_W + 1);
      end else begin
        sdo  <= 1'b0;
      end
    end else begin
      sdo  <= sh[WORD_W];
      sh   <= {sh[WORD_W-1:0], 1'b0};
      left <= left - 1'b1;
    end
  end

endmodule
