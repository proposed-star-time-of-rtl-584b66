// tdig_mult: multiplicity logic of one TDIG card.
//
// Counts how many of the card's discriminator channels fired while the
// multiplicity gate was open and reports that count as the card's 5-bit
// partial multiplicity sum, which the TCPU adds up for the STAR Level-0
// trigger. The 24 channels, the gate input and the 5-bit sum follow the paper.
//
// How it works: a hit register per channel is ORed with the discriminator
// outputs in every cycle in which the gate is high, so a channel counts at most
// once per gate. In the cycle after the gate falls, the population count of the
// hit register is loaded into pmult, pmult_valid pulses for one cycle and the
// hit register is cleared. pmult holds its value until the next gate closes.
// Counting a channel once per gate, and the one-cycle latency, are this
// design's choices. Discriminator outputs are assumed synchronous to clk.
module tdig_mult #(
  parameter int NCH     = 24,
  parameter int PMULT_W = 5
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [NCH-1:0]     disc,
  input  logic               gate,
  output logic [PMULT_W-1:0] pmult,
  output logic               pmult_valid
);

  logic [NCH-1:0] hit_q;
  logic           gate_q;

  function automatic logic [PMULT_W-1:0] popcount(input logic [NCH-1:0] v);
    logic [PMULT_W-1:0] n;
    n = '0;
    for (int i = 0; i < NCH; i++) n += PMULT_W'(v[i]);
    return n;
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      hit_q       <= '0;
      gate_q      <= 1'b0;
      pmult       <= '0;
      pmult_valid <= 1'b0;
    end else begin
      gate_q      <= gate;
      pmult_valid <= 1'b0;
      if (gate) begin
        hit_q <= hit_q | disc;
      end else if (gate_q) begin
        // gate has just closed
        pmult       <= popcount(hit_q);
        pmult_valid <= 1'b1;
        hit_q       <= '0;
      end
    end
  end

  initial assert (NCH < (1 << PMULT_W)) else $error("PMULT_W too narrow for NCH");

endmodule
