// tcpu_mult_agg: half-tray multiplicity aggregation in the TCPU.
//
// Adds the 5-bit partial multiplicity sums of four TDIG cards (96 detector
// channels) into one 7-bit word for the STAR Level-0 trigger; a tray has two
// of these. The 4 cards, 5-bit inputs and 7-bit output follow the paper.
//
// The four TDIG cards share one multiplicity gate, so their strobes arrive in
// the same cycle; the sum is registered when all strobes are present and
// mult_valid pulses one cycle later. A cycle in which only some strobes are
// present sets the sticky skew_err flag and is not summed (this design's
// choice; the paper does not describe error handling).
module tcpu_mult_agg #(
  parameter int NTDIG   = 4,
  parameter int PMULT_W = 5,
  parameter int MULT_W  = 7
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic [NTDIG-1:0][PMULT_W-1:0] pmult,
  input  logic [NTDIG-1:0]              pmult_valid,
  output logic [MULT_W-1:0]             mult,
  output logic                          mult_valid,
  output logic                          skew_err
);

  logic [MULT_W-1:0] sum;

  always_comb begin
    sum = '0;
    for (int i = 0; i < NTDIG; i++) sum += MULT_W'(pmult[i]);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      mult       <= '0;
      mult_valid <= 1'b0;
      skew_err   <= 1'b0;
    end else begin
      mult_valid <= 1'b0;
      if (&pmult_valid) begin
        mult       <= sum;
        mult_valid <= 1'b1;
      end else if (|pmult_valid) begin
        skew_err <= 1'b1;
      end
    end
  end

  initial assert (NTDIG * ((1 << PMULT_W) - 1) < (1 << MULT_W) || NTDIG * 24 < (1 << MULT_W))
    else $error("MULT_W too narrow");

endmodule
