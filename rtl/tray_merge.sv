// tray_merge: combines the event streams of the four trays that share one fibre.
//
// Every fourth tray carries the transmitter card; the other three TCPUs send
// it their formatted events over a one-way tray-to-tray link. This block
// merges the four streams into the transmitter's single stream. It grants one
// input at a time, at an event boundary: once the start-of-event word of the
// granted input has passed, that input keeps the output until its end-of-event
// word has passed, so events are never interleaved. Grants rotate round-robin
// starting after the last input served. Combining four trays follows the
// paper; the event-atomic round-robin arbitration and modelling the link as a
// parallel valid/ready word stream are this design's choices.
// Words pass combinationally from the granted input to the output (no added
// latency); a new grant takes one cycle.
module tray_merge
  import tof_pkg::*;
#(
  parameter int NIN = 4
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [NIN-1:0]      in_valid,
  input  fword_t [NIN-1:0]    in_word,
  output logic [NIN-1:0]      in_ready,
  output logic                out_valid,
  output fword_t              out_word,
  input  logic                out_ready
);

  localparam int IW = (NIN > 1) ? $clog2(NIN) : 1;

  logic          busy;
  logic [IW-1:0] sel, last;

  function automatic logic is_eoe(input fword_t w);
    return w.ctrl && (w.data[FIBER_W-1 -: 4] == KIND_EOE);
  endfunction

  assign out_valid = busy && in_valid[sel];
  assign out_word  = in_word[sel];

  always_comb begin
    in_ready = '0;
    if (busy) in_ready[sel] = out_ready;
  end

  // next input to grant, searching round-robin after 'last'
  logic          found;
  logic [IW-1:0] pick;
  always_comb begin
    found = 1'b0;
    pick  = last;
    for (int k = 1; k <= NIN; k++) begin
      if (!found && in_valid[(int'(last) + k) % NIN]) begin
        found = 1'b1;
        pick  = IW'((int'(last) + k) % NIN);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy <= 1'b0;
      sel  <= '0;
      last <= IW'(NIN - 1);
    end else if (!busy) begin
      if (found) begin
        busy <= 1'b1;
        sel  <= pick;
      end
    end else if (out_valid && out_ready && is_eoe(out_word)) begin
      busy <= 1'b0;
      last <= sel;
    end
  end

endmodule
