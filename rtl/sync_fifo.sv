// sync_fifo: single-clock first-word-fall-through FIFO.
//
// Used for the TCPU command queue and event buffer and for the token and
// trigger FIFOs of the DAQ receiver. dout shows the oldest entry whenever
// empty is low; pop removes it. A push while full is dropped and raises the
// one-cycle overflow strobe; a pop while empty is ignored. push and pop in the
// same cycle are both served. The storage is a plain array (inferred RAM);
// depths are this design's choice.
module sync_fifo #(
  parameter int W     = 20,
  parameter int DEPTH = 16,
  localparam int AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int CW   = $clog2(DEPTH + 1)
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         push,
  input  logic [W-1:0] din,
  input  logic         pop,
  output logic [W-1:0] dout,
  output logic         empty,
  output logic         full,
  output logic [CW-1:0] count,
  output logic         overflow
);

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wp, rp;

  logic do_push, do_pop;
  assign do_push = push && !full;
  assign do_pop  = pop && !empty;
  assign empty   = (count == '0);
  assign full    = (count == CW'(DEPTH));
  assign dout    = mem[rp];

  function automatic logic [AW-1:0] next(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (do_push) mem[wp] <= din;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wp       <= '0;
      rp       <= '0;
      count    <= '0;
      overflow <= 1'b0;
    end else begin
      overflow <= push && full;
      if (do_push) wp <= next(wp);
      if (do_pop)  rp <= next(rp);
      case ({do_push, do_pop})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: ;
      endcase
    end
  end

  ap_count_range: assert property (@(posedge clk) disable iff (!rst_n) count <= CW'(DEPTH));

endmodule
