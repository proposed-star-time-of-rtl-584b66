// tcpu_trig_cmd: trigger command processing of the TCPU.
//
// The STAR trigger broadcasts 20-bit trigger words (command, DAQ command,
// token). This block keeps the ones the tray must act on:
//   L0 trigger          -> a readout request (cmd_is_readout = 1)
//   abort, L2-accept    -> a command to pass on to DAQ (cmd_is_readout = 0),
//                          only when fwd_enable is set
// Everything else is ignored. Readout of the TDCs on a trigger command and
// passing aborts and L2-accepts on to DAQ follow the paper. Keeping both kinds
// in one queue, so they reach DAQ in the order they were issued, and forwarding
// from the one TCPU that carries the transmitter (fwd_enable) are this design's
// choices. The queue is a first-word-fall-through FIFO: cmd_valid/cmd_word/
// cmd_is_readout show its head, cmd_pop removes it. A command arriving while
// the queue is full is lost and sets the sticky overflow flag.
module tcpu_trig_cmd
  import tof_pkg::*;
#(
  parameter int QDEPTH = 16
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      fwd_enable,
  input  logic      trg_valid,
  input  trg_word_t trg_word,
  output logic      cmd_valid,
  output trg_word_t cmd_word,
  output logic      cmd_is_readout,
  input  logic      cmd_pop,
  output logic      overflow
);

  logic is_l0, is_fwd, push, empty, ovf;
  logic [FIBER_W:0] head;

  assign is_l0  = (trg_word.trg_cmd == TRG_L0);
  assign is_fwd = fwd_enable && ((trg_word.trg_cmd == TRG_ABORT) || (trg_word.trg_cmd == TRG_L2_ACCEPT));
  assign push   = trg_valid && (is_l0 || is_fwd);

  sync_fifo #(.W(FIBER_W + 1), .DEPTH(QDEPTH)) u_q (
    .clk, .rst_n,
    .push (push),
    .din  ({is_l0, trg_word}),
    .pop  (cmd_pop),
    .dout (head),
    .empty(empty),
    .full (),
    .count(),
    .overflow(ovf)
  );

  assign cmd_valid      = !empty;
  assign cmd_is_readout = head[FIBER_W];
  assign cmd_word       = head[FIBER_W-1:0];

  always_ff @(posedge clk) begin
    if (!rst_n) overflow <= 1'b0;
    else if (ovf) overflow <= 1'b1;
  end

endmodule
