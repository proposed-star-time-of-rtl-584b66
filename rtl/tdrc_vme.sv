// tdrc_vme: VME interface of the TDRC.
//
// Gives the VME processor access to the token memory regions, the token and
// trigger FIFOs, invalidation of token locations, error status and the
// interrupt. The real VME handshake (address/data strobes, DTACK) is reduced
// to a synchronous slave: vme_stb starts one cycle with vme_we, vme_addr and
// vme_wdata; vme_ack pulses two cycles later with vme_rdata for a read. A
// write to a region is handed to that region (host_wr, data vme_wdata[19:0])
// and acknowledged once the region has stored it, three cycles after the
// strobe unless fibre writes hold it back. No new cycle may start before the
// ack (asserted below).
//
// Address map (24-bit word address; this design's own):
//   sel = addr[23:20], token = addr[19:8], index = addr[7:0]
//   sel 0..3  R/W   tray region sel, location token, word index
//   sel 4     R/W   header region, location token
//   sel 5     read  {rd_free of region index[2:0], 15'b0, word count}
//   sel 8     registers, reg = addr[3:0]:
//     0 R  pop token FIFO:   {empty, 19'b0, token}
//     1 R  pop trigger FIFO: {empty, 11'b0, trigger word}
//     2 R  status {frame_err, fifo overflows, region overflow[4:0],
//          region in-use error[4:0]} (sticky); W: write 1 to clear
//     3 RW control: bit0 trigger FIFO enable, bit1 interrupt enable
//     4 W  invalidate token wdata[11:0] in all regions
//     5 R  token of the last in-use error {region[2:0], token}
//     6 R  FIFO levels {trigger FIFO count, token FIFO count}
// rd_token and rd_index are the token and index fields of vme_addr, passed
// straight to the regions so that their one-cycle read starts in the strobe
// cycle; they are wires from the inputs by design.
// Interrupt: irq is high while the token FIFO is not empty and interrupts are
// enabled. An acknowledge cycle (vme_iack instead of vme_stb) is answered
// like a read with IRQ_VECTOR.
// Access to the regions and FIFOs, invalidation by the processor, interrupt on
// a non-empty token FIFO and the error report follow the paper; the bus
// timing, the map and the vector are this design's choices, as is that a
// processor write changes only the stored word, not the count or the flag.
module tdrc_vme
  import tof_pkg::*;
#(
  parameter int          NREG       = 5,     // 4 tray regions + header region
  parameter int          IW         = 8,     // index width of the regions
  parameter int          CW         = 9,     // word count width
  parameter int          FCW        = 13,    // FIFO count width
  parameter logic [7:0]  IRQ_VECTOR = 8'hA5
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // VME side
  input  logic                        vme_stb,
  input  logic                        vme_iack,
  input  logic                        vme_we,
  input  logic [23:0]                 vme_addr,
  input  logic [31:0]                 vme_wdata,
  output logic                        vme_ack,
  output logic [31:0]                 vme_rdata,
  output logic                        irq,
  // token regions
  output token_t                      rd_token,
  output logic [IW-1:0]               rd_index,
  input  logic [NREG-1:0][FIBER_W-1:0] rd_data,
  input  logic [NREG-1:0][CW-1:0]     rd_count,
  input  logic [NREG-1:0]             rd_free,
  output logic [NREG-1:0]             host_wr,
  input  logic [NREG-1:0]             host_busy,
  output logic                        inv_valid,
  output token_t                      inv_token,
  // FIFOs
  input  token_t                      tok_dout,
  input  logic                        tok_empty,
  input  logic [FCW-1:0]              tok_count,
  output logic                        tok_pop,
  input  trg_word_t                   trgf_dout,
  input  logic                        trgf_empty,
  input  logic [FCW-1:0]              trgf_count,
  output logic                        trgf_pop,
  output logic                        trig_fifo_en,
  // errors (one-cycle strobes)
  input  logic [NREG-1:0]             err_in_use,
  input  logic [NREG-1:0]             err_overflow,
  input  logic [NREG-1:0][TOKEN_W-1:0] err_token,
  input  logic                        frame_err,
  input  logic                        fifo_ovf
);

  localparam int         SW      = $clog2(NREG);   // region number width
  localparam logic [3:0] SEL_REG = 4'h8;
  localparam logic [3:0] SEL_CNT = 4'h5;

  logic [3:0]  sel, sel_q;
  logic [7:0]  idx_q;
  logic        rd_q, iack_q, wr_wait;
  logic [31:0] fifo_q;
  logic        irq_en;
  logic [NREG-1:0] st_in_use, st_ovf;
  logic        st_frame, st_fifo;
  logic [14:0] last_err;

  assign sel      = vme_addr[23:20];
  assign rd_token = vme_addr[19:8];
  assign rd_index = vme_addr[IW-1:0];
  assign irq      = irq_en && !tok_empty;

  always_comb
    for (int r = 0; r < NREG; r++)
      host_wr[r] = vme_stb && vme_we && sel == 4'(r);

  assign tok_pop  = vme_stb && !vme_we && sel == SEL_REG && vme_addr[3:0] == 4'd0 && !tok_empty;
  assign trgf_pop = vme_stb && !vme_we && sel == SEL_REG && vme_addr[3:0] == 4'd1 && !trgf_empty;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      sel_q        <= '0;
      idx_q        <= '0;
      rd_q         <= 1'b0;
      wr_wait      <= 1'b0;
      iack_q       <= 1'b0;
      fifo_q       <= '0;
      vme_ack      <= 1'b0;
      vme_rdata    <= '0;
      irq_en       <= 1'b0;
      trig_fifo_en <= 1'b0;
      inv_valid    <= 1'b0;
      inv_token    <= '0;
      st_in_use    <= '0;
      st_ovf       <= '0;
      st_frame     <= 1'b0;
      st_fifo      <= 1'b0;
      last_err     <= '0;
    end else begin
      // error capture
      st_in_use <= st_in_use | err_in_use;
      st_ovf    <= st_ovf | err_overflow;
      if (frame_err) st_frame <= 1'b1;
      if (fifo_ovf)  st_fifo  <= 1'b1;
      for (int r = 0; r < NREG; r++)
        if (err_in_use[r]) last_err <= {3'(r), err_token[r]};

      // cycle 0: decode
      inv_valid <= 1'b0;
      rd_q      <= vme_iack || (vme_stb && !(vme_we && sel < 4'(NREG)));
      if (vme_stb && vme_we && sel < 4'(NREG)) wr_wait <= 1'b1;
      iack_q    <= vme_iack;
      if (vme_stb || vme_iack) begin
        sel_q <= sel;
        idx_q <= vme_addr[7:0];
      end
      if (vme_stb && sel == SEL_REG) begin
        unique case (vme_addr[3:0])
          4'd0: fifo_q <= {tok_empty, 19'b0, tok_dout};
          4'd1: fifo_q <= {trgf_empty, 11'b0, trgf_dout};
          default: ;
        endcase
        if (vme_we) begin
          unique case (vme_addr[3:0])
            4'd2: begin
              st_in_use <= st_in_use & ~vme_wdata[NREG-1:0];
              st_ovf    <= st_ovf & ~vme_wdata[NREG+7:8];
              if (vme_wdata[16]) st_fifo  <= 1'b0;
              if (vme_wdata[17]) st_frame <= 1'b0;
            end
            4'd3: begin
              trig_fifo_en <= vme_wdata[0];
              irq_en       <= vme_wdata[1];
            end
            4'd4: begin
              inv_valid <= 1'b1;
              inv_token <= vme_wdata[TOKEN_W-1:0];
            end
            default: ;
          endcase
        end
      end

      // cycle 1: region data is valid, answer
      vme_ack <= rd_q;
      if (wr_wait && !host_busy[sel_q[SW-1:0]]) begin
        wr_wait <= 1'b0;
        vme_ack <= 1'b1;
        vme_rdata <= '0;
      end
      if (rd_q) begin
        vme_rdata <= '0;
        if (iack_q) begin
          vme_rdata <= 32'(IRQ_VECTOR);
        end else if (sel_q < 4'(NREG)) begin
          vme_rdata <= 32'(rd_data[sel_q]);
        end else if (sel_q == SEL_CNT) begin
          for (int r = 0; r < NREG; r++)
            if (idx_q[2:0] == 3'(r)) vme_rdata <= {rd_free[r], 15'b0, 16'(rd_count[r])};
        end else if (sel_q == SEL_REG) begin
          unique case (idx_q[3:0])
            4'd0, 4'd1: vme_rdata <= fifo_q;
            4'd2: vme_rdata <= {14'b0, st_frame, st_fifo, 8'(st_ovf), 8'(st_in_use)};
            4'd3: vme_rdata <= {30'b0, irq_en, trig_fifo_en};
            4'd5: vme_rdata <= {17'b0, last_err};
            4'd6: vme_rdata <= {16'(trgf_count), 16'(tok_count)};
            default: vme_rdata <= '0;
          endcase
        end
      end
    end
  end

  ap_one_cycle_at_a_time: assert property (@(posedge clk) disable iff (!rst_n)
    (vme_stb || vme_iack) |=> !(vme_stb || vme_iack) [*2]);
  ap_no_cycle_while_writing: assert property (@(posedge clk) disable iff (!rst_n)
    wr_wait |-> !(vme_stb || vme_iack));

endmodule
