// tb_tof_pkg: checks the shared encodings: field widths, the trigger word
// layout {command, DAQ command, token}, the framing words and the tags.
module tb_tof_pkg;
  import tof_pkg::*;
  int checks = 0, failures = 0;
  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask
  initial begin
    trg_word_t t;
    fword_t f;
    #1000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    trg_word_t t;
    check($bits(trg_word_t) == 20 && $bits(fword_t) == 21 && FWORD_W == 21, "widths");
    check(TOKEN_W == 12 && NTOKENS == 4096 && PMULT_W == 5 && MULT_W == 7, "paper sizes");
    check(NCH_TDIG * NTDIG == 192 && NTRAYS == 4, "tray size");
    t = '{trg_cmd: TRG_L2_ACCEPT, daq_cmd: 4'h3, token: 12'hABC};
    check(t == 20'hF3ABC, "trigger word layout");
    check(soe_word(KIND_DATA, 2'd2) == 21'h118000, "data SOE word");
    check(soe_word(KIND_TRIG, 2'd0) == 21'h120000, "trigger SOE word");
    check(eoe_word() == 21'h1E0000, "EOE word");
    check(TRG_L0 == 4'h4 && TRG_ABORT == 4'hE && TRG_L2_ACCEPT == 4'hF, "command codes");
    check(TAG_TDC_HI == 4'h8 && TAG_TDC_LO == 4'h9, "TDC tags");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
