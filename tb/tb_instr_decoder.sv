// tb_instr_decoder: exhaustive check of the instruction decoder.
//
// All 65536 instruction words are applied; every field of the decoded
// control struct is compared with a bit-slice of the word taken here, and
// words with the reserved width code or reserved bits set must be flagged
// and turned into nops.
module tb_instr_decoder;
  import flex_sfu_pkg::*;

  logic [15:0] instr;
  ctrl_t       ctrl;
  logic        illegal;
  int checks = 0, failures = 0;

  instr_decoder dut (.instr_i(instr), .ctrl_o(ctrl), .illegal_o(illegal));

  initial begin
    for (int i = 0; i < 65536; i++) begin
      logic bad;
      instr = 16'(i);
      #1;
      bad = (instr[3] && instr[2]) || instr[6] || instr[7];
      checks++;
      if (illegal != bad ||
          ctrl.op != (bad ? OP_NOP : op_e'(instr[1:0])) ||
          (!bad && ctrl.fmt.width != width_e'(instr[3:2])) ||
          ctrl.fmt.is_float != instr[4] ||
          ctrl.coef_q != instr[5] ||
          ctrl.idx != instr[15:8]) begin
        failures++;
        if (failures < 10) $display("FAIL: instr %h -> %p illegal=%b", instr, ctrl, illegal);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
