// instr_decoder: decodes a Flex-SFU instruction word into control fields.
//
// The paper extends the VPU instruction set by three instructions: ld.bp
// (load a breakpoint into the address decoding unit), ld.cf (load segment
// coefficients into the lookup-table cluster) and exe.af (evaluate the
// activation function on one data word). The decoder splits the 16-bit word
// (layout in flex_sfu_pkg, this design's own encoding) into the operation,
// the element format, the coefficient select and the table index. A
// reserved width code, or a set bit in the reserved field [7:6], is flagged
// on illegal_o and turned into a nop, so an unknown instruction never reaches
// the datapath.
//
// Purely combinational; no clock.
module instr_decoder
  import flex_sfu_pkg::*;
(
  input  logic [INSTR_W-1:0] instr_i,
  output ctrl_t              ctrl_o,
  output logic               illegal_o
);

  always_comb begin
    illegal_o          = (instr_i[3:2] == 2'd3) || (instr_i[7:6] != 2'b00);
    ctrl_o.op          = illegal_o ? OP_NOP : op_e'(instr_i[1:0]);
    ctrl_o.fmt.width   = illegal_o ? W32 : width_e'(instr_i[3:2]);
    ctrl_o.fmt.is_float = instr_i[4];
    ctrl_o.coef_q      = instr_i[5];
    ctrl_o.idx         = instr_i[15:8];
  end

endmodule
