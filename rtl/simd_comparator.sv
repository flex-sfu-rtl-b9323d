// simd_comparator: greater-than comparison of SIMD fixed/floating-point data.
//
// One ADU stage compares the incoming data word with the breakpoint word read
// from its memory. The 32-bit words are taken as four 8-bit, two 16-bit or one
// 32-bit element (fmt_i.width) and bit k of cmp_o is 1 where element k of a_i
// is greater than element k of b_i, 0 where it is smaller or equal (equal
// values take the left segment, as in the paper's piecewise definition).
// Unused bits of cmp_o are 0.
//
// The paper asks for fixed- and floating-point support but leaves the formats
// open. Here fixed point is two's complement, where the binary point does not
// change the order. Floating point is sign-magnitude with the exponent above
// the mantissa, as in IEEE 754 and the common 8-bit formats; magnitudes then
// order like unsigned integers, so one circuit serves any exponent/mantissa
// split. +0 and -0 compare equal; NaNs are not treated specially.
//
// Purely combinational.
module simd_comparator
  import flex_sfu_pkg::*;
(
  input  logic [WORD_W-1:0] a_i,
  input  logic [WORD_W-1:0] b_i,
  input  fmt_t              fmt_i,
  output logic [NSLICE-1:0] cmp_o
);

  // a > b for one N-bit element held in the low bits of 32-bit operands.
  function automatic logic gt(input logic [31:0] a, input logic [31:0] b,
                              input int unsigned n, input logic flt);
    logic [31:0] sign, mag_mask, ma, mb;
    logic        sa, sb;
    sign     = 32'd1 << (n - 1);
    mag_mask = sign - 32'd1;
    sa       = |(a & sign);
    sb       = |(b & sign);
    ma       = a & mag_mask;
    mb       = b & mag_mask;
    if (!flt) begin
      // two's complement: flip the sign bit and compare unsigned
      return ((a & (sign | mag_mask)) ^ sign) > ((b & (sign | mag_mask)) ^ sign);
    end
    unique case ({sa, sb})
      2'b00:   return ma > mb;
      2'b01:   return !((ma == '0) && (mb == '0));
      2'b10:   return 1'b0;
      default: return ma < mb;
    endcase
  endfunction

  always_comb begin
    cmp_o = '0;
    unique case (fmt_i.width)
      W8: for (int k = 0; k < 4; k++)
            cmp_o[k] = gt({24'd0, a_i[8*k +: 8]}, {24'd0, b_i[8*k +: 8]}, 8, fmt_i.is_float);
      W16: for (int k = 0; k < 2; k++)
            cmp_o[k] = gt({16'd0, a_i[16*k +: 16]}, {16'd0, b_i[16*k +: 16]}, 16, fmt_i.is_float);
      default: cmp_o[0] = gt(a_i, b_i, 32, fmt_i.is_float);
    endcase
  end

endmodule
