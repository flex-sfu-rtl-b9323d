// tb_simd_comparator: random check of the SIMD greater-than comparator.
//
// For each of the six formats, random operand words are compared element by
// element against a reference that decodes both elements to real numbers
// (tb_ref_pkg) and compares those. A share of the operands is made equal,
// or +0 against -0, to exercise the equality cases. Unused result bits must
// be zero.
module tb_simd_comparator;
  import flex_sfu_pkg::*;
  import tb_ref_pkg::*;

  logic [31:0] a, b;
  fmt_t        fmt;
  logic [3:0]  cmp;
  int checks = 0, failures = 0;

  simd_comparator dut (.a_i(a), .b_i(b), .fmt_i(fmt), .cmp_o(cmp));

  initial begin
    for (int fi = 0; fi < 6; fi++) begin
      fmt.width = width_e'(fi / 2);
      fmt.is_float = fi[0];
      for (int n = 0; n < 4000; n++) begin
        automatic int ne = nelem(fmt.width);
        a = '0; b = '0;
        for (int k = 0; k < ne; k++) begin
          automatic logic [31:0] va = rand_elem(fmt.width, fmt.is_float);
          automatic logic [31:0] vb = rand_elem(fmt.width, fmt.is_float);
          automatic int r = $urandom_range(0, 7);
          if (r == 0) vb = va;
          if (r == 1) begin       // +0 against -0
            va = '0;
            vb = 32'd1 << (ebits(fmt.width) - 1);
          end
          if (r == 2) vb = va ^ 32'd1;   // neighbours
          a = put(a, k, fmt.width, va);
          b = put(b, k, fmt.width, vb);
        end
        #1;
        for (int k = 0; k < 4; k++) begin
          logic e;
          e = (k < ne) ? (to_real(field(a, k, fmt.width), fmt.width, fmt.is_float) >
                          to_real(field(b, k, fmt.width), fmt.width, fmt.is_float)) : 1'b0;
          checks++;
          if (cmp[k] != e) begin
            failures++;
            if (failures < 10) $display("FAIL: fmt=%p a=%h b=%h k=%0d cmp=%b", fmt, a, b, k, cmp);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
