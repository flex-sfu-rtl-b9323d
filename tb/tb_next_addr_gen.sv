// tb_next_addr_gen: random check of the next-address generator (5-bit
// addresses, as for a 32-segment table). Each slice's next address must be
// its current address doubled plus the comparison bit of the element that
// owns the slice in the current format, truncated to 5 bits.
module tb_next_addr_gen;
  import flex_sfu_pkg::*;

  localparam int unsigned AW = 5;
  logic [3:0][AW-1:0] ai, ao;
  logic [3:0]         cmp;
  fmt_t               fmt;
  int checks = 0, failures = 0;

  next_addr_gen #(.AW(AW)) dut (.a_i(ai), .cmp_i(cmp), .width_i(fmt.width), .a_o(ao));

  initial begin
    for (int n = 0; n < 3000; n++) begin
      ai  = 20'($urandom());
      cmp = 4'($urandom());
      fmt.width = width_e'($urandom_range(0, 2));
      fmt.is_float = 1'($urandom());
      #1;
      for (int j = 0; j < 4; j++) begin
        automatic int owner = (fmt.width == W8) ? j : (fmt.width == W16) ? j / 2 : 0;
        automatic int e = ((int'(ai[j]) * 2) + int'(cmp[owner])) % (1 << AW);
        checks++;
        if (int'(ao[j]) != e) begin
          failures++;
          if (failures < 10) $display("FAIL: slice %0d a=%0d cmp=%b w=%p -> %0d", j, ai[j], cmp, fmt.width, ao[j]);
        end
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
