// tb_adu: check of the address decoding unit at 32 segments (5 stages).
//
// For each of the six formats an independent sorted set of 31 random
// breakpoints per element lane is loaded by index; then random data words,
// one per cycle, are pushed through. Each slice's output address must equal
// the number of breakpoints of its lane strictly below its element (linear
// scan over real values), the data and format must come out unchanged, and
// every word must appear exactly log2(32) = 5 cycles after it went in.
module tb_adu;
  import flex_sfu_pkg::*;
  import tb_ref_pkg::*;

  localparam int unsigned DEPTH = 32, LW = 5, NBP = DEPTH - 1;

  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;   // a falling edge applies the asynchronous reset at once
  always #5 clk = ~clk;

  logic              bp_we = 1'b0, in_valid = 1'b0, out_valid;
  logic [7:0]        bp_idx = '0;
  logic [31:0]       bp_wdata = '0, in_data = '0, out_data;
  fmt_t              in_fmt, out_fmt;
  logic [3:0][LW-1:0] out_addr;
  int checks = 0, failures = 0;
  int unsigned cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  adu #(.DEPTH(DEPTH)) dut (
    .clk_i(clk), .rst_ni(rst_n), .bp_we_i(bp_we), .bp_idx_i(bp_idx), .bp_wdata_i(bp_wdata),
    .in_valid_i(in_valid), .in_data_i(in_data), .in_fmt_i(in_fmt),
    .out_valid_o(out_valid), .out_data_o(out_data), .out_fmt_o(out_fmt), .out_addr_o(out_addr)
  );

  typedef struct { logic [31:0] d; fmt_t f; logic [3:0][LW-1:0] a; int unsigned t; } exp_t;
  exp_t expq [$];

  always @(negedge clk) begin
    if (rst_n && out_valid) begin
      exp_t e;
      checks++;
      if (expq.size() == 0) begin failures++; $display("FAIL: spurious output"); end
      else begin
        e = expq.pop_front();
        if (out_addr != e.a || out_data != e.d || out_fmt != e.f || cyc - e.t != LW) begin
          failures++;
          if (failures < 10)
            $display("FAIL: x=%h fmt=%p addr=%h exp=%h lat=%0d", out_data, out_fmt, out_addr, e.a, cyc - e.t);
        end
      end
    end
  end

  initial begin
    in_fmt = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int fi = 0; fi < 6; fi++) begin
      fmt_t f;
      int ne;
      real key [NBP];
      logic [31:0] lane [4][NBP];
      f.width = width_e'(fi / 2);
      f.is_float = fi[0];
      ne = nelem(f.width);
      for (int k = 0; k < ne; k++) begin
        for (int i = 0; i < NBP; i++) begin
          lane[k][i] = rand_elem(f.width, f.is_float);
          key[i] = to_real(lane[k][i], f.width, f.is_float);
        end
        for (int i = 1; i < NBP; i++)
          for (int j = i; j > 0 && key[j-1] > key[j]; j--) begin
            automatic real t = key[j]; automatic logic [31:0] tv = lane[k][j];
            key[j] = key[j-1]; key[j-1] = t;
            lane[k][j] = lane[k][j-1]; lane[k][j-1] = tv;
          end
      end
      // load in a scrambled order: index = (7*i) mod 31
      for (int i = 0; i < NBP; i++) begin
        automatic int idx = (7 * i) % NBP;
        @(negedge clk);
        bp_we = 1'b1; bp_idx = 8'(idx); bp_wdata = '0;
        for (int k = 0; k < ne; k++) bp_wdata = put(bp_wdata, k, f.width, lane[k][idx]);
      end
      @(negedge clk);
      bp_we = 1'b0;
      for (int n = 0; n < 300; n++) begin
        exp_t e;
        @(negedge clk);
        in_valid = 1'b1; in_fmt = f; in_data = '0;
        for (int k = 0; k < ne; k++) begin
          automatic logic [31:0] v = ($urandom_range(0, 4) == 0) ? lane[k][$urandom_range(0, NBP-1)]
                                                       : rand_elem(f.width, f.is_float);
          in_data = put(in_data, k, f.width, v);
        end
        e.d = in_data; e.f = f; e.t = cyc;
        for (int k = 0; k < ne; k++) begin
          automatic real xv = to_real(field(in_data, k, f.width), f.width, f.is_float);
          automatic int seg = 0;
          for (int i = 0; i < NBP; i++) if (xv > to_real(lane[k][i], f.width, f.is_float)) seg++;
          for (int j = 0; j < 4; j++)
            if ((f.width == W8 && j == k) || (f.width == W16 && j / 2 == k) || f.width == W32)
              e.a[j] = LW'(seg);
        end
        expq.push_back(e);
      end
      @(negedge clk);
      in_valid = 1'b0;
      repeat (LW + 2) @(negedge clk);
    end
    checks++;
    if (expq.size() != 0) begin failures++; $display("FAIL: %0d outputs missing", expq.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
