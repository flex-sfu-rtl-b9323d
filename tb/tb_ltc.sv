// tb_ltc: check of the lookup-table cluster at 32 entries.
//
// Slopes and offsets are loaded by separate writes (q before m for some
// entries, to show that one half does not disturb the other). Then random
// per-slice segment addresses are streamed one per cycle: slice j of the
// outputs must hold slice j of m and q of the entry addressed by slice j,
// together with the unchanged data and format, exactly 2 cycles later.
module tb_ltc;
  import flex_sfu_pkg::*;

  localparam int unsigned DEPTH = 32, LW = 5;

  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;   // a falling edge applies the asynchronous reset at once
  always #5 clk = ~clk;

  logic               cf_we = 1'b0, cf_q = 1'b0, in_valid = 1'b0, out_valid;
  logic [7:0]         cf_idx = '0;
  logic [31:0]        cf_wdata = '0, in_data = '0, out_data, out_m, out_q;
  fmt_t               in_fmt, out_fmt;
  logic [3:0][LW-1:0] in_addr = '0;
  logic [31:0]        mw [DEPTH], qw [DEPTH];
  int checks = 0, failures = 0;
  int unsigned cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  ltc #(.DEPTH(DEPTH)) dut (
    .clk_i(clk), .rst_ni(rst_n), .cf_we_i(cf_we), .cf_idx_i(cf_idx), .cf_q_i(cf_q),
    .cf_wdata_i(cf_wdata), .in_valid_i(in_valid), .in_data_i(in_data), .in_fmt_i(in_fmt),
    .in_addr_i(in_addr), .out_valid_o(out_valid), .out_data_o(out_data), .out_fmt_o(out_fmt),
    .out_m_o(out_m), .out_q_o(out_q)
  );

  typedef struct { logic [31:0] d, m, q; fmt_t f; int unsigned t; } exp_t;
  exp_t expq [$];

  always @(negedge clk) begin
    if (rst_n && out_valid) begin
      exp_t e;
      checks++;
      if (expq.size() == 0) begin failures++; $display("FAIL: spurious output"); end
      else begin
        e = expq.pop_front();
        if (out_m != e.m || out_q != e.q || out_data != e.d || out_fmt != e.f || cyc - e.t != 2) begin
          failures++;
          if (failures < 10) $display("FAIL: m=%h/%h q=%h/%h lat=%0d", out_m, e.m, out_q, e.q, cyc - e.t);
        end
      end
    end
  end

  task automatic load(int i, logic sel, logic [31:0] v);
    @(negedge clk);
    cf_we = 1'b1; cf_idx = 8'(i); cf_q = sel; cf_wdata = v;
  endtask

  initial begin
    in_fmt = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < DEPTH; i++) begin
      mw[i] = $urandom(); qw[i] = $urandom();
      if (i % 2 == 1) begin load(i, 1'b1, qw[i]); load(i, 1'b0, mw[i]); end
      else       begin load(i, 1'b0, mw[i]); load(i, 1'b1, qw[i]); end
    end
    // out-of-range index must not alias onto an entry
    load(DEPTH, 1'b0, 32'hDEAD_BEEF);
    @(negedge clk);
    cf_we = 1'b0;
    for (int n = 0; n < 1000; n++) begin
      exp_t e;
      @(negedge clk);
      in_valid = ($urandom_range(0, 4) != 0);
      in_addr = 20'($urandom());
      in_data = $urandom();
      in_fmt.width = width_e'($urandom_range(0, 2));
      in_fmt.is_float = 1'($urandom());
      if (in_valid) begin
        e.d = in_data; e.f = in_fmt; e.t = cyc;
        for (int j = 0; j < 4; j++) begin
          e.m[8*j +: 8] = mw[in_addr[j]][8*j +: 8];
          e.q[8*j +: 8] = qw[in_addr[j]][8*j +: 8];
        end
        expq.push_back(e);
      end
    end
    @(negedge clk);
    in_valid = 1'b0;
    repeat (4) @(negedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("FAIL: outputs missing"); end
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
