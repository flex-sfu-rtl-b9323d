// tb_dcu: check of the data control unit with two clusters.
//
// Random instructions (nop, ld.bp, ld.cf, exe.af) are offered every cycle
// while a model pipeline retires issued elements a random 1-12 cycles later.
// One cycle after each accepted instruction the DCU must show exactly the
// matching write or issue strobe with the instruction's index, coefficient
// select, format and data (load data = first 32 bits of data_i). A load may
// be accepted only when no element is in flight; nop and exe.af always are.
module tb_dcu;
  import flex_sfu_pkg::*;

  localparam int unsigned NC = 2;

  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;   // a falling edge applies the asynchronous reset at once
  always #5 clk = ~clk;

  logic              in_valid = 1'b0, in_ready, retire = 1'b0;
  ctrl_t             ctrl;
  logic [NC*32-1:0]  data = '0, exe_data;
  logic              bp_we, cf_we, cf_q, exe_valid;
  logic [7:0]        idx;
  logic [31:0]       wdata;
  fmt_t              exe_fmt;
  int checks = 0, failures = 0, stalls = 0;
  int inflight = 0;
  int unsigned retire_at [$];
  int unsigned cyc = 0;

  dcu #(.NC(NC)) dut (
    .clk_i(clk), .rst_ni(rst_n), .in_valid_i(in_valid), .in_ready_o(in_ready),
    .ctrl_i(ctrl), .data_i(data), .retire_i(retire),
    .bp_we_o(bp_we), .cf_we_o(cf_we), .idx_o(idx), .cf_q_o(cf_q), .wdata_o(wdata),
    .exe_valid_o(exe_valid), .exe_data_o(exe_data), .exe_fmt_o(exe_fmt)
  );

  initial begin
    ctrl = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 3000; n++) begin
      ctrl_t       c;
      logic [NC*32-1:0] d;
      logic        acc, exp_ready;
      c.op = op_e'($urandom_range(0, 3));
      c.fmt.width = width_e'($urandom_range(0, 2));
      c.fmt.is_float = 1'($urandom());
      c.coef_q = 1'($urandom());
      c.idx = 8'($urandom());
      d = {$urandom(), $urandom()};
      // the model pipeline retires due elements this cycle
      retire = (retire_at.size() != 0) && (retire_at[0] <= cyc);
      ctrl = c; data = d; in_valid = 1'b1;
      #1;
      exp_ready = !((c.op == OP_LD_BP || c.op == OP_LD_CF) && inflight != 0);
      checks++;
      if (in_ready != exp_ready) begin
        failures++;
        if (failures < 10) $display("FAIL: ready=%b exp=%b op=%p inflight=%0d", in_ready, exp_ready, c.op, inflight);
      end
      if (!in_ready) stalls++;
      acc = in_ready;
      @(posedge clk);
      cyc++;
      if (retire) begin void'(retire_at.pop_front()); inflight--; end
      if (acc && c.op == OP_EXE) begin
        inflight++;
        retire_at.push_back(cyc + $urandom_range(1, 12));
      end
      @(negedge clk);
      checks++;
      if (bp_we != (acc && c.op == OP_LD_BP) || cf_we != (acc && c.op == OP_LD_CF) ||
          exe_valid != (acc && c.op == OP_EXE)) begin
        failures++;
        if (failures < 10) $display("FAIL: strobes bp=%b cf=%b exe=%b op=%p acc=%b", bp_we, cf_we, exe_valid, c.op, acc);
      end else if (acc && c.op != OP_NOP) begin
        checks++;
        if ((c.op == OP_EXE && (exe_data != d || exe_fmt != c.fmt)) ||
            (c.op != OP_EXE && (idx != c.idx || wdata != d[31:0])) ||
            (c.op == OP_LD_CF && cf_q != c.coef_q)) begin
          failures++;
          if (failures < 10) $display("FAIL: payload op=%p", c.op);
        end
      end
    end
    checks++;
    if (stalls == 0) begin failures++; $display("FAIL: no load was ever held"); end
    $display("loads held: %0d", stalls);
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
