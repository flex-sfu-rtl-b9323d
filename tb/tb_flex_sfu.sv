// tb_flex_sfu: end-to-end test of the Flex-SFU top at its default size
// (one cluster, 32 segments, 31 breakpoints).
//
// For each of the six data formats (8/16/32-bit, fixed and floating point)
// the test loads an independent sorted set of random breakpoints per element
// lane with ld.bp, random slope/offset words with ld.cf, and then streams
// random data with back-to-back exe.af instructions. Every output word is
// checked against a reference (segment = number of breakpoints below the
// element, found by a linear scan over real-valued elements), together with
// the delayed data, the format, the latency (log2(DEPTH)+3 cycles) and the
// throughput (one word per cycle). Mechanisms that must occur at least once:
// a load held back while elements are in flight, each format, inputs equal to
// a breakpoint, inputs left of the first and right of the last breakpoint, and
// a rejected (illegal) instruction.
module tb_flex_sfu;
  import flex_sfu_pkg::*;
  import tb_ref_pkg::*;

  localparam int unsigned DEPTH = 32;   // defaults of flex_sfu
  localparam int unsigned LW    = $clog2(DEPTH);
  localparam int unsigned NBP   = DEPTH - 1;
  localparam int unsigned NEXE  = 200;

  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;   // a falling edge applies the asynchronous reset at once
  always #5 clk = ~clk;

  logic               in_valid = 1'b0, in_ready, illegal;
  logic [INSTR_W-1:0] instr = '0;
  logic [WORD_W-1:0]  data = '0;
  logic               out_valid;
  fmt_t               out_fmt;
  logic [0:0][WORD_W-1:0] out_data, out_m, out_q;

  flex_sfu dut (
    .clk_i(clk), .rst_ni(rst_n), .in_valid_i(in_valid), .in_ready_o(in_ready),
    .instr_i(instr), .data_i(data), .illegal_o(illegal),
    .out_valid_o(out_valid), .out_fmt_o(out_fmt), .out_data_o(out_data),
    .out_m_o(out_m), .out_q_o(out_q)
  );

  int checks = 0, failures = 0;
  int unsigned cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // mechanism counters
  int n_load_stall = 0, n_eq_bp = 0, n_left = 0, n_right = 0, n_illegal = 0;
  int n_fmt [6];

  // reference state
  logic [31:0] bpw [NBP];          // breakpoint words as loaded
  logic [31:0] mw [DEPTH], qw [DEPTH];

  typedef struct {
    logic [31:0] data, m, q;
    fmt_t        fmt;
    int unsigned acc;
  } exp_t;
  exp_t expq [$];
  int unsigned out_cycles [$];

  function automatic logic [15:0] mk(op_e op, fmt_t f, logic sel, int idx);
    return {8'(idx), 2'b00, sel, f.is_float, f.width, op};
  endfunction

  task automatic issue(logic [15:0] ins, logic [31:0] d, output int unsigned acc);
    @(negedge clk);
    in_valid = 1'b1; instr = ins; data = d;
    #1;
    while (!in_ready) begin
      n_load_stall++;
      @(negedge clk);
      #1;
    end
    acc = cyc;
    @(posedge clk);
    #1 in_valid = 1'b0;
  endtask

  // output monitor
  always @(negedge clk) begin
    if (rst_n && out_valid) begin
      exp_t e;
      checks++;
      if (expq.size() == 0) begin
        failures++;
        $display("FAIL: unexpected output at cycle %0d", cyc);
      end else begin
        e = expq.pop_front();
        out_cycles.push_back(cyc);
        if (out_data[0] !== e.data || out_m[0] !== e.m || out_q[0] !== e.q || out_fmt !== e.fmt) begin
          failures++;
          $display("FAIL: x=%h m=%h/%h q=%h/%h fmt=%p/%p", out_data[0], out_m[0], e.m,
                   out_q[0], e.q, out_fmt, e.fmt);
        end
        checks++;
        if (cyc - e.acc != LW + 3) begin
          failures++;
          $display("FAIL: latency %0d, expected %0d", cyc - e.acc, LW + 3);
        end
      end
    end
  end

  task automatic run_format(fmt_t f, int fi);
    int ne = nelem(f.width);
    real key [NBP];
    logic [31:0] lane [4][NBP];
    int unsigned acc;
    // per lane: random sorted breakpoints
    for (int k = 0; k < ne; k++) begin
      for (int i = 0; i < NBP; i++) begin
        lane[k][i] = rand_elem(f.width, f.is_float);
        key[i] = to_real(lane[k][i], f.width, f.is_float);
      end
      for (int i = 1; i < NBP; i++)
        for (int j = i; j > 0 && key[j-1] > key[j]; j--) begin
          real t = key[j]; logic [31:0] tv = lane[k][j];
          key[j] = key[j-1]; key[j-1] = t;
          lane[k][j] = lane[k][j-1]; lane[k][j-1] = tv;
        end
    end
    for (int i = 0; i < NBP; i++) begin
      bpw[i] = '0;
      for (int k = 0; k < ne; k++) bpw[i] = put(bpw[i], k, f.width, lane[k][i]);
      issue(mk(OP_LD_BP, f, 1'b0, i), bpw[i], acc);
    end
    for (int i = 0; i < DEPTH; i++) begin
      mw[i] = $urandom(); qw[i] = $urandom();
      issue(mk(OP_LD_CF, f, 1'b0, i), mw[i], acc);
      issue(mk(OP_LD_CF, f, 1'b1, i), qw[i], acc);
    end
    // stream
    out_cycles.delete();
    for (int n = 0; n < NEXE; n++) begin
      exp_t e;
      logic [31:0] x = '0;
      for (int k = 0; k < ne; k++) begin
        logic [31:0] v;
        int r = $urandom_range(0, 9);
        if (r == 0)      v = lane[k][$urandom_range(0, NBP - 1)];
        else if (r == 1) v = lane[k][0];
        else if (r == 2) v = lane[k][NBP-1];
        else             v = rand_elem(f.width, f.is_float);
        x = put(x, k, f.width, v);
      end
      e.data = x; e.fmt = f; e.m = '0; e.q = '0;
      for (int k = 0; k < ne; k++) begin
        real xv = to_real(field(x, k, f.width), f.width, f.is_float);
        int seg = 0;
        for (int i = 0; i < NBP; i++) begin
          real bv = to_real(lane[k][i], f.width, f.is_float);
          if (xv > bv) seg++;
          if (xv == bv) n_eq_bp++;
        end
        if (seg == 0) n_left++;
        if (seg == NBP) n_right++;
        e.m = put(e.m, k, f.width, field(mw[seg], k, f.width));
        e.q = put(e.q, k, f.width, field(qw[seg], k, f.width));
      end
      issue(mk(OP_EXE, f, 1'b0, 0), x, acc);
      e.acc = acc;
      expq.push_back(e);
    end
    n_fmt[fi]++;
    // reloading breakpoint 0 with its own value right behind the burst must
    // wait until the burst has left the pipeline
    issue(mk(OP_LD_BP, f, 1'b0, 0), bpw[0], acc);
    checks++;
    if (expq.size() != 0) begin failures++; $display("FAIL: load overtook elements"); end
    // throughput: the NEXE outputs of the burst arrive on consecutive cycles
    wait (expq.size() == 0);
    @(negedge clk);
    checks++;
    if (out_cycles.size() != NEXE || out_cycles[NEXE-1] - out_cycles[0] != NEXE - 1) begin
      failures++;
      $display("FAIL: %0d outputs over %0d cycles", out_cycles.size(),
               out_cycles[out_cycles.size()-1] - out_cycles[0] + 1);
    end
  endtask

  initial begin
    fmt_t f;
    int unsigned acc;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int fi = 0; fi < 6; fi++) begin
      f.width = width_e'(fi / 2);
      f.is_float = fi[0];
      // the first load of each new format follows the previous burst
      // directly, so it has to wait for the pipeline to drain
      run_format(f, fi);
    end
    // a reserved width code is rejected and produces nothing
    @(negedge clk);
    in_valid = 1'b1; instr = 16'h000F; data = '0;
    #1;
    checks++;
    if (!illegal) begin failures++; $display("FAIL: illegal not flagged"); end
    else n_illegal++;
    @(negedge clk);
    in_valid = 1'b0;
    repeat (LW + 6) @(negedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("FAIL: outputs missing"); end
    // every mechanism must have happened
    checks++;
    if (n_load_stall == 0 || n_eq_bp == 0 || n_left == 0 || n_right == 0 || n_illegal == 0) begin
      failures++;
      $display("FAIL: mechanism not exercised");
    end
    for (int i = 0; i < 6; i++) begin
      checks++;
      if (n_fmt[i] == 0) failures++;
    end
    $display("mechanisms: load_stall_cycles=%0d eq_breakpoint=%0d left=%0d right=%0d illegal=%0d",
             n_load_stall, n_eq_bp, n_left, n_right, n_illegal);
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
