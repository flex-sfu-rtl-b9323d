// tp_run: throughput and latency run of one Flex-SFU configuration, used by
// tb_throughput. With DEPTH segments, fixed-point breakpoints 2i-(DEPTH-1)
// and slopes m_i = i (so every output names its own segment) are loaded for
// 8-, 16- and 32-bit data; then tensors of 2, 256 and 8192 32-bit words are
// processed, each preceded by a full reload of the function, as when a new
// activation is selected. Reported per run: total cycles from the first
// load to the last output and activations per cycle (and GAct/s at 600 MHz).
// Checked: every output's segment, the single-element latency
// log2(DEPTH)+3, back-to-back outputs during a stream, and that the largest
// tensor reaches at least 95% of the peak 4/2/1 elements per cycle.
module tp_run
  import flex_sfu_pkg::*;
  import tb_ref_pkg::*;
#(
  parameter int unsigned DEPTH = 8
) (
  output logic done,
  output int   checks,
  output int   failures
);
  localparam int unsigned LW = $clog2(DEPTH), NBP = DEPTH - 1;

  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;   // a falling edge applies the asynchronous reset at once
  always #5 clk = ~clk;

  logic        in_valid = 1'b0, in_ready, illegal, out_valid;
  logic [15:0] instr = '0;
  logic [31:0] data = '0;
  fmt_t        out_fmt;
  logic [0:0][31:0] out_data, out_m, out_q;
  int unsigned cyc = 0, n_out = 0, last_out = 0, first_out = 0;
  width_e      cur_w;
  always @(posedge clk) cyc <= cyc + 1;

  flex_sfu #(.NC(1), .DEPTH(DEPTH)) dut (
    .clk_i(clk), .rst_ni(rst_n), .in_valid_i(in_valid), .in_ready_o(in_ready),
    .instr_i(instr), .data_i(data), .illegal_o(illegal),
    .out_valid_o(out_valid), .out_fmt_o(out_fmt), .out_data_o(out_data),
    .out_m_o(out_m), .out_q_o(out_q)
  );

  function automatic logic [15:0] mk(op_e op, width_e w, logic sel, int idx);
    return {8'(idx), 2'b00, sel, 1'b0, w, op};
  endfunction

  function automatic logic [31:0] rep(width_e w, int v);
    logic [31:0] r = '0;
    for (int k = 0; k < nelem(w); k++) r = put(r, k, w, 32'(v));
    return r;
  endfunction

  task automatic issue(logic [15:0] ins, logic [31:0] d);
    @(negedge clk);
    in_valid = 1'b1; instr = ins; data = d;
    #1;
    while (!in_ready) begin @(negedge clk); #1; end
    @(posedge clk);
    #1 in_valid = 1'b0;
  endtask

  // every output: each element's slope must be its segment number
  always @(negedge clk) begin
    if (rst_n && out_valid) begin
      if (n_out == 0) first_out = cyc;
      n_out++;
      last_out = cyc;
      for (int k = 0; k < nelem(cur_w); k++) begin
        automatic longint x = longint'(to_real(field(out_data[0], k, cur_w), cur_w, 1'b0));
        automatic int seg = 0;
        for (int i = 0; i < NBP; i++) if (x > longint'(2 * i) - longint'(DEPTH) + 64'sd1) seg++;
        checks++;
        if (field(out_m[0], k, cur_w) != 32'(seg)) begin
          failures++;
          if (failures < 5) $display("FAIL D=%0d: x=%0d m=%0d seg=%0d", DEPTH, x, field(out_m[0], k, cur_w), seg);
        end
      end
    end
  end

  task automatic load(width_e w);
    for (int i = 0; i < NBP; i++) issue(mk(OP_LD_BP, w, 1'b0, i), rep(w, 2 * i - (int'(DEPTH) - 1)));
    for (int i = 0; i < DEPTH; i++) begin
      issue(mk(OP_LD_CF, w, 1'b0, i), rep(w, i));
      issue(mk(OP_LD_CF, w, 1'b1, i), rep(w, 0));
    end
  endtask

  initial begin
    int unsigned t0, lat;
    static int sizes [3] = '{2, 256, 8192};
    done = 1'b0; checks = 0; failures = 0;
    cur_w = W32;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    // single-element latency
    load(W32);
    @(negedge clk);
    t0 = cyc; n_out = 0;
    in_valid = 1'b1; instr = mk(OP_EXE, W32, 1'b0, 0); data = 32'd3;
    @(negedge clk);
    in_valid = 1'b0;
    wait (n_out == 1);
    lat = last_out - t0;
    checks++;
    if (lat != LW + 3) begin failures++; $display("FAIL D=%0d: latency %0d", DEPTH, lat); end
    $display("depth %0d: latency %0d cycles to coefficients, %0d with a 2-cycle multiply-add",
             DEPTH, lat, lat + 2);
    for (int wi = 0; wi < 3; wi++) begin
      automatic width_e w = width_e'(wi);
      for (int si = 0; si < 3; si++) begin
        real apc;
        repeat (LW + 5) @(negedge clk);
        cur_w = w;
        @(negedge clk);
        t0 = cyc;
        load(w);
        n_out = 0;
        for (int n = 0; n < sizes[si]; n++) begin
          automatic logic [31:0] x = '0;
          for (int k = 0; k < nelem(w); k++)
            x = put(x, k, w, 32'(int'($urandom_range(0, 2 * DEPTH + 2)) - (int'(DEPTH) + 1)));
          issue(mk(OP_EXE, w, 1'b0, 0), x);
        end
        wait (n_out == sizes[si]);
        apc = real'(sizes[si] * nelem(w)) / real'(last_out - t0 + 1);
        $display("depth %0d, %0d-bit, %0d words: %0d cycles, %0.3f act/cycle, %0.2f GAct/s at 600 MHz",
                 DEPTH, ebits(w), sizes[si], last_out - t0 + 1, apc, apc * 0.6);
        checks++;
        if (last_out - first_out != sizes[si] - 1) begin
          failures++;
          $display("FAIL D=%0d: stream had gaps", DEPTH);
        end
        if (si == 2) begin
          checks++;
          if (apc < 0.95 * nelem(w)) begin failures++; $display("FAIL D=%0d: below 95%% of peak", DEPTH); end
        end
      end
    end
    done = 1'b1;
  end
endmodule
