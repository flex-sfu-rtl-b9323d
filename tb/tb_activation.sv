// tb_activation: activation functions evaluated through Flex-SFU in FP32 and Q4.11.
//
// Two clusters (NC = 2, the per-lane configuration of a 64-bit vector lane)
// with tables of 32 segments. For GELU, SiLU, Tanh and Sigmoid on [-8, 8] and
// Exp on [-10, 0.1] the test builds a piecewise linear approximation with n
// segments from n-1 breakpoints spread uniformly over the interval, values f(p_i) at the inner
// breakpoints, and outer segments that lie on the function's asymptotes
// (GELU, SiLU: 0 on the left, y = x on the right; Tanh: -1 / +1; Sigmoid:
// 0 / 1; Exp: 0 on the left, and on the right the last inner segment is
// simply continued, since Exp has no right asymptote).
// Every function is run in IEEE single precision (one element per cluster
// word) with 4, 8, 16 and 32 segments, as in the paper's precision sweep
// (fewer segments repeat the last breakpoint in the unused slots), and in
// 16-bit fixed point Q4.11 (two elements per word, each finding its own
// segment) with 32 segments. Breakpoints and segment slopes/offsets are
// rounded to the run's format and loaded, replicated into every lane,
// random inputs (one unit beyond the interval on both sides; Exp only up
// to 0, as used inside Softmax) are streamed one word per cluster per
// cycle, and a multiply-add modelled here forms y = m*x + q. Checks: the selected (m, q) equals the segment the
// input falls in, bit for bit; at 32 segments the mean squared error against
// the exact function stays below a bound per function (uniform breakpoints;
// the non-uniform placement found by an offline optimiser would do better);
// and from 8 segments on every doubling of the segments at least halves the
// MSE (the paper reports about 16x per doubling; uniform placement gives
// about 20x from 8 to 16 and from 16 to 32).
module tb_activation;
  import flex_sfu_pkg::*;
  import tb_ref_pkg::*;

  localparam int unsigned NC = 2, DEPTH = 32, LW = 5, NBP = DEPTH - 1;
  localparam int unsigned NX = 2000;     // input words per cluster and function

  logic clk = 1'b0, rst_n = 1'b1;
  initial #1 rst_n = 1'b0;   // a falling edge applies the asynchronous reset at once
  always #5 clk = ~clk;

  logic               in_valid = 1'b0, in_ready, illegal, out_valid;
  logic [15:0]        instr = '0;
  logic [NC*32-1:0]   data = '0;
  fmt_t               out_fmt;
  logic [NC-1:0][31:0] out_data, out_m, out_q;

  flex_sfu #(.NC(NC), .DEPTH(DEPTH)) dut (
    .clk_i(clk), .rst_ni(rst_n), .in_valid_i(in_valid), .in_ready_o(in_ready),
    .instr_i(instr), .data_i(data), .illegal_o(illegal),
    .out_valid_o(out_valid), .out_fmt_o(out_fmt), .out_data_o(out_data),
    .out_m_o(out_m), .out_q_o(out_q)
  );

  int checks = 0, failures = 0;
  real p [NBP], m [DEPTH], q [DEPTH];
  int  fsel;
  real sq_err, n_err;

  function automatic real fn(int s, real x);
    case (s)
      0: return 0.5 * x * (1.0 + tanh_(0.7978845608 * (x + 0.044715 * x * x * x)));
      1: return x / (1.0 + $exp(-x));
      2: return tanh_(x);
      3: return 1.0 / (1.0 + $exp(-x));
      default: return $exp(x);
    endcase
  endfunction

  function automatic real tanh_(real x);
    return ($exp(2.0 * x) - 1.0) / ($exp(2.0 * x) + 1.0);
  endfunction

  // segment index of x: number of breakpoints below x
  function automatic int seg_of(real x);
    int s = 0;
    for (int i = 0; i < NBP; i++) if (x > p[i]) s++;
    return s;
  endfunction

  function automatic logic [31:0] f32(real r);
    return real_to_f32(r);
  endfunction

  task automatic issue(logic [15:0] ins, logic [NC*32-1:0] d);
    @(negedge clk);
    in_valid = 1'b1; instr = ins; data = d;
    #1;
    while (!in_ready) begin @(negedge clk); #1; end
    @(posedge clk);
    #1 in_valid = 1'b0;
  endtask


  // number format of the current run: 0 = IEEE single (one element per
  // word), 1 = 16-bit fixed point Q4.11 (two elements per word)
  bit fx;

  function automatic logic [15:0] mk(op_e op, logic sel, int idx);
    return fx ? {8'(idx), 2'b00, sel, 1'b0, W16, op} : {8'(idx), 2'b00, sel, 1'b1, W32, op};
  endfunction

  // real -> Q4.11, rounded, saturated
  function automatic logic [15:0] q411(real r);
    real t = r * 2048.0;
    longint v = longint'(t);   // real to integer conversion rounds
    if (v > 32767) v = 32767;
    if (v < -32768) v = -32768;
    return 16'(v);
  endfunction

  function automatic real from_q411(logic [15:0] v);
    return real'($signed(v)) / 2048.0;
  endfunction

  // value rounded to the current format, and the word holding it in every lane
  function automatic real rnd(real r);
    return fx ? from_q411(q411(r)) : f32_to_real(f32(r));
  endfunction

  function automatic logic [31:0] word(real r);
    return fx ? {q411(r), q411(r)} : f32(r);
  endfunction

  // output checker and multiply-add model
  always @(negedge clk) begin
    if (rst_n && out_valid) begin
      for (int c = 0; c < NC; c++) begin
        for (int k = 0; k < (fx ? 2 : 1); k++) begin
          automatic real x, y;
          automatic int  s;
          automatic logic [31:0] em, eq, gm, gq;
          if (fx) begin
            automatic logic signed [15:0] x16 = out_data[c][16*k +: 16];
            automatic logic signed [15:0] m16 = out_m[c][16*k +: 16];
            automatic logic signed [15:0] q16 = out_q[c][16*k +: 16];
            // fixed-point multiply-add: (m*x + q*2^11) >> 11
            automatic longint acc = (longint'(m16) * longint'(x16) + (longint'(q16) <<< 11)) >>> 11;
            x  = from_q411(x16);
            y  = real'(acc) / 2048.0;
            s  = seg_of(x);
            em = {16'd0, q411(m[s])}; eq = {16'd0, q411(q[s])};
            gm = {16'd0, m16};    gq = {16'd0, q16};
          end else begin
            x  = f32_to_real(out_data[c]);
            y  = f32_to_real(out_m[c]) * x + f32_to_real(out_q[c]);
            s  = seg_of(x);
            em = f32(m[s]); eq = f32(q[s]);
            gm = out_m[c];  gq = out_q[c];
          end
          checks++;
          if (gm != em || gq != eq) begin
            failures++;
            if (failures < 10) $display("FAIL: f%0d x=%f seg=%0d m=%h/%h q=%h/%h", fsel, x, s, gm, em, gq, eq);
          end
          sq_err += (y - fn(fsel, x)) ** 2;
          n_err  += 1.0;
        end
      end
    end
  end

  initial begin
    real lo, hi, ml, cl, mr, cr;
    static real bound [2][5] = '{'{6e-5, 4e-5, 8e-5, 3e-6, 1e-4},
                                 '{6e-5, 4e-5, 8e-5, 3e-6, 1e-4}};
    static string name [5] = '{"GELU", "SiLU", "Tanh", "Sigmoid", "Exp"};
    real mse [5][4];   // FP32 MSE per function and segment count 4, 8, 16, 32
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    // runs 0..19: FP32 with 4, 8, 16 and 32 segments; runs 20..24: Q4.11 with 32
    for (int run = 0; run < 25; run++) begin
      automatic int s  = run % 5;
      automatic int sz = (run < 20) ? run / 5 : 3;
      automatic int nb = (4 << sz) - 1;   // breakpoints in use
      real v [NBP];
      fx = (run >= 20);
      fsel = s;
      lo = (s == 4) ? -10.0 : -8.0;
      hi = (s == 4) ? 0.1 : 8.0;
      // asymptotes y = m*x + c on both sides (Exp: right side closes with
      // the chord continuing past the last breakpoint)
      ml = 0.0; cl = (s == 2) ? -1.0 : 0.0;
      mr = (s <= 1) ? 1.0 : 0.0;
      cr = (s == 2 || s == 3) ? 1.0 : 0.0;
      for (int i = 0; i < nb; i++) begin
        p[i] = rnd(lo + (hi - lo) * i / (nb - 1));
        v[i] = fn(s, p[i]);
      end
      v[0] = ml * p[0] + cl;
      if (s != 4) v[nb-1] = mr * p[nb-1] + cr;
      else mr = (v[nb-1] - v[nb-2]) / (p[nb-1] - p[nb-2]);
      m[0] = ml;  q[0] = v[0] - ml * p[0];
      for (int i = 1; i < nb; i++) begin
        m[i] = (v[i] - v[i-1]) / (p[i] - p[i-1]);
        q[i] = v[i] - m[i] * p[i];
      end
      // unused slots: the last breakpoint repeated, all of them selecting
      // the right-hand segment
      for (int i = nb; i < NBP; i++) p[i] = p[nb-1];
      for (int i = nb; i < DEPTH; i++) begin
        m[i] = mr; q[i] = v[nb-1] - mr * p[nb-1];
      end
      for (int i = 0; i < NBP; i++) issue(mk(OP_LD_BP, 1'b0, i), {NC{word(p[i])}});
      for (int i = 0; i < DEPTH; i++) begin
        issue(mk(OP_LD_CF, 1'b0, i), {NC{word(m[i])}});
        issue(mk(OP_LD_CF, 1'b1, i), {NC{word(q[i])}});
      end
      sq_err = 0.0; n_err = 0.0;
      for (int n = 0; n < NX; n++) begin
        logic [NC*32-1:0] d;
        for (int c = 0; c < NC; c++) begin
          automatic real r0 = lo - 1.0 + ((s == 4) ? 1.0 - lo : hi - lo + 2.0) *
                    real'($urandom_range(0, 1 << 20)) / real'(1 << 20);
          automatic real r1 = lo - 1.0 + ((s == 4) ? 1.0 - lo : hi - lo + 2.0) *
                    real'($urandom_range(0, 1 << 20)) / real'(1 << 20);
          d[32*c +: 32] = fx ? {q411(r1), q411(r0)} : f32(r0);
        end
        issue(mk(OP_EXE, 1'b0, 0), d);
      end
      repeat (LW + 5) @(negedge clk);
      checks++;
      $display("%-7s %-5s %2d segments: %0d inputs, MSE %e", name[s], fx ? "Q4.11" : "FP32",
               nb + 1, int'(n_err), sq_err / n_err);
      if (n_err != real'(NC * NX * (fx ? 2 : 1))) failures++;
      if (sz == 3) begin
        checks++;
        if (sq_err / n_err > bound[fx][s]) begin
          failures++;
          $display("FAIL: MSE above bound %e", bound[fx][s]);
        end
      end
      if (!fx) mse[s][sz] = sq_err / n_err;
    end
    // from 8 segments on each doubling of the segment count must at least
    // halve the MSE. From 4 to 8 uniform breakpoints GELU keeps the same
    // ReLU-like shape, so there the MSE need only not grow beyond the 10%
    // that different random inputs can cause.
    for (int z = 1; z < 4; z++) begin
      automatic real g = 1.0;
      for (int s = 0; s < 5; s++) begin
        checks++;
        g *= mse[s][z-1] / mse[s][z];
        $display("%-7s FP32 %2d -> %2d segments: MSE reduced %.1fx", name[s], 2 << z, 4 << z,
                 mse[s][z-1] / mse[s][z]);
        if (!(mse[s][z] <= 1.1 * mse[s][z-1]) || (z > 1 && !(mse[s][z] < 0.5 * mse[s][z-1]))) begin
          failures++;
          $display("FAIL: too little gain");
        end
      end
      $display("FP32 %2d -> %2d segments: geometric mean reduction %.1fx", 2 << z, 4 << z,
               g ** 0.2);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
