// flex_sfu: activation-function unit for a vector processor (top level).
//
// Flex-SFU evaluates an activation function as a piecewise linear function
// with freely placed breakpoints. For every input element it finds the
// segment the element falls in and hands the segment's slope m and offset q,
// together with the element, to the vector unit's multiply-add, which forms
// f(x) = m*x + q. Three instructions drive it: ld.bp loads a breakpoint,
// ld.cf loads a slope or offset, exe.af streams one word of data.
//
// Structure (as in the paper): instruction decoder -> data control unit ->
// NC clusters, each an address decoding unit (log2(DEPTH)-level pipelined
// binary search over DEPTH-1 breakpoints) followed by a lookup-table cluster
// (DEPTH coefficient pairs). Each cluster takes 32 bits of data_i per cycle as
// 4x8, 2x16 or 1x32-bit fixed- or floating-point elements, so the unit
// sustains NC x 32 bits per cycle.
//
// Interface: instr_i/data_i with in_valid_i/in_ready_o (loads wait until no
// element is in flight). Outputs are valid for one cycle per exe.af, in order,
// log2(DEPTH)+3 cycles after it was accepted; there is no backpressure. The
// multiply-add itself belongs to the vector unit and is not part of this
// module; the paper's latency figures (log2(depth)+5) appear to include it.
module flex_sfu
  import flex_sfu_pkg::*;
#(
  parameter int unsigned NC    = 1,
  parameter int unsigned DEPTH = 32,
  localparam int unsigned LW   = $clog2(DEPTH)
) (
  input  logic                        clk_i,
  input  logic                        rst_ni,
  input  logic                        in_valid_i,
  output logic                        in_ready_o,
  input  logic [INSTR_W-1:0]          instr_i,
  input  logic [NC*WORD_W-1:0]        data_i,
  output logic                        illegal_o,
  output logic                        out_valid_o,
  output fmt_t                        out_fmt_o,
  output logic [NC-1:0][WORD_W-1:0]   out_data_o,
  output logic [NC-1:0][WORD_W-1:0]   out_m_o,
  output logic [NC-1:0][WORD_W-1:0]   out_q_o
);

  ctrl_t                 ctrl;
  logic                  bp_we, cf_we, cf_q, exe_valid;
  logic [IDX_W-1:0]      idx;
  logic [WORD_W-1:0]     wdata;
  logic [NC*WORD_W-1:0]  exe_data;
  fmt_t                  exe_fmt;
  logic [NC-1:0]         c_valid;
  fmt_t                  c_fmt [NC];

  instr_decoder u_dec (
    .instr_i  (instr_i),
    .ctrl_o   (ctrl),
    .illegal_o(illegal_o)
  );

  dcu #(.NC(NC)) u_dcu (
    .clk_i      (clk_i),
    .rst_ni     (rst_ni),
    .in_valid_i (in_valid_i),
    .in_ready_o (in_ready_o),
    .ctrl_i     (ctrl),
    .data_i     (data_i),
    .retire_i   (out_valid_o),
    .bp_we_o    (bp_we),
    .cf_we_o    (cf_we),
    .idx_o      (idx),
    .cf_q_o     (cf_q),
    .wdata_o    (wdata),
    .exe_valid_o(exe_valid),
    .exe_data_o (exe_data),
    .exe_fmt_o  (exe_fmt)
  );

  for (genvar c = 0; c < NC; c++) begin : g_cluster
    logic                      a_valid;
    logic [WORD_W-1:0]         a_data;
    fmt_t                      a_fmt;
    logic [NSLICE-1:0][LW-1:0] a_addr;

    adu #(.DEPTH(DEPTH)) u_adu (
      .clk_i      (clk_i),
      .rst_ni     (rst_ni),
      .bp_we_i    (bp_we),
      .bp_idx_i   (idx),
      .bp_wdata_i (wdata),
      .in_valid_i (exe_valid),
      .in_data_i  (exe_data[WORD_W*c +: WORD_W]),
      .in_fmt_i   (exe_fmt),
      .out_valid_o(a_valid),
      .out_data_o (a_data),
      .out_fmt_o  (a_fmt),
      .out_addr_o (a_addr)
    );

    ltc #(.DEPTH(DEPTH)) u_ltc (
      .clk_i      (clk_i),
      .rst_ni     (rst_ni),
      .cf_we_i    (cf_we),
      .cf_idx_i   (idx),
      .cf_q_i     (cf_q),
      .cf_wdata_i (wdata),
      .in_valid_i (a_valid),
      .in_data_i  (a_data),
      .in_fmt_i   (a_fmt),
      .in_addr_i  (a_addr),
      .out_valid_o(c_valid[c]),
      .out_data_o (out_data_o[c]),
      .out_fmt_o  (c_fmt[c]),
      .out_m_o    (out_m_o[c]),
      .out_q_o    (out_q_o[c])
    );
  end

  // All clusters run in lock step; cluster 0 speaks for them.
  assign out_valid_o = c_valid[0];
  assign out_fmt_o   = c_fmt[0];

endmodule
