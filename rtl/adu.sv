// adu: address decoding unit, a pipelined binary search over the breakpoints.
//
// A table of DEPTH segments is separated by DEPTH-1 breakpoints, kept sorted
// as a binary search tree of log2(DEPTH) levels, one adu_stage per level.
// An element enters stage 0 with address 0 and leaves the last stage with,
// in every 8-bit slice, the number of the segment its element falls in:
// segment i covers b[i-1] < x <= b[i]. Breakpoints may be placed anywhere,
// which is what lets the table use non-uniform segments. Throughput is one
// 32-bit word per cycle, latency log2(DEPTH) cycles.
//
// ld.bp writes breakpoint b[idx] (a full 32-bit word; for 8- and 16-bit data
// software replicates the value into every element position). With n = idx+1
// and t the number of trailing zeros of n, b[idx] belongs to tree level
// log2(DEPTH)-1-t at address n >> (t+1); for DEPTH = 8 this gives the
// placement drawn in the paper (b3 | b1 b5 | b0 b2 b4 b6). Indices of
// DEPTH-1 and above are ignored.
module adu
  import flex_sfu_pkg::*;
#(
  parameter int unsigned DEPTH = 32,
  localparam int unsigned LW   = $clog2(DEPTH)
) (
  input  logic                        clk_i,
  input  logic                        rst_ni,
  input  logic                        bp_we_i,
  input  logic [IDX_W-1:0]            bp_idx_i,
  input  logic [WORD_W-1:0]           bp_wdata_i,
  input  logic                        in_valid_i,
  input  logic [WORD_W-1:0]           in_data_i,
  input  fmt_t                        in_fmt_i,
  output logic                        out_valid_o,
  output logic [WORD_W-1:0]           out_data_o,
  output fmt_t                        out_fmt_o,
  output logic [NSLICE-1:0][LW-1:0]   out_addr_o
);

  // Decode the breakpoint index into tree level and address.
  logic [IDX_W:0]   n;
  int unsigned      tz;
  logic [LW-1:0]    wlevel;
  logic [LW-2:0]    waddr;   // the widest level has DEPTH/2 entries
  logic             idx_ok;

  always_comb begin
    n  = {1'b0, bp_idx_i} + 1'b1;
    tz = 0;
    for (int b = LW - 1; b >= 0; b--) begin
      if (n[b]) tz = b;   // lowest set bit wins (loop runs downwards)
    end
    idx_ok = (bp_idx_i < IDX_W'(DEPTH - 1));
    wlevel = LW'(LW - 1 - tz);
    waddr  = (LW-1)'(n >> (tz + 1));
  end

  logic                      v   [LW+1];
  logic [WORD_W-1:0]         d   [LW+1];
  fmt_t                      f   [LW+1];
  logic [NSLICE-1:0][LW-1:0] a   [LW+1];

  assign v[0] = in_valid_i;
  assign d[0] = in_data_i;
  assign f[0] = in_fmt_i;
  assign a[0] = '0;

  for (genvar s = 0; s < LW; s++) begin : g_stage
    localparam int unsigned MAW = (s > 0) ? s : 1;
    adu_stage #(.STAGE(s), .LW(LW)) u_stage (
      .clk_i      (clk_i),
      .rst_ni     (rst_ni),
      .we_i       (bp_we_i && idx_ok && (wlevel == LW'(s))),
      .waddr_i    (MAW'(waddr)),
      .wdata_i    (bp_wdata_i),
      .in_valid_i (v[s]),
      .in_data_i  (d[s]),
      .in_fmt_i   (f[s]),
      .in_addr_i  (a[s]),
      .out_valid_o(v[s+1]),
      .out_data_o (d[s+1]),
      .out_fmt_o  (f[s+1]),
      .out_addr_o (a[s+1])
    );
  end

  assign out_valid_o = v[LW];
  assign out_data_o  = d[LW];
  assign out_fmt_o   = f[LW];
  assign out_addr_o  = a[LW];

endmodule
