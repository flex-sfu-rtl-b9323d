// adu_stage: one level of the address decoding unit's binary search tree.
//
// Stage S holds the 2^S breakpoints of tree level S in a SIMD single-port
// memory. The element arriving from the previous stage (or from the DCU for
// stage 0, with address 0) is registered together with its per-slice tree
// address, while the same address reads the breakpoint memory. In the next
// cycle the SIMD comparator checks data > breakpoint and the next address
// generator appends the result to the address, which goes combinationally to
// the following stage. One element per cycle, one cycle per stage. This
// structure (registers on data and a_i, memory, comparator, next address
// generator) is the one of the paper's figure.
//
// Breakpoint writes arrive already decoded for this stage (we_i, waddr_i)
// and never coincide with a read (the DCU drains the pipeline first).
// Asynchronous active-low reset clears only the valid flag.
module adu_stage
  import flex_sfu_pkg::*;
#(
  parameter int unsigned STAGE = 0,
  parameter int unsigned LW    = 5,                 // log2(table depth)
  localparam int unsigned MD   = 1 << STAGE,        // breakpoints in this level
  localparam int unsigned MAW  = (MD > 1) ? $clog2(MD) : 1
) (
  input  logic                        clk_i,
  input  logic                        rst_ni,
  // breakpoint load
  input  logic                        we_i,
  input  logic [MAW-1:0]              waddr_i,
  input  logic [WORD_W-1:0]           wdata_i,
  // element in
  input  logic                        in_valid_i,
  input  logic [WORD_W-1:0]           in_data_i,
  input  fmt_t                        in_fmt_i,
  input  logic [NSLICE-1:0][LW-1:0]   in_addr_i,
  // element out (address is combinational from this stage's registers)
  output logic                        out_valid_o,
  output logic [WORD_W-1:0]           out_data_o,
  output fmt_t                        out_fmt_o,
  output logic [NSLICE-1:0][LW-1:0]   out_addr_o
);

  logic                        valid_q;
  logic [WORD_W-1:0]           data_q;
  fmt_t                        fmt_q;
  logic [NSLICE-1:0][LW-1:0]   addr_q;
  logic [NSLICE-1:0][MAW-1:0]  raddr;
  logic [NSLICE-1:0][SLICE_W-1:0] bp;
  logic [NSLICE-1:0]           cmp;

  always_comb begin
    for (int j = 0; j < NSLICE; j++) begin
      raddr[j] = (STAGE == 0) ? '0 : MAW'(in_addr_i[j]);
    end
  end

  simd_spm #(
    .NSLICE (NSLICE),
    .SLICE_W(SLICE_W),
    .DEPTH  (MD)
  ) u_mem (
    .clk_i  (clk_i),
    .we_i   (we_i),
    .waddr_i(waddr_i),
    .wdata_i(wdata_i),
    .wmask_i('1),
    .re_i   (in_valid_i),
    .raddr_i(raddr),
    .rdata_o(bp)
  );

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) valid_q <= 1'b0;
    else         valid_q <= in_valid_i;
  end

  always_ff @(posedge clk_i) begin
    if (in_valid_i) begin
      data_q <= in_data_i;
      fmt_q  <= in_fmt_i;
      addr_q <= (STAGE == 0) ? '0 : in_addr_i;
    end
  end

  simd_comparator u_cmp (
    .a_i  (data_q),
    .b_i  (bp),
    .fmt_i(fmt_q),
    .cmp_o(cmp)
  );

  next_addr_gen #(.AW(LW)) u_nag (
    .a_i    (addr_q),
    .cmp_i  (cmp),
    .width_i(fmt_q.width),
    .a_o    (out_addr_o)
  );

  assign out_valid_o = valid_q;
  assign out_data_o  = data_q;
  assign out_fmt_o   = fmt_q;

endmodule
