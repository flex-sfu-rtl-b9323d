// simd_spm: SIMD single-port memory of NSLICE independently addressed slices.
//
// The breakpoint memories of the address decoding unit (ADU) and the
// coefficient memory of the lookup-table cluster (LTC) are both built from
// four single-port memories, one per 8-bit data slice; an ADU slice holds one
// 8-bit breakpoint slice, an LTC slice one 8-bit m and one 8-bit q slice
// (SLICE_W = 16). Each slice has its own read address, so four 8-bit elements
// can each fetch their own table entry in the same cycle, while a 16- or
// 32-bit element drives the same address into the two or four slices that
// hold its parts. This organisation is the paper's.
//
// Writes store one word at waddr_i in all slices, under a bit mask (the LTC
// loads m and q halves separately). Reads are synchronous: rdata_o holds the
// addressed entries one cycle after re_i and keeps them while re_i is low.
// Being single-ported, a read and a write may not be issued in the same cycle;
// an assertion checks it. Written as a register array, not a macro.
module simd_spm #(
  parameter int unsigned NSLICE  = 4,
  parameter int unsigned SLICE_W = 8,
  parameter int unsigned DEPTH   = 1,
  localparam int unsigned AW     = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic                              clk_i,
  input  logic                              we_i,
  input  logic [AW-1:0]                     waddr_i,
  input  logic [NSLICE-1:0][SLICE_W-1:0]    wdata_i,
  input  logic [NSLICE-1:0][SLICE_W-1:0]    wmask_i,
  input  logic                              re_i,
  input  logic [NSLICE-1:0][AW-1:0]         raddr_i,
  output logic [NSLICE-1:0][SLICE_W-1:0]    rdata_o
);

  for (genvar s = 0; s < NSLICE; s++) begin : g_slice
    logic [SLICE_W-1:0] mem [DEPTH];
    logic [AW-1:0]      wa, ra;

    // With a single entry the address is ignored.
    assign wa = (DEPTH > 1) ? waddr_i    : '0;
    assign ra = (DEPTH > 1) ? raddr_i[s] : '0;

    always_ff @(posedge clk_i) begin
      if (we_i) begin
        mem[wa] <= (mem[wa] & ~wmask_i[s]) | (wdata_i[s] & wmask_i[s]);
      end else if (re_i) begin
        rdata_o[s] <= mem[ra];
      end
    end
  end

  a_single_port: assert property (@(posedge clk_i) !(we_i && re_i))
    else $error("simd_spm: read and write in the same cycle");

endmodule
