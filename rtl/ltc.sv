// ltc: lookup-table cluster, the segment coefficient table.
//
// Entry i holds slope m and offset q of segment i, split into four 8-bit
// slices; slice j of the SIMD single-port memory stores {m_j, q_j}, 16 bits,
// as in the paper. Every slice is read at the segment address the ADU found
// for the element it belongs to, so a 32-bit output word carries four 8-bit,
// two 16-bit or one 32-bit (m, q) pair aligned with the input elements.
//
// Timing: cycle 1 reads the memory while the input data is registered;
// cycle 2 registers the coefficients and the data on coef_out/data_out (the
// two output registers of the paper's figure). Latency 2, one word per cycle.
//
// ld.cf brings only 32 bits, so m and q of an entry are loaded by two
// instructions (cf_q_i selects q); this split is this design's own choice.
module ltc
  import flex_sfu_pkg::*;
#(
  parameter int unsigned DEPTH = 32,
  localparam int unsigned LW   = $clog2(DEPTH)
) (
  input  logic                        clk_i,
  input  logic                        rst_ni,
  input  logic                        cf_we_i,
  input  logic [IDX_W-1:0]            cf_idx_i,
  input  logic                        cf_q_i,
  input  logic [WORD_W-1:0]           cf_wdata_i,
  input  logic                        in_valid_i,
  input  logic [WORD_W-1:0]           in_data_i,
  input  fmt_t                        in_fmt_i,
  input  logic [NSLICE-1:0][LW-1:0]   in_addr_i,
  output logic                        out_valid_o,
  output logic [WORD_W-1:0]           out_data_o,
  output fmt_t                        out_fmt_o,
  output logic [WORD_W-1:0]           out_m_o,
  output logic [WORD_W-1:0]           out_q_o
);

  localparam int unsigned CW = 2 * SLICE_W;

  logic [NSLICE-1:0][CW-1:0] wdata, wmask, rdata;
  logic                      we;

  always_comb begin
    for (int j = 0; j < NSLICE; j++) begin
      wdata[j] = {cf_wdata_i[SLICE_W*j +: SLICE_W], cf_wdata_i[SLICE_W*j +: SLICE_W]};
      wmask[j] = cf_q_i ? {{SLICE_W{1'b0}}, {SLICE_W{1'b1}}}
                        : {{SLICE_W{1'b1}}, {SLICE_W{1'b0}}};
    end
    we = cf_we_i && (cf_idx_i < IDX_W'(DEPTH));
  end

  simd_spm #(
    .NSLICE (NSLICE),
    .SLICE_W(CW),
    .DEPTH  (DEPTH)
  ) u_mem (
    .clk_i  (clk_i),
    .we_i   (we),
    .waddr_i(LW'(cf_idx_i)),
    .wdata_i(wdata),
    .wmask_i(wmask),
    .re_i   (in_valid_i),
    .raddr_i(in_addr_i),
    .rdata_o(rdata)
  );

  logic              v1_q, v2_q;
  logic [WORD_W-1:0] d1_q;
  fmt_t              f1_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      v1_q <= 1'b0;
      v2_q <= 1'b0;
    end else begin
      v1_q <= in_valid_i;
      v2_q <= v1_q;
    end
  end

  always_ff @(posedge clk_i) begin
    if (in_valid_i) begin
      d1_q <= in_data_i;
      f1_q <= in_fmt_i;
    end
    if (v1_q) begin
      out_data_o <= d1_q;
      out_fmt_o  <= f1_q;
      for (int j = 0; j < NSLICE; j++) begin
        out_m_o[SLICE_W*j +: SLICE_W] <= rdata[j][CW-1 -: SLICE_W];
        out_q_o[SLICE_W*j +: SLICE_W] <= rdata[j][SLICE_W-1:0];
      end
    end
  end

  assign out_valid_o = v2_q;

endmodule
