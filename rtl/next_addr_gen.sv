// next_addr_gen: next binary-search-tree address for every memory slice.
//
// The ADU stores the breakpoints as an in-order binary search tree, one tree
// level per pipeline stage (the paper's figure places b3 in stage 0, b1 and b5
// in stage 1, b0 b2 b4 b6 in stage 2). A node at address a therefore has its
// children at 2a (input not greater) and 2a+1 (input greater), and the next
// address is the current one with the comparison bit appended. After the last
// stage the address is the segment number used by the lookup-table cluster.
//
// Each 8-bit memory slice keeps its own address. The comparison result of
// element k is given to the slices that hold element k: slice k for 8-bit
// data, slices 2k and 2k+1 for 16-bit data, all four for 32-bit data.
// Addresses are AW bits wide (AW = log2 of the table depth); bits above the
// current tree level are zero and shift out at the top.
//
// Purely combinational.
module next_addr_gen
  import flex_sfu_pkg::*;
#(
  parameter int unsigned AW = 1
) (
  input  logic [NSLICE-1:0][AW-1:0] a_i,
  input  logic [NSLICE-1:0]         cmp_i,
  input  width_e                    width_i,
  output logic [NSLICE-1:0][AW-1:0] a_o
);

  logic [NSLICE-1:0] c;

  always_comb begin
    for (int j = 0; j < NSLICE; j++) begin
      unique case (width_i)
        W8:      c[j] = cmp_i[j];
        W16:     c[j] = cmp_i[j / 2];
        default: c[j] = cmp_i[0];
      endcase
    end
  end

  for (genvar j = 0; j < NSLICE; j++) begin : g_slice
    if (AW == 1) begin : g_one
      assign a_o[j] = c[j];
    end else begin : g_more
      assign a_o[j] = {a_i[j][AW-2:0], c[j]};
    end
  end

endmodule
