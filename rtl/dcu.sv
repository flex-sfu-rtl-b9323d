// dcu: data control unit, dispatches instruction data to the Flex-SFU units.
//
// For each accepted instruction the DCU registers the decoded control fields
// and the NC x 32-bit source data for one cycle (the dispatch register) and
// then either
//   ld.bp  : writes the word to the breakpoint memories of every cluster's ADU,
//   ld.cf  : writes the word to the m or q half of every cluster's LTC entry,
//   exe.af : issues one element word per cluster into the ADU/LTC pipeline.
// Load data is taken from the first 32 bits of data_i and broadcast, so all
// clusters hold the same function. This routing follows the paper; the
// handshake and the load hazard rule below are this design's choices.
//
// Interface: valid/ready on the instruction side. exe.af and nop are always
// accepted (the pipeline has no backpressure, so it cannot deadlock). A load
// is held (in_ready_o low) while exe.af elements are still in flight, counted
// from issue to retire_i; this keeps a memory write from meeting a read in the
// single-port memories and keeps elements from seeing a half-loaded function.
// Asynchronous active-low reset clears the valid flags and the counter.
module dcu
  import flex_sfu_pkg::*;
#(
  parameter int unsigned NC = 1
) (
  input  logic                    clk_i,
  input  logic                    rst_ni,
  input  logic                    in_valid_i,
  output logic                    in_ready_o,
  input  ctrl_t                   ctrl_i,
  input  logic [NC*WORD_W-1:0]    data_i,
  input  logic                    retire_i,
  // loads
  output logic                    bp_we_o,
  output logic                    cf_we_o,
  output logic [IDX_W-1:0]        idx_o,
  output logic                    cf_q_o,
  output logic [WORD_W-1:0]       wdata_o,
  // element stream
  output logic                    exe_valid_o,
  output logic [NC*WORD_W-1:0]    exe_data_o,
  output fmt_t                    exe_fmt_o
);

  logic       is_load, accept, issue;
  logic [7:0] inflight_q;
  logic       bp_q, cf_q, exe_q;

  assign is_load    = (ctrl_i.op == OP_LD_BP) || (ctrl_i.op == OP_LD_CF);
  assign in_ready_o = !is_load || (inflight_q == '0);
  assign accept     = in_valid_i && in_ready_o;
  assign issue      = accept && (ctrl_i.op == OP_EXE);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      bp_q       <= 1'b0;
      cf_q       <= 1'b0;
      exe_q      <= 1'b0;
      inflight_q <= '0;
    end else begin
      bp_q       <= accept && (ctrl_i.op == OP_LD_BP);
      cf_q       <= accept && (ctrl_i.op == OP_LD_CF);
      exe_q      <= issue;
      inflight_q <= inflight_q + 8'(issue) - 8'(retire_i);
    end
  end

  always_ff @(posedge clk_i) begin
    if (accept) begin
      idx_o      <= ctrl_i.idx;
      cf_q_o     <= ctrl_i.coef_q;
      wdata_o    <= data_i[WORD_W-1:0];
      exe_data_o <= data_i;
      exe_fmt_o  <= ctrl_i.fmt;
    end
  end

  assign bp_we_o     = bp_q;
  assign cf_we_o     = cf_q;
  assign exe_valid_o = exe_q;

  // During reset both sides are held at zero, so no disable clause is needed.
  a_no_underflow: assert property (@(posedge clk_i) retire_i |-> (inflight_q != '0))
    else $error("dcu: retire without an element in flight");

endmodule
