// tb_simd_spm: check of the SIMD single-port memory as the LTC uses it
// (four 16-bit slices, 32 entries). Random masked writes are mirrored in a
// model array; random reads with an independent address per slice must
// return the model contents exactly one cycle later and hold them while
// no read is requested.
module tb_simd_spm;
  localparam int unsigned NS = 4, SW = 16, D = 32, AW = 5;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic                  we = 1'b0, re = 1'b0;
  logic [AW-1:0]         waddr = '0;
  logic [NS-1:0][SW-1:0] wdata = '0, wmask = '0, rdata;
  logic [NS-1:0][AW-1:0] raddr = '0;
  logic [SW-1:0]         model [NS][D];
  int checks = 0, failures = 0;

  simd_spm #(.NSLICE(NS), .SLICE_W(SW), .DEPTH(D)) dut (
    .clk_i(clk), .we_i(we), .waddr_i(waddr), .wdata_i(wdata), .wmask_i(wmask),
    .re_i(re), .raddr_i(raddr), .rdata_o(rdata)
  );

  initial begin
    // fill every entry
    for (int i = 0; i < D; i++) begin
      @(negedge clk);
      we = 1'b1; waddr = AW'(i); wdata = {$urandom(), $urandom()}; wmask = '1;
      for (int s = 0; s < NS; s++) model[s][i] = wdata[s];
    end
    for (int n = 0; n < 2000; n++) begin
      logic [NS-1:0][SW-1:0] exp_rd;
      @(negedge clk);
      if ($urandom_range(0, 3) == 0) begin
        we = 1'b1; re = 1'b0;
        waddr = AW'($urandom()); wdata = {$urandom(), $urandom()};
        wmask = ($urandom_range(0, 1) == 1) ? {4{16'hFF00}} : {4{16'h00FF}};
        for (int s = 0; s < NS; s++)
          model[s][waddr] = (model[s][waddr] & ~wmask[s]) | (wdata[s] & wmask[s]);
      end else begin
        we = 1'b0; re = 1'b1;
        raddr = 20'($urandom());
        for (int s = 0; s < NS; s++) exp_rd[s] = model[s][raddr[s]];
        @(negedge clk);
        re = 1'b0;
        checks++;
        if (rdata != exp_rd) begin
          failures++;
          if (failures < 10) $display("FAIL: raddr=%h rdata=%h exp=%h", raddr, rdata, exp_rd);
        end
        // data holds while idle
        raddr = 20'($urandom());
        @(negedge clk);
        checks++;
        if (rdata != exp_rd) begin
          failures++;
          if (failures < 10) $display("FAIL: rdata changed while idle");
        end
      end
    end
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
