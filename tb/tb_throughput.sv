// tb_throughput: latency and throughput of Flex-SFU for table depths of 4,
// 8, 16, 32 and 64 segments (one cluster), each run by a tp_run instance on
// its own clock. See tp_run for what is measured and checked.
module tb_throughput;
  int c [5], f [5];
  logic d [5];

  tp_run #(.DEPTH(4))  u4  (.done(d[0]), .checks(c[0]), .failures(f[0]));
  tp_run #(.DEPTH(8))  u8  (.done(d[1]), .checks(c[1]), .failures(f[1]));
  tp_run #(.DEPTH(16)) u16 (.done(d[2]), .checks(c[2]), .failures(f[2]));
  tp_run #(.DEPTH(32)) u32 (.done(d[3]), .checks(c[3]), .failures(f[3]));
  tp_run #(.DEPTH(64)) u64 (.done(d[4]), .checks(c[4]), .failures(f[4]));

  initial begin
    #1;   // let every run clear its done flag first
    wait (d[0] && d[1] && d[2] && d[3] && d[4]);
    $display("TB_RESULT checks=%0d failures=%0d", c.sum(), f.sum());
    $finish;
  end

  initial begin
    #2000000;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", c.sum(), f.sum() + 1);
    $finish;
  end
endmodule
