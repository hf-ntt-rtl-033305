// tb_workloads: the parameter sets evaluated for HF-NTT, each run end to end.
//
// Six instances of tb_wl_run run side by side on one clock:
//   N = 1024,  14-bit q = 12289,          NPE = 16 (one lane)
//   N = 4096,  60-bit modulus = 2 x 30-bit RNS lanes, NPE = 8 (balanced)
//   N = 4096,  60-bit modulus = 2 x 30-bit RNS lanes, NPE = 1 (area-optimised)
//   N = 4096, 180-bit modulus = 6 x 30-bit RNS lanes, NPE = 32 (performance)
//   N = 16384, 32-bit q = 4293918721,     NPE = 64 (one lane)
//   N = 65536, 32-bit q = 4293918721,     NPE = 16 (one lane)
// The 32-bit, N = 4096 case at the default NPE = 32 is the full-size test.
// Each computes a negacyclic polynomial product with NTT, MULT and INTT and
// checks every coefficient and every command's cycle count. The test ends
// when all six are done; a watchdog ends it otherwise.
module tb_workloads;
  logic clk = 0;
  always #5 clk = ~clk;

  logic fin [6];
  int   chk [6], fl [6];

  tb_wl_run #(.W(14), .N(1024),  .NPE(16), .NQ(1), .SET(0)) u_1k  (.clk, .fin(fin[0]), .checks(chk[0]), .failures(fl[0]));
  tb_wl_run #(.W(30), .N(4096),  .NPE(8),  .NQ(2), .SET(1)) u_60  (.clk, .fin(fin[1]), .checks(chk[1]), .failures(fl[1]));
  tb_wl_run #(.W(30), .N(4096),  .NPE(32), .NQ(6), .SET(1)) u_180 (.clk, .fin(fin[2]), .checks(chk[2]), .failures(fl[2]));
  tb_wl_run #(.W(32), .N(16384), .NPE(64), .NQ(1), .SET(2)) u_16k (.clk, .fin(fin[3]), .checks(chk[3]), .failures(fl[3]));
  tb_wl_run #(.W(30), .N(4096),  .NPE(1),  .NQ(2), .SET(1)) u_60a (.clk, .fin(fin[4]), .checks(chk[4]), .failures(fl[4]));
  tb_wl_run #(.W(32), .N(65536), .NPE(16), .NQ(1), .SET(2)) u_64k (.clk, .fin(fin[5]), .checks(chk[5]), .failures(fl[5]));

  initial begin
    int checks, failures;
    repeat (2) @(posedge clk);
    wait (fin[0] && fin[1] && fin[2] && fin[3] && fin[4] && fin[5]);
    checks = chk[0] + chk[1] + chk[2] + chk[3] + chk[4] + chk[5];
    failures = fl[0] + fl[1] + fl[2] + fl[3] + fl[4] + fl[5];
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d",
             chk[0] + chk[1] + chk[2] + chk[3] + chk[4] + chk[5],
             fl[0] + fl[1] + fl[2] + fl[3] + fl[4] + fl[5] + 1);
    $finish;
  end
endmodule
