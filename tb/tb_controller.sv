// tb_controller: runs NTT, INTT and MULT commands on an N = 64, NPE = 1
// controller and compares the issued slot stream with the expected order:
// stages 0..5 (NTT) or 5..0 (INTT), slots 0..7, sub-cycles 0..3 (0..7 for
// MULT), one per cycle without gaps; then checks the done pulse timing
// (issue cycles + 11 for NTT/MULT, + 12 for INTT), busy, and that a start
// while busy is ignored.
module tb_controller;
  import hf_pkg::*;
  localparam int unsigned N = 64, NPE = 1, K = 6, NB = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, sel = 0, busy, done;
  op_t op = OP_NTT;
  issue_t iss;
  int checks = 0, failures = 0;

  controller #(.N(N), .NPE(NPE)) dut (.*);

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", msg); end
  endtask

  task automatic run(input op_t o, input logic s);
    int subs, cyc, n_exp, stg;
    subs = (o == OP_MULT) ? NB / NPE : NB / (2 * NPE);
    @(negedge clk);
    op = o; sel = s; start = 1;
    @(negedge clk);
    start = 0;
    cyc = 1;
    n_exp = 0;
    for (int st = 0; st < ((o == OP_MULT) ? 1 : int'(K)); st++)
      for (int sl = 0; sl < int'(NB); sl++)
        for (int sb = 0; sb < subs; sb++) begin
          stg = (o == OP_INTT) ? K - 1 - st : (o == OP_MULT) ? 0 : st;
          chk(iss.valid && iss.op == o && iss.sel == s && busy, "valid/op/sel/busy");
          chk(iss.stage == 5'(stg) && iss.slot == 9'(sl) && iss.sub == 9'(sb),
              $sformatf("order op %0d: got s%0d/%0d/%0d exp s%0d/%0d/%0d", o, iss.stage, iss.slot, iss.sub, stg, sl, sb));
          if (n_exp == 3) start = 1;  // must be ignored while busy
          @(negedge clk); cyc++; n_exp++;
          start = 0;
        end
    while (!done && cyc < 1000) begin
      chk(!iss.valid && busy, "drain");
      @(negedge clk); cyc++;
    end
    chk(cyc == n_exp + ((o == OP_INTT) ? 12 : 11), $sformatf("done at %0d", cyc));
    @(negedge clk);
    chk(!busy && !done && !iss.valid, "idle after done");
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(OP_NTT, 0);
    run(OP_INTT, 1);
    run(OP_MULT, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
