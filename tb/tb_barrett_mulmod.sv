// tb_barrett_mulmod: checks z = a*b mod q of the Barrett multiplier for three
// moduli (32-bit, 30-bit and the 14-bit q = 12289) with random and extreme
// operands, its 7-register latency, and that the q <= t4 < 2q correction and
// the no-correction case both occur. The t4 >= 2q branch of the algorithm is
// kept in the RTL as the paper gives it, but random search found no valid
// operands (a, b < q) that reach it, so it is counted but not required.
module tb_barrett_mulmod;
  import tb_ref_pkg::*;
  localparam int unsigned W = 32, KW = 6;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [W-1:0] a = 0, b = 0, q, z;
  logic [W:0]   m;
  logic [KW-1:0] k;
  int checks = 0, failures = 0, n_sub2q = 0, n_subq = 0, n_none = 0;

  barrett_mulmod #(.W(W)) dut (.clk, .a, .b, .q, .m, .k, .z);

  longint unsigned exp_q [$];
  logic run = 0;
  always @(posedge clk) begin
    if (run) begin
      exp_q.push_back(mulm(a, b, q));
      if (exp_q.size() > 6) begin
        longint unsigned e;
        #1;
        e = exp_q.pop_front();
        checks++;
        if (z != W'(e)) begin
          failures++;
          if (failures < 10) $display("FAIL q=%0d: z=%0d expected %0d", q, z, e);
        end
      end
    end
  end

  always @(posedge clk) begin
    if (run) begin
      if (dut.t4 >= {1'b0, q, 1'b0}) n_sub2q++;
      else if (dut.t4 >= {2'b0, q}) n_subq++;
      else n_none++;
    end
  end

  task automatic test_q(input longint unsigned qq, input int count);
    a = 0; b = 0;
    q = W'(qq); m = (W+1)'(m_of(qq)); k = KW'(k_of(qq));
    exp_q.delete();
    repeat (8) @(negedge clk);  // flush products of the previous modulus
    run = 1;
    for (int i = 0; i < count; i++) begin
      @(negedge clk);
      case (i % 16)
        0: begin a = W'(qq - 1); b = W'(qq - 1); end
        1: begin a = 0; b = W'(qq - 1); end
        2: begin a = 1; b = 1; end
        default: begin a = W'($urandom() % qq); b = W'($urandom() % qq); end
      endcase
    end
    repeat (8) @(negedge clk);
    run = 0;
    @(negedge clk);
  endtask

  initial begin
    test_q(Q0, 3000);
    test_q(Q1, 3000);
    test_q(64'd12289, 3000);
    $display("branches: t4>=2q %0d, q<=t4<2q %0d, t4<q %0d", n_sub2q, n_subq, n_none);
    if (n_subq == 0 || n_none == 0) begin
      failures++;
      $display("FAIL: a correction branch never taken");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
