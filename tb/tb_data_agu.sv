// tb_data_agu: walks the data address generator through every slot of an NTT
// (all stages) and of a MultMod pass, for N = 64 with NPE = 4 (= n/2, the
// paper's Fig. 4/5 case) and N = 256 with NPE = 2 (slots split in sub-cycles).
// Each operand's (bank, address) is turned back into a coefficient index with
// the inverse of Eq. 1, and the testbench checks that
//   * the two operands of every CBU are a butterfly pair (i, i + t) of the stage,
//   * no two operands of one cycle use the same bank,
//   * every butterfly of a stage (every coefficient in MultMod) occurs once,
//   * N = 64: the reads of Fig. 5 (stage 0 slot 0: (0,32),(8,40),(16,48),(24,56);
//     stage 1 slot 0: (0,16),(8,24),(4,20),(12,28)).
module tb_data_agu;
  import hf_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [1:0] fin = 0;

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", msg); end
  endtask

  for (genvar g = 0; g < 2; g++) begin : g_cfg
    localparam int unsigned N   = (g == 0) ? 64 : 256;
    localparam int unsigned NPE = (g == 0) ? 4 : 2;
    localparam int unsigned K = $clog2(N), K2 = K / 2, NB = 1 << K2, AW = K2;
    issue_t iss;
    logic out_valid, out_sel;
    op_t out_op;
    logic [AW-1:0] bank [2*NPE], addr [2*NPE];

    data_agu #(.N(N), .NPE(NPE)) dut (.clk, .rst_n, .iss, .out_valid, .out_op, .out_sel, .bank, .addr);

    function automatic int unsigned coef(int unsigned bk, int unsigned ad);
      return ad * NB + ((bk + NB - ad) % NB);
    endfunction

    task automatic issue(input op_t o, input int s, input int sl, input int sb);
      @(negedge clk);
      iss = '0; iss.valid = 1; iss.op = o; iss.stage = 5'(s); iss.slot = 9'(sl); iss.sub = 9'(sb);
      @(posedge clk); #1;
    endtask

    initial begin
      bit seen [];
      iss = '0;
      repeat (2) @(negedge clk);
      rst_n = 1;
      for (int s = 0; s < int'(K); s++) begin
        int unsigned t;
        t = N >> (s + 1);
        seen = new[N];
        for (int sl = 0; sl < int'(NB); sl++)
          for (int sb = 0; sb < int'(NB / (2 * NPE)); sb++) begin
            bit used [NB];
            issue(OP_NTT, s, sl, sb);
            chk(out_valid && out_op == OP_NTT, "valid/op");
            foreach (used[bk]) used[bk] = 0;
            for (int p = 0; p < int'(NPE); p++) begin
              int unsigned lo, hi;
              lo = coef(bank[2*p], addr[2*p]);
              hi = coef(bank[2*p+1], addr[2*p+1]);
              chk(hi == lo + t && ((lo / t) % 2 == 0), $sformatf("N=%0d s=%0d slot=%0d pe=%0d pair %0d,%0d", N, s, sl, p, lo, hi));
              chk(!used[bank[2*p]] && !used[bank[2*p+1]] && bank[2*p] != bank[2*p+1], "bank conflict");
              used[bank[2*p]] = 1; used[bank[2*p+1]] = 1;
              chk(!seen[lo], "butterfly twice");
              seen[lo] = 1;
              if (g == 0 && sl == 0 && s == 0) chk(lo == 8 * p && hi == 8 * p + 32, "Fig. 5 stage 0");
              if (g == 0 && sl == 0 && s == 1) begin
                int unsigned exp_lo [4];
                exp_lo = '{0, 8, 4, 12};
                chk(lo == exp_lo[p] && hi == exp_lo[p] + 16, "Fig. 5 stage 1");
              end
            end
          end
        for (int i = 0; i < int'(N); i++) if ((i / t) % 2 == 0) chk(seen[i], "butterfly missing");
      end
      seen = new[N];
      for (int sl = 0; sl < int'(NB); sl++)
        for (int sb = 0; sb < int'(NB / NPE); sb++) begin
          issue(OP_MULT, 0, sl, sb);
          for (int p = 0; p < int'(NPE); p++) begin
            int unsigned i0;
            i0 = coef(bank[2*p], addr[2*p]);
            chk(!seen[i0], "MULT coefficient twice");
            seen[i0] = 1;
            chk(bank[2*p+1] == bank[2*p] && addr[2*p+1] == addr[2*p], "MULT operands");
          end
        end
      for (int i = 0; i < int'(N); i++) chk(seen[i], "MULT coefficient missing");
      fin[g] = 1;
    end
  end

  initial begin
    wait (fin == 2'b11);
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
