// tb_tf_agu: checks the twiddle index of every CBU in every slot of all
// stages, for N = 16 / NPE = 2, N = 64 / NPE = 4 and N = 256 / NPE = 2. The
// expected index is derived from the butterfly's lower coefficient i (listed
// here from the stage geometry): 2^s + i / 2^(log2 N - s). For N = 16 the
// indices of stages 0 and 1 must be 1 and 2, 3, i.e. psi^8, psi^4, psi^12 as
// printed in the paper's Fig. 2. MultMod slots must give index 0.
module tb_tf_agu;
  import hf_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [2:0] fin = 0;

  for (genvar g = 0; g < 3; g++) begin : g_cfg
    localparam int unsigned N   = (g == 0) ? 16 : (g == 1) ? 64 : 256;
    localparam int unsigned NPE = (g == 1) ? 4 : 2;
    localparam int unsigned K = $clog2(N), K2 = K / 2, NB = 1 << K2;
    issue_t iss;
    logic [K-1:0] tf_idx [NPE];

    tf_agu #(.N(N), .NPE(NPE)) dut (.clk, .iss, .tf_idx);

    // Lower coefficient of butterfly P of a slot, from the stage geometry.
    function automatic int unsigned lower(int unsigned s, int unsigned sl, int unsigned pb);
      int unsigned t = N >> (s + 1);
      if (s < K2) begin
        int unsigned rows = NB >> s;            // rows per round
        int unsigned r = sl / rows, c = sl % rows;
        int unsigned h = rows / 2;
        return (r * rows + pb % h) * NB + c + (pb / h) * rows;
      end
      return sl * NB + (pb / t) * 2 * t + pb % t;
    endfunction

    initial begin
      iss = '0;
      for (int s = 0; s < int'(K); s++)
        for (int sl = 0; sl < int'(NB); sl++)
          for (int sb = 0; sb < int'(NB / (2 * NPE)); sb++) begin
            @(negedge clk);
            iss = '0; iss.valid = 1; iss.op = OP_NTT; iss.stage = 5'(s); iss.slot = 9'(sl); iss.sub = 9'(sb);
            @(posedge clk); #1;
            for (int p = 0; p < int'(NPE); p++) begin
              int unsigned i, e;
              i = lower(s, sl, sb * NPE + p);
              e = (1 << s) + (i >> (K - s));
              checks++;
              if (int'(tf_idx[p]) != e) begin
                failures++;
                if (failures < 10) $display("FAIL N=%0d s=%0d slot=%0d pe=%0d: %0d vs %0d", N, s, sl, p, tf_idx[p], e);
              end
              if (g == 0 && s <= 1) begin
                checks++;
                if (s == 0 && tf_idx[p] != 1) failures++;
                if (s == 1 && tf_idx[p] != K'(2 + sl / 2)) failures++;
              end
            end
          end
      @(negedge clk);
      iss.op = OP_MULT;
      @(posedge clk); #1;
      checks++;
      if (tf_idx[0] != 0) failures++;
      fin[g] = 1;
    end
  end

  initial begin
    wait (fin == 3'b111);
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
