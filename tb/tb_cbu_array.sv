// tb_cbu_array: four CBUs in one array, NTT and MultMod modes, each unit fed
// its own random operands in every cycle; checks every unit's outputs and that
// the array's out_valid follows in_valid by the CBU latency.
module tb_cbu_array;
  import hf_pkg::*;
  import tb_ref_pkg::*;
  localparam int unsigned W = 32, NPE = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  op_t mode = OP_NTT;
  logic in_valid = 0, out_valid;
  logic [W-1:0] a [NPE], b [NPE], w [NPE], x [NPE], y [NPE];
  logic [W-1:0] q;
  logic [W:0] m;
  logic [5:0] k;
  int checks = 0, failures = 0;

  cbu_array #(.W(W), .NPE(NPE)) dut (.*);

  longint unsigned ex [$], ey [$];

  always @(posedge clk) begin
    #1;
    if (out_valid) begin
      for (int p = 0; p < NPE; p++) begin
        longint unsigned e1, e2;
        e1 = ex.pop_front(); e2 = ey.pop_front();
        checks++;
        if (y[p] != W'(e2) || (mode == OP_NTT && x[p] != W'(e1))) begin
          failures++;
          if (failures < 10) $display("FAIL pe %0d mode %0d: x=%0d y=%0d exp %0d %0d", p, mode, x[p], y[p], e1, e2);
        end
      end
    end
  end

  task automatic run_mode(input op_t md, input int count);
    mode = md;
    for (int i = 0; i < count; i++) begin
      @(negedge clk);
      in_valid = 1;
      for (int p = 0; p < NPE; p++) begin
        longint unsigned aa, bb, ww, t;
        aa = $urandom() % Q0; bb = $urandom() % Q0; ww = $urandom() % Q0;
        a[p] = W'(aa); b[p] = W'(bb); w[p] = W'(ww);
        t = mulm(bb, ww, Q0);
        if (md == OP_NTT) begin ex.push_back((aa + t) % Q0); ey.push_back((aa + Q0 - t) % Q0); end
        else begin ex.push_back(0); ey.push_back(mulm(aa, bb, Q0)); end
      end
    end
    @(negedge clk); in_valid = 0;
    // the last result must appear 7 edges after the edge that took the last operands
    repeat (6) @(negedge clk);
    checks++;
    if (ex.size() != NPE) begin failures++; $display("FAIL: early/late results %0d", ex.size()); end
    @(negedge clk);
    checks++;
    if (ex.size() != 0) begin failures++; $display("FAIL: %0d results missing", ex.size()); end
    ex.delete(); ey.delete();
  endtask

  initial begin
    q = W'(Q0); m = (W+1)'(m_of(Q0)); k = 6'(k_of(Q0));
    foreach (a[p]) begin a[p] = 0; b[p] = 0; w[p] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    run_mode(OP_NTT, 300);
    run_mode(OP_MULT, 300);
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
