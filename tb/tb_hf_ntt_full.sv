// tb_hf_ntt_full: end-to-end test of the HF-NTT accelerator at its default
// size (N = 4096, 32-bit modulus, NPE = 32, one RNS modulus), the main
// configuration of the paper's evaluation. The top keeps all its defaults.
//
// It loads two random polynomials per modulus and the twiddle tables, then
// runs a full polynomial multiplication: NTT(RAM 0), NTT(RAM 1), MULT, INTT(RAM 0).
// After each step every coefficient of every lane is read back and compared
// with the software reference (tb_ref_pkg); the final result must equal the
// schoolbook negacyclic product. Each command's length, start to done, is
// checked against the stall-free count N*log2(N)/(2*NPE) + 11 (NTT), + 12
// (INTT) and N/NPE + 11 (MULT), and the issue stream is watched for bubbles.
// Mechanisms counted, each must occur: NTT, INTT and MULT commands, phase-0
// (diagonal) and phase-1 (row) slots, mode switches and work on both RAMs.
// With NPE = n/2 no slot is split into sub-cycles.
module tb_hf_ntt_full;
  import hf_pkg::*;
  import tb_ref_pkg::*;

  localparam int unsigned W = 32, N = 4096, NPE = 32, NQ = 1;
  localparam int unsigned K = $clog2(N), KW = $clog2(W + 1), LW = 1;
  localparam int unsigned NB = 1 << (K / 2);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0, sel = 0, busy, done;
  op_t  op = OP_NTT;
  logic [W-1:0]  cfg_q [NQ];
  logic [W:0]    cfg_m [NQ];
  logic [KW-1:0] cfg_k [NQ];
  logic h_we = 0, h_ram = 0, t_we = 0, t_inv = 0;
  logic [LW-1:0] h_lane = 0, t_lane = 0;
  logic [K-1:0]  h_idx = 0, t_idx = 0;
  logic [W-1:0]  h_wdata = 0, t_wdata = 0, h_rdata;

  hf_ntt_top dut (.*);

  int checks = 0, failures = 0;
  longint unsigned qs [NQ], psis [NQ];
  longint unsigned pa [NQ][], pb [NQ][], fa [NQ][], fb [NQ][], pc [NQ][], tmp[];

  // Mechanism counters
  int n_ntt = 0, n_intt = 0, n_mult = 0, n_ph0 = 0, n_ph1 = 0, n_split = 0;
  int n_switch = 0, n_ram1 = 0, n_bubble = 0;
  op_t last_op = OP_NTT;
  logic seen_op = 0;

  always @(posedge clk) begin
    if (dut.iss.valid) begin
      if (dut.iss.op != OP_MULT && dut.iss.stage < 5'(K / 2)) n_ph0++;
      if (dut.iss.op != OP_MULT && dut.iss.stage >= 5'(K / 2)) n_ph1++;
      if (dut.iss.sub != 0) n_split++;
      if (dut.iss.sel) n_ram1++;
    end
  end

  task automatic check(input string what, input longint unsigned got, input longint unsigned exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic run(input op_t o, input logic s, input int unsigned expect_cycles);
    int cyc = 0, issued = 0, first = -1, last = -1;
    if (seen_op && o != last_op) n_switch++;
    seen_op = 1; last_op = o;
    @(negedge clk);
    op = o; sel = s; start = 1;
    @(negedge clk);
    start = 0; cyc = 1;
    while (!done) begin
      if (dut.iss.valid) begin
        if (first < 0) first = cyc;
        last = cyc; issued++;
      end
      @(negedge clk); cyc++;
    end
    check($sformatf("cycles op %0d", o), cyc, expect_cycles);
    if (last - first + 1 != issued) n_bubble++;
    check("no bubbles", last - first + 1, issued);
    case (o) OP_NTT: n_ntt++; OP_INTT: n_intt++; default: n_mult++; endcase
  endtask

  task automatic write_coef(input int l, input logic r, input int i, input longint unsigned v);
    @(negedge clk);
    h_we = 1; h_lane = LW'(l); h_ram = r; h_idx = K'(i); h_wdata = W'(v);
    @(negedge clk);
    h_we = 0;
  endtask

  task automatic compare_ram(input string what, input int l, input logic r,
                             input longint unsigned exp[]);
    for (int i = 0; i < int'(N); i++) begin
      @(negedge clk);
      h_lane = LW'(l); h_ram = r; h_idx = K'(i);
      @(negedge clk);
      check($sformatf("%s lane %0d [%0d]", what, l, i), h_rdata, exp[i]);
    end
  endtask

  initial begin
    qs[0] = Q0; psis[0] = psi_for(Q0, PSI0, N);
    for (int l = 0; l < int'(NQ); l++) begin
      cfg_q[l] = W'(qs[l]); cfg_m[l] = (W+1)'(m_of(qs[l])); cfg_k[l] = KW'(k_of(qs[l]));
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    // twiddle tables and operands
    for (int l = 0; l < int'(NQ); l++) begin
      pa[l] = new[N]; pb[l] = new[N];
      foreach (pa[l][i]) begin pa[l][i] = $urandom() % qs[l]; pb[l][i] = $urandom() % qs[l]; end
      // a few extreme values
      pa[l][0] = qs[l] - 1; pb[l][0] = qs[l] - 1; pa[l][1] = 0;
      for (int i = 1; i < int'(N); i++) begin
        @(negedge clk);
        t_we = 1; t_lane = LW'(l); t_inv = 0; t_idx = K'(i);
        t_wdata = W'(powm(psis[l], brv(i, K), qs[l]));
        @(negedge clk);
        t_inv = 1; t_wdata = W'(powm(psis[l], 2 * N - brv(i, K), qs[l]));
      end
      @(negedge clk); t_we = 0;
      for (int i = 0; i < int'(N); i++) begin
        write_coef(l, 0, i, pa[l][i]);
        write_coef(l, 1, i, pb[l][i]);
      end
      fa[l] = pa[l]; ntt(fa[l], qs[l], psis[l]);
      fb[l] = pb[l]; ntt(fb[l], qs[l], psis[l]);
      negacyclic(pc[l], pa[l], pb[l], qs[l]);
    end

    run(OP_NTT, 0, N * K / (2 * NPE) + 11);
    for (int l = 0; l < int'(NQ); l++) compare_ram("NTT(a)", l, 0, fa[l]);
    run(OP_NTT, 1, N * K / (2 * NPE) + 11);
    for (int l = 0; l < int'(NQ); l++) compare_ram("NTT(b)", l, 1, fb[l]);
    run(OP_MULT, 0, N / NPE + 11);
    for (int l = 0; l < int'(NQ); l++) begin
      tmp = new[N];
      foreach (tmp[i]) tmp[i] = mulm(fa[l][i], fb[l][i], qs[l]);
      compare_ram("MULT", l, 0, tmp);
    end
    run(OP_INTT, 0, N * K / (2 * NPE) + 12);
    for (int l = 0; l < int'(NQ); l++) compare_ram("a*b", l, 0, pc[l]);
    // INTT of RAM 1 must give back b
    run(OP_INTT, 1, N * K / (2 * NPE) + 12);
    for (int l = 0; l < int'(NQ); l++) compare_ram("INTT(NTT(b))", l, 1, pb[l]);

    $display("mechanisms: ntt=%0d intt=%0d mult=%0d phase0_slots=%0d phase1_slots=%0d split_slots=%0d mode_switches=%0d ram1_slots=%0d bubbles=%0d",
             n_ntt, n_intt, n_mult, n_ph0, n_ph1, n_split, n_switch, n_ram1, n_bubble);
    if (n_ntt == 0 || n_intt == 0 || n_mult == 0 || n_ph0 == 0 || n_ph1 == 0 ||
        n_switch == 0 || n_ram1 == 0) begin
      failures++;
      $display("FAIL: a mechanism never occurred");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
