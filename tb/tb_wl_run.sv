// tb_wl_run: one workload run of the HF-NTT accelerator, used by tb_workloads.
//
// Instantiates hf_ntt_top with the given ring size N, PE count NPE, word
// width W and number of RNS lanes NQ, fills every lane with its own modulus
// (tb_ref_pkg::wl_q(SET, lane)) and twiddle table, and runs a polynomial
// product: NTT(RAM 0), NTT(RAM 1), MULT, INTT(RAM 0), then INTT(RAM 1) as a
// round trip. After each command every coefficient of every lane is read back
// through the host port and compared with the software NTT/INTT model; for
// N <= SCHOOL_MAX the final product is also compared with the schoolbook
// negacyclic product. Every command's length must equal the stall-free count
// (NTT N*log2(N)/(2*NPE) + 11, INTT + 12, MULT N/NPE + 11).
// Ports: clk in; fin goes high when the run is over; checks and failures
// count what was compared. Host transfers take two clock cycles per word.
module tb_wl_run
  import hf_pkg::*;
  import tb_ref_pkg::*;
#(
  parameter int unsigned W = 32,
  parameter int unsigned N = 1024,
  parameter int unsigned NPE = 16,
  parameter int unsigned NQ = 1,
  parameter int unsigned SET = 0,
  parameter int unsigned SCHOOL_MAX = 1024
) (
  input  logic clk,
  output logic fin,
  output int   checks,
  output int   failures
);
  localparam int unsigned K = $clog2(N), KW = $clog2(W + 1);
  localparam int unsigned LW = (NQ > 1) ? $clog2(NQ) : 1;

  logic rst_n = 0, start = 0, sel = 0, busy, done;
  op_t  op = OP_NTT;
  logic [W-1:0]  cfg_q [NQ];
  logic [W:0]    cfg_m [NQ];
  logic [KW-1:0] cfg_k [NQ];
  logic h_we = 0, h_ram = 0, t_we = 0, t_inv = 0;
  logic [LW-1:0] h_lane = 0, t_lane = 0;
  logic [K-1:0]  h_idx = 0, t_idx = 0;
  logic [W-1:0]  h_wdata = 0, t_wdata = 0, h_rdata;

  hf_ntt_top #(.W(W), .N(N), .NPE(NPE), .NQ(NQ)) dut (
    .clk, .rst_n, .start, .op, .sel, .busy, .done, .cfg_q, .cfg_m, .cfg_k,
    .h_we, .h_lane, .h_ram, .h_idx, .h_wdata, .h_rdata,
    .t_we, .t_lane, .t_inv, .t_idx, .t_wdata
  );

  longint unsigned qs [NQ], psis [NQ];
  longint unsigned pa [NQ][], pb [NQ][], fa [NQ][], fb [NQ][], pc [NQ][], tmp[];

  task automatic check(input string what, input longint unsigned got, input longint unsigned exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL N=%0d NQ=%0d %s: got %0d expected %0d", N, NQ, what, got, exp);
    end
  endtask

  task automatic run(input op_t o, input logic s, input int unsigned expect_cycles);
    int cyc;
    @(negedge clk);
    op = o; sel = s; start = 1;
    @(negedge clk);
    start = 0; cyc = 1;
    while (!done) begin
      @(negedge clk); cyc++;
    end
    check($sformatf("cycles op %0d", o), cyc, expect_cycles);
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
    fin = 0; checks = 0; failures = 0;
    for (int l = 0; l < int'(NQ); l++) begin
      qs[l] = wl_q(SET, l); psis[l] = wl_psi(SET, l, N);
      cfg_q[l] = W'(qs[l]); cfg_m[l] = (W+1)'(m_of(qs[l])); cfg_k[l] = KW'(k_of(qs[l]));
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int l = 0; l < int'(NQ); l++) begin
      pa[l] = new[N]; pb[l] = new[N];
      foreach (pa[l][i]) begin pa[l][i] = $urandom() % qs[l]; pb[l][i] = $urandom() % qs[l]; end
      pa[l][0] = qs[l] - 1; pb[l][0] = qs[l] - 1;
      for (int i = 1; i < int'(N); i++) begin
        @(negedge clk);
        t_we = 1; t_lane = LW'(l); t_inv = 0; t_idx = K'(i);
        t_wdata = W'(powm(psis[l], brv(i, K), qs[l]));
        @(negedge clk);
        t_inv = 1; t_wdata = W'(powm(psis[l], 2 * N - brv(i, K), qs[l]));
      end
      @(negedge clk); t_we = 0;
      for (int i = 0; i < int'(N); i++) begin
        @(negedge clk);
        h_we = 1; h_lane = LW'(l); h_ram = 0; h_idx = K'(i); h_wdata = W'(pa[l][i]);
        @(negedge clk);
        h_ram = 1; h_wdata = W'(pb[l][i]);
      end
      @(negedge clk); h_we = 0;
      fa[l] = pa[l]; ntt(fa[l], qs[l], psis[l]);
      fb[l] = pb[l]; ntt(fb[l], qs[l], psis[l]);
      pc[l] = new[N];
      foreach (pc[l][i]) pc[l][i] = mulm(fa[l][i], fb[l][i], qs[l]);
      intt(pc[l], qs[l], psis[l]);
      if (N <= SCHOOL_MAX) begin
        negacyclic(tmp, pa[l], pb[l], qs[l]);
        foreach (tmp[i]) check("model vs schoolbook", pc[l][i], tmp[i]);
      end
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
    run(OP_INTT, 1, N * K / (2 * NPE) + 12);
    for (int l = 0; l < int'(NQ); l++) compare_ram("INTT(NTT(b))", l, 1, pb[l]);
    $display("workload N=%0d W=%0d NPE=%0d NQ=%0d: checks=%0d failures=%0d",
             N, W, NPE, NQ, checks, failures);
    fin = 1;
  end
endmodule
