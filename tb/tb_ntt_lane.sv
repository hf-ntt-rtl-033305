// tb_ntt_lane: one modulus lane at N = 64 (8 banks), NPE = 4, driven with
// operand maps worked out here rather than by the address generators.
// 1. Host port: writes random polynomials to RAM 0 and RAM 1 and reads a few
//    back. 2. Stage 0 of an NTT on RAM 0 (every butterfly pairs i and i+32,
//    twiddle entry 1): checks a + b*w and a - b*w in place. 3. A MultMod pass
//    RAM 0 := RAM 0 * RAM 1. 4. Stage 0 of an INTT on RAM 1 (entry 1 of the
//    inverse table): checks (a+b)/2 and (a-b)*w/2. Results are read through
//    the host port and compared with modular arithmetic.
module tb_ntt_lane;
  import hf_pkg::*;
  import tb_ref_pkg::*;
  localparam int unsigned W = 32, N = 64, NPE = 4, K = 6, NB = 8, AW = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [W-1:0] q;
  logic [W:0] m;
  logic [5:0] k;
  logic rd_valid = 0, dt_valid = 0, dt_sel = 0, wb_sel = 0, host_en = 1;
  op_t rd_op = OP_NTT, dt_op = OP_NTT, wb_op = OP_NTT;
  logic [AW-1:0] rd_bank [2*NPE], rd_addr [2*NPE], dt_bank [2*NPE], wb_bank [2*NPE], wb_addr [2*NPE];
  logic [K-1:0] tf_idx [NPE];
  logic h_we = 0, h_ram = 0, t_we = 0, t_inv = 0;
  logic [K-1:0] h_idx = 0, t_idx = 0;
  logic [W-1:0] h_wdata = 0, h_rdata, t_wdata = 0;
  int checks = 0, failures = 0;

  ntt_lane #(.W(W), .N(N), .NPE(NPE)) dut (.*);

  longint unsigned r0 [N], r1 [N], e0 [N], e1 [N];
  longint unsigned wf, wi;

  // map delay line: index 0 = data stage, tap L = write-back
  logic [AW-1:0] bl [12][2*NPE], al [12][2*NPE];
  logic [AW-1:0] map_b [2*NPE], map_a [2*NPE];
  always_ff @(posedge clk) begin
    bl[0] <= rd_bank; al[0] <= rd_addr;
    for (int i = 1; i < 12; i++) begin bl[i] <= bl[i-1]; al[i] <= al[i-1]; end
  end
  always_comb begin
    dt_bank = bl[0];
    wb_bank = (dt_op == OP_INTT) ? bl[CBU_LAT_INTT] : bl[CBU_LAT_NTT];
    wb_addr = (dt_op == OP_INTT) ? al[CBU_LAT_INTT] : al[CBU_LAT_NTT];
  end
  always_ff @(posedge clk) begin
    dt_valid <= rd_valid;
  end

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", msg); end
  endtask

  function automatic longint unsigned half(longint unsigned v);
    return (v % 2 == 0) ? v / 2 : (v + Q0) / 2;
  endfunction

  // Places operand o at coefficient i (Eq. 1).
  task automatic place(input int o, input int unsigned i);
    map_a[o] = AW'(i / NB);
    map_b[o] = AW'((i % NB + i / NB) % NB);
  endtask

  task automatic issue(input op_t o, input logic s);
    @(negedge clk);
    rd_valid = 1; rd_op = o; dt_op = o; wb_op = o; dt_sel = s; wb_sel = s;
    rd_bank = map_b; rd_addr = map_a;
  endtask

  task automatic finish_op();
    @(negedge clk); rd_valid = 0;
    repeat (14) @(negedge clk);
  endtask

  task automatic read_all(input logic r, output longint unsigned v [N]);
    host_en = 1;
    for (int i = 0; i < int'(N); i++) begin
      @(negedge clk); h_ram = r; h_idx = K'(i);
      @(negedge clk); v[i] = h_rdata;
    end
  endtask

  initial begin
    longint unsigned got [N];
    q = W'(Q0); m = (W+1)'(m_of(Q0)); k = 6'(k_of(Q0));
    foreach (tf_idx[p]) tf_idx[p] = 1;
    foreach (map_b[o]) begin map_b[o] = 0; map_a[o] = 0; end
    rd_bank = map_b; rd_addr = map_a;
    repeat (2) @(negedge clk);
    rst_n = 1;
    wf = $urandom() % Q0; wi = $urandom() % Q0;
    @(negedge clk); t_we = 1; t_inv = 0; t_idx = 1; t_wdata = W'(wf);
    @(negedge clk); t_inv = 1; t_wdata = W'(wi);
    @(negedge clk); t_we = 0;
    for (int i = 0; i < int'(N); i++) begin
      r0[i] = $urandom() % Q0; r1[i] = $urandom() % Q0;
      @(negedge clk); h_we = 1; h_ram = 0; h_idx = K'(i); h_wdata = W'(r0[i]);
      @(negedge clk); h_ram = 1; h_wdata = W'(r1[i]);
    end
    @(negedge clk); h_we = 0;
    read_all(0, got);
    foreach (got[i]) chk(got[i] == r0[i], "host read RAM 0");
    read_all(1, got);
    foreach (got[i]) chk(got[i] == r1[i], "host read RAM 1");

    // NTT stage 0 on RAM 0: slot c, CBU p: rows p and p+4 of column c
    host_en = 0;
    for (int c = 0; c < int'(NB); c++) begin
      for (int p = 0; p < int'(NPE); p++) begin
        place(2*p, p * NB + c); place(2*p+1, (p + 4) * NB + c);
      end
      issue(OP_NTT, 0);
    end
    finish_op();
    for (int i = 0; i < 32; i++) begin
      longint unsigned t;
      t = mulm(r0[i + 32], wf, Q0);
      e0[i] = (r0[i] + t) % Q0; e0[i + 32] = (r0[i] + Q0 - t) % Q0;
    end
    read_all(0, got);
    foreach (got[i]) chk(got[i] == e0[i], $sformatf("NTT stage 0 [%0d]", i));
    r0 = e0;

    // MultMod: row r, CBU p takes column sub*4 + p
    host_en = 0;
    for (int r = 0; r < int'(NB); r++)
      for (int sb = 0; sb < 2; sb++) begin
        for (int p = 0; p < int'(NPE); p++) begin
          place(2*p, r * NB + sb * NPE + p); place(2*p+1, r * NB + sb * NPE + p);
        end
        issue(OP_MULT, 0);
      end
    finish_op();
    read_all(0, got);
    foreach (got[i]) chk(got[i] == mulm(r0[i], r1[i], Q0), $sformatf("MULT [%0d]", i));

    // INTT stage 0 (t = 32 as well) on RAM 1
    host_en = 0;
    for (int c = 0; c < int'(NB); c++) begin
      for (int p = 0; p < int'(NPE); p++) begin
        place(2*p, p * NB + c); place(2*p+1, (p + 4) * NB + c);
      end
      issue(OP_INTT, 1);
    end
    finish_op();
    for (int i = 0; i < 32; i++) begin
      e1[i] = half((r1[i] + r1[i + 32]) % Q0);
      e1[i + 32] = half(mulm((r1[i] + Q0 - r1[i + 32]) % Q0, wi, Q0));
    end
    read_all(1, got);
    foreach (got[i]) chk(got[i] == e1[i], $sformatf("INTT stage [%0d]", i));
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
