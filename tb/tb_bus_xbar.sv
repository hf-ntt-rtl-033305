// tb_bus_xbar: N = 64 (8 banks), NPE = 4. Random bank permutations are used
// as operand maps; the testbench checks the read-address scatter, the
// read-data gather from RAM 0 / RAM 1 (butterfly modes) and from both RAMs
// (MultMod), and the write-back scatter with its write enables.
module tb_bus_xbar;
  import hf_pkg::*;
  localparam int unsigned W = 32, N = 64, NPE = 4, NB = 8, AW = 3;
  logic clk = 0, rst_n = 1;
  always #5 clk = ~clk;
  logic rd_valid = 0, dt_sel, wb_valid, wb_sel;
  op_t rd_op = OP_NTT, dt_op, wb_op;
  logic [AW-1:0] rd_bank [2*NPE], rd_addr [2*NPE], raddr [NB];
  logic [AW-1:0] dt_bank [2*NPE], wb_bank [2*NPE], wb_addr [2*NPE], waddr [NB];
  logic [W-1:0] rdata0 [NB], rdata1 [NB], a [NPE], b [NPE], x [NPE], y [NPE], wdata [NB];
  logic we0 [NB], we1 [NB];
  int checks = 0, failures = 0;

  bus_xbar #(.W(W), .N(N), .NPE(NPE)) dut (.*);

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", msg); end
  endtask

  function automatic void perm(ref logic [AW-1:0] pm [2*NPE]);
    int unsigned v [NB];
    foreach (v[i]) v[i] = i;
    for (int i = NB - 1; i > 0; i--) begin
      int unsigned j, t;
      j = $urandom() % (i + 1); t = v[i]; v[i] = v[j]; v[j] = t;
    end
    foreach (pm[o]) pm[o] = AW'(v[o]);
  endfunction

  initial begin
    for (int n = 0; n < 300; n++) begin
      op_t o;
      o = op_t'(n % 3);
      perm(rd_bank);
      foreach (rd_addr[i]) rd_addr[i] = AW'($urandom());
      if (o == OP_MULT) for (int p = 0; p < int'(NPE); p++) begin
        rd_bank[2*p+1] = rd_bank[2*p]; rd_addr[2*p+1] = rd_addr[2*p];
      end
      rd_op = o; dt_op = o; wb_op = o; rd_valid = 1;
      dt_sel = $urandom() % 2; wb_sel = $urandom() % 2; wb_valid = 1;
      dt_bank = rd_bank; wb_bank = rd_bank; wb_addr = rd_addr;
      foreach (rdata0[i]) begin rdata0[i] = $urandom(); rdata1[i] = $urandom(); end
      foreach (x[i]) begin x[i] = $urandom(); y[i] = $urandom(); end
      #1;
      for (int oo = 0; oo < int'(2 * NPE); oo++)
        chk(raddr[rd_bank[oo]] == rd_addr[oo], "read address scatter");
      for (int p = 0; p < int'(NPE); p++) begin
        if (o == OP_MULT) begin
          chk(a[p] == rdata0[rd_bank[2*p]] && b[p] == rdata1[rd_bank[2*p]], "MULT gather");
          chk(we0[rd_bank[2*p]] && !we1[rd_bank[2*p]] && waddr[rd_bank[2*p]] == rd_addr[2*p]
              && wdata[rd_bank[2*p]] == y[p], "MULT write");
        end else begin
          chk(a[p] == (dt_sel ? rdata1[rd_bank[2*p]] : rdata0[rd_bank[2*p]]), "gather a");
          chk(b[p] == (dt_sel ? rdata1[rd_bank[2*p+1]] : rdata0[rd_bank[2*p+1]]), "gather b");
          chk(we0[rd_bank[2*p]] == !wb_sel && we1[rd_bank[2*p]] == wb_sel &&
              waddr[rd_bank[2*p]] == rd_addr[2*p] && wdata[rd_bank[2*p]] == x[p], "write x");
          chk(we0[rd_bank[2*p+1]] == !wb_sel && we1[rd_bank[2*p+1]] == wb_sel &&
              waddr[rd_bank[2*p+1]] == rd_addr[2*p+1] && wdata[rd_bank[2*p+1]] == y[p], "write y");
        end
      end
      wb_valid = 0;
      #1;
      foreach (we0[i]) chk(!we0[i] && !we1[i], "no write without valid");
      @(negedge clk);
    end
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
