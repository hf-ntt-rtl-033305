// tb_poly_ram: an N = 64 polynomial RAM (8 banks x 8 words). Writes every
// bank in parallel, then reads all banks in parallel with independent
// addresses per bank and compares with a reference array.
module tb_poly_ram;
  localparam int unsigned N = 64, NB = 8, AW = 3;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [AW-1:0] raddr [NB], waddr [NB];
  logic [31:0] rdata [NB], wdata [NB];
  logic we [NB];
  logic [31:0] ref_mem [NB][NB];
  int checks = 0, failures = 0;

  poly_ram #(.W(32), .N(N)) dut (.*);

  initial begin
    foreach (we[bk]) begin we[bk] = 0; raddr[bk] = 0; waddr[bk] = 0; wdata[bk] = 0; end
    for (int r = 0; r < int'(NB); r++) begin
      @(negedge clk);
      foreach (we[bk]) begin
        we[bk] = 1; waddr[bk] = AW'(r + bk); wdata[bk] = $urandom();
        ref_mem[bk][AW'(r + bk)] = wdata[bk];
      end
    end
    @(negedge clk);
    foreach (we[bk]) we[bk] = 0;
    for (int i = 0; i < 200; i++) begin
      @(negedge clk);
      foreach (raddr[bk]) raddr[bk] = AW'($urandom());
      @(posedge clk); #1;
      foreach (raddr[bk]) begin
        checks++;
        if (rdata[bk] != ref_mem[bk][raddr[bk]]) begin
          failures++;
          if (failures < 10) $display("FAIL bank %0d addr %0d", bk, raddr[bk]);
        end
      end
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
