// tb_mem_bank: fills a 64-word bank, then reads and writes in the same cycles
// at different addresses against a reference array, checking the one-cycle
// registered read.
module tb_mem_bank;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [5:0] raddr = 0, waddr = 0;
  logic [31:0] rdata, wdata = 0;
  logic we = 0;
  logic [31:0] ref_mem [64];
  int checks = 0, failures = 0;

  mem_bank #(.W(32), .DEPTH(64)) dut (.*);

  initial begin
    for (int i = 0; i < 64; i++) begin
      @(negedge clk);
      we = 1; waddr = 6'(i); wdata = $urandom(); ref_mem[i] = wdata;
    end
    for (int i = 0; i < 2000; i++) begin
      logic [31:0] e;
      @(negedge clk);
      raddr = 6'($urandom());
      e = ref_mem[raddr];
      we = $urandom() % 2;
      waddr = raddr + 6'(1 + $urandom() % 63);
      wdata = $urandom();
      @(posedge clk);
      if (we) ref_mem[waddr] = wdata;
      #1;
      checks++;
      if (rdata != e) begin failures++; if (failures < 10) $display("FAIL addr %0d: %h vs %h", raddr, rdata, e); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
