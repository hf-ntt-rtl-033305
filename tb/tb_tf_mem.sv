// tb_tf_mem: loads both twiddle tables of an N = 64, NPE = 4 memory with
// random words (broadcast writes), then reads random indices of random tables
// from all four banks at once, checking each bank's word one cycle later.
module tb_tf_mem;
  localparam int unsigned N = 64, NPE = 4, K = 6;
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_en = 0, wr_inv = 0, rd_inv = 0;
  logic [K-1:0] wr_idx = 0, rd_idx [NPE];
  logic [31:0] wr_data = 0, rd_data [NPE];
  logic [31:0] ref_t [2][N];
  int checks = 0, failures = 0;

  tf_mem #(.W(32), .N(N), .NPE(NPE)) dut (.*);

  initial begin
    foreach (rd_idx[p]) rd_idx[p] = 0;
    for (int t = 0; t < 2; t++)
      for (int i = 0; i < int'(N); i++) begin
        @(negedge clk);
        wr_en = 1; wr_inv = t[0]; wr_idx = K'(i); wr_data = $urandom();
        ref_t[t][i] = wr_data;
      end
    @(negedge clk); wr_en = 0;
    for (int n = 0; n < 500; n++) begin
      @(negedge clk);
      rd_inv = $urandom() % 2;
      foreach (rd_idx[p]) rd_idx[p] = K'($urandom());
      @(posedge clk); #1;
      foreach (rd_idx[p]) begin
        checks++;
        if (rd_data[p] != ref_t[rd_inv][rd_idx[p]]) begin
          failures++;
          if (failures < 10) $display("FAIL bank %0d inv %0d idx %0d", p, rd_inv, rd_idx[p]);
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
