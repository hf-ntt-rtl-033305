// tb_step_mult: checks the split-operand multiplier against the plain product
// for 32-bit and 33-bit (odd split) operands, random and extreme values, and
// checks its two-register latency (product visible one edge after the edge
// that samples the operands).
module tb_step_mult;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [31:0] a = 0, b = 0;
  logic [63:0] p;
  logic [32:0] a3 = 0, b3 = 0;
  logic [65:0] p3;
  int checks = 0, failures = 0;

  step_mult #(.WIDTH(32)) dut   (.clk, .a(a),  .b(b),  .p(p));
  step_mult #(.WIDTH(33)) dut33 (.clk, .a(a3), .b(b3), .p(p3));

  logic [63:0] exp_q [$];
  logic [65:0] exp3_q [$];
  always @(posedge clk) begin
    exp_q.push_back(64'(a) * 64'(b));
    exp3_q.push_back(66'(a3) * 66'(b3));
    if (exp_q.size() > 1) begin
      logic [63:0] e;
      logic [65:0] e3;
      #1;
      e = exp_q.pop_front();
      e3 = exp3_q.pop_front();
      checks += 2;
      if (p != e)   begin failures++; $display("FAIL 32: %h != %h", p, e); end
      if (p3 != e3) begin failures++; $display("FAIL 33: %h != %h", p3, e3); end
    end
  end

  initial begin
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      case (i % 8)
        0: begin a = '1; b = '1; a3 = '1; b3 = '1; end
        1: begin a = 32'h8000_0000; b = 32'hffff; a3 = 33'h1_0000_0000; b3 = 33'h1_ffff; end
        default: begin
          a = $urandom(); b = $urandom();
          a3 = {1'($urandom()), 32'($urandom())}; b3 = {1'($urandom()), 32'($urandom())};
        end
      endcase
    end
    @(negedge clk); @(negedge clk); @(negedge clk);
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
