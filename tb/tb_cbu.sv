// tb_cbu: checks the three data paths of the configurable butterfly unit
// against modular arithmetic computed here:
//   NTT:  x = a + b*w, y = a - b*w          latency 8
//   INTT: x = (a+b)/2, y = (a-b)*w/2        latency 9
//   MULT: y = a*b                            latency 8
// Operands are random (with some gaps in in_valid); every result is matched
// with its input by counting cycles from in_valid to out_valid.
module tb_cbu;
  import hf_pkg::*;
  import tb_ref_pkg::*;
  localparam int unsigned W = 32, KW = 6;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  op_t mode = OP_NTT;
  logic in_valid = 0, out_valid;
  logic [W-1:0] a = 0, b = 0, w = 0, q, x, y;
  logic [W:0] m;
  logic [KW-1:0] k;
  int checks = 0, failures = 0, cyc = 0;

  cbu #(.W(W)) dut (.*);

  typedef struct { int t; longint unsigned ex, ey; logic chk_x; } exp_t;
  exp_t exp_q [$];
  int lat;
  always @(posedge clk) cyc++;

  always @(posedge clk) begin
    #1;
    if (out_valid) begin
      exp_t e;
      if (exp_q.size() == 0) begin
        failures++; $display("FAIL: unexpected out_valid");
      end else begin
        e = exp_q.pop_front();
        checks += 2;
        if (cyc - e.t != lat - 1) begin failures++; $display("FAIL latency %0d", cyc - e.t); end
        if (y != W'(e.ey)) begin failures++; if (failures < 10) $display("FAIL mode %0d y=%0d exp %0d", mode, y, e.ey); end
        if (e.chk_x && x != W'(e.ex)) begin failures++; if (failures < 10) $display("FAIL mode %0d x=%0d exp %0d", mode, x, e.ex); end
      end
    end
  end

  function automatic longint unsigned half(longint unsigned v, longint unsigned qq);
    return (v % 2 == 0) ? v / 2 : (v + qq) / 2;
  endfunction

  task automatic run_mode(input op_t md, input int count, input longint unsigned qq);
    mode = md;
    lat = (md == OP_INTT) ? 9 : 8;
    q = W'(qq); m = (W+1)'(m_of(qq)); k = KW'(k_of(qq));
    for (int i = 0; i < count; i++) begin
      exp_t e;
      longint unsigned aa, bb, ww, t;
      @(negedge clk);
      in_valid = ($urandom() % 4 != 0);
      aa = $urandom() % qq; bb = $urandom() % qq; ww = $urandom() % qq;
      if (i == 0) begin aa = qq - 1; bb = qq - 1; ww = qq - 1; end
      a = W'(aa); b = W'(bb); w = W'(ww);
      if (in_valid) begin
        e.t = cyc + 1;  // sampled at the coming edge
        case (md)
          OP_NTT: begin t = mulm(bb, ww, qq); e.ex = (aa + t) % qq; e.ey = (aa + qq - t) % qq; e.chk_x = 1; end
          OP_INTT: begin e.ex = half((aa + bb) % qq, qq); e.ey = half(mulm((aa + qq - bb) % qq, ww, qq), qq); e.chk_x = 1; end
          default: begin e.ey = mulm(aa, bb, qq); e.ex = aa; e.chk_x = 1; end
        endcase
        exp_q.push_back(e);
      end
    end
    @(negedge clk); in_valid = 0;
    repeat (12) @(negedge clk);
    if (exp_q.size() != 0) begin failures++; $display("FAIL: %0d results missing", exp_q.size()); exp_q.delete(); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    run_mode(OP_NTT, 1000, Q0);
    run_mode(OP_INTT, 1000, Q0);
    run_mode(OP_MULT, 1000, Q0);
    run_mode(OP_NTT, 500, Q1);
    run_mode(OP_INTT, 500, 64'd12289);
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
