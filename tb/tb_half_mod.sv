// tb_half_mod: checks y = x/2 mod q, i.e. 2*y = x (mod q) with y < q, for odd
// and even x, three moduli and the edge values 0, 1 and q-1.
module tb_half_mod;
  import tb_ref_pkg::*;
  logic [31:0] x, q, y;
  int checks = 0, failures = 0, n_odd = 0;
  longint unsigned qs [3] = '{Q0, Q1, 64'd12289};

  half_mod #(.W(32)) dut (.x, .q, .y);

  initial begin
    foreach (qs[j]) begin
      q = 32'(qs[j]);
      for (int i = 0; i < 3000; i++) begin
        case (i)
          0: x = 0;
          1: x = 1;
          2: x = q - 1;
          default: x = 32'($urandom() % qs[j]);
        endcase
        #1;
        checks++;
        if (x[0]) n_odd++;
        if (y >= q || (2 * longint'(y)) % qs[j] != longint'(x)) begin
          failures++;
          if (failures < 10) $display("FAIL x=%0d q=%0d y=%0d", x, q, y);
        end
      end
    end
    if (n_odd == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
