// tf_agu: twiddle-factor address generator of the HF-NTT accelerator
// ("TF Address Generator" of Fig. 6 of the HF-NTT paper).
//
// The twiddle memory holds the table psi^brv(i) (NTT) and psi^-brv(i) (INTT)
// for i = 1 .. N-1, where psi is a primitive 2N-th root of unity mod q and brv
// reverses log2(N) bits. A butterfly of stage s (2^s groups, CT numbering)
// working on coefficient i of the lower operand needs entry 2^s + i/2^(log2 N - s).
// With the slot/butterfly numbering of data_agu this is
//   phase 0 (s < log2 n):  2^s + round            (the same for all CBUs)
//   phase 1 (s >= log2 n): 2^s + row * 2^(s - log2 n) + P / t,  t = N/2^(s+1)
// The bit-reversed table is the standard negacyclic NTT arrangement; its
// indices agree with the twiddles w8, w4, w12 printed in the paper's Fig. 2.
// In MultMod mode no twiddle is used and the index is 0.
//
// Timing: outputs are registered, one cycle after the issue slot, like data_agu.
module tf_agu
  import hf_pkg::*;
#(
  parameter int unsigned N   = 4096,
  parameter int unsigned NPE = 32,
  parameter int unsigned K   = $clog2(N),
  parameter int unsigned K2  = K / 2
) (
  input  logic         clk,
  input  issue_t       iss,
  output logic [K-1:0] tf_idx [NPE]
);
  logic [K-1:0] idx_c [NPE];

  always_comb begin
    int unsigned s, slot, pb, t;
    s    = int'(iss.stage);
    slot = int'(iss.slot);
    for (int p = 0; p < NPE; p++) begin
      pb = int'(iss.sub) * NPE + p;
      t  = 1;
      if (iss.op == OP_MULT) begin
        idx_c[p] = '0;
      end else if (s < K2) begin
        idx_c[p] = K'((1 << s) + (slot >> (K2 - s)));
      end else begin
        t = N >> (s + 1);
        idx_c[p] = K'((1 << s) + (slot << (s - K2)) + pb / t);
      end
    end
  end

  always_ff @(posedge clk) tf_idx <= idx_c;
endmodule
