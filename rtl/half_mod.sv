// half_mod: x/2 mod q for an odd modulus q (Theorem 3 of the HF-NTT paper).
//
// An even x is simply shifted right; for an odd x the result is
// floor(x/2) + (q+1)/2, which is below q whenever x < q. This replaces the
// final multiplication by N^-1 of the inverse NTT: every Gentleman-Sande stage
// halves its outputs instead. The formula is the paper's; the module is purely
// combinational, a shifter and one adder.
module half_mod #(
  parameter int unsigned W = 32
) (
  input  logic [W-1:0] x,
  input  logic [W-1:0] q,
  output logic [W-1:0] y
);
  logic [W-1:0] q_half_up;  // (q+1)/2 without overflow: q>>1 plus the dropped 1
  assign q_half_up = (q >> 1) + W'(1);
  assign y = x[0] ? (x >> 1) + q_half_up : (x >> 1);
endmodule
