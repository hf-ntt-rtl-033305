// barrett_mulmod: hardware-friendly Barrett modular multiplication
// (Alg. 3 and Fig. 7(2) of the HF-NTT paper).
//
// z = a*b mod q for a, b < q, with k = ceil(log2 q) and m = floor(2^(2k)/q)
// supplied by the host as constants. The product t1 = a*b is shifted right by
// k-1 before it is multiplied with m, so the second multiplier is only (k+1)
// bits wide on each side instead of 2k by k+1:
//   t1  = a*b
//   t2  = ((t1 >> (k-1)) * m) >> (k+1)      (equals the exact Barrett t2 or one less)
//   t3  = t2*q,  t4 = t1 - t3               (t4 < 3q)
//   z   = t4 - 2q, t4 - q or t4             (both subtractions run in parallel)
// Every product uses the step multiplier (step_mult). t1 travels beside the
// second and third multipliers in a register chain. All of this follows the
// paper; the pipeline depth is this design's choice.
//
// Timing: z is valid BARRETT_LAT = 7 cycles after a and b; a new pair can be
// accepted every cycle. q, m and k must stay constant while products are in
// flight (they are per-modulus configuration).
module barrett_mulmod
  import hf_pkg::*;
#(
  parameter int unsigned W  = 32,
  parameter int unsigned KW = $clog2(W + 1)
) (
  input  logic          clk,
  input  logic [W-1:0]  a,
  input  logic [W-1:0]  b,
  input  logic [W-1:0]  q,
  input  logic [W:0]    m,
  input  logic [KW-1:0] k,
  output logic [W-1:0]  z
);
  logic [2*W-1:0]   t1;
  logic [W:0]       t1h;
  logic [2*W+1:0]   t1h_m;
  logic [W-1:0]     t2;
  logic [2*W-1:0]   t3;
  logic [2*W-1:0]   t1_d [2*STEP_LAT];  // "R ... R" chain of Fig. 7(2)
  logic [W+1:0]     t4;
  logic [W-1:0]     t4_m_q, t4_m_2q;

  step_mult #(.WIDTH(W))   u_mul_ab (.clk, .a(a),   .b(b), .p(t1));
  assign t1h = (W+1)'(t1 >> (k - KW'(1)));
  step_mult #(.WIDTH(W+1)) u_mul_m  (.clk, .a(t1h), .b(m), .p(t1h_m));
  assign t2  = W'(t1h_m >> (k + KW'(1)));
  step_mult #(.WIDTH(W))   u_mul_q  (.clk, .a(t2),  .b(q), .p(t3));

  always_ff @(posedge clk) begin
    t1_d[0] <= t1;
    for (int i = 1; i < 2 * STEP_LAT; i++) t1_d[i] <= t1_d[i-1];
  end

  // t4 < 3q < 2^(W+2): only the low W+2 bits of the difference matter.
  assign t4      = (W+2)'(t1_d[2*STEP_LAT-1] - t3);
  assign t4_m_q  = W'(t4 - {2'b00, q});
  assign t4_m_2q = W'(t4 - {1'b0, q, 1'b0});

  always_ff @(posedge clk) begin
    if (t4 >= {1'b0, q, 1'b0})  z <= t4_m_2q;
    else if (t4 >= {2'b00, q})  z <= t4_m_q;
    else                        z <= W'(t4);
  end
endmodule
