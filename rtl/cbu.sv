// cbu: configurable butterfly unit (Sec. IV-B and Fig. 7 of the HF-NTT paper).
//
// One Barrett modular multiplier, one modular adder/subtractor pair and two
// halvers, steered by multiplexers into three data paths:
//   OP_NTT  (Cooley-Tukey):      x = a + b*w,      y = a - b*w        (mod q)
//   OP_INTT (Gentleman-Sande):   x = (a + b)/2,    y = (a - b)*w/2    (mod q)
//   OP_MULT (MultMod):           y = a*b,          x = a              (mod q)
// In NTT mode the multiplier sees (b, w) straight from the inputs and the
// add/subtract follows it. In INTT mode the add/subtract comes first, is
// registered, and its difference is what enters the multiplier one cycle later;
// both results are then halved (half_mod). In MultMod mode the multiplier sees
// (b, a). The three modes and their results follow the paper (the INTT lower
// output follows Fig. 7(5), which includes the twiddle); the register placement
// is this design's.
//
// Timing: out_valid/x/y follow in_valid by CBU_LAT_NTT = 8 cycles in NTT and
// MultMod modes and CBU_LAT_INTT = 9 cycles in INTT mode, so INTT is one cycle
// longer, as the paper states. A new butterfly is accepted every cycle. mode,
// q, m and k must not change while butterflies are in flight.
module cbu
  import hf_pkg::*;
#(
  parameter int unsigned W  = 32,
  parameter int unsigned KW = $clog2(W + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  op_t           mode,
  input  logic          in_valid,
  input  logic [W-1:0]  a,
  input  logic [W-1:0]  b,
  input  logic [W-1:0]  w,
  input  logic [W-1:0]  q,
  input  logic [W:0]    m,
  input  logic [KW-1:0] k,
  output logic          out_valid,
  output logic [W-1:0]  x,
  output logic [W-1:0]  y
);
  localparam int unsigned DL = CBU_LAT_INTT - 1;  // depth of the side-data delay line

  function automatic logic [W-1:0] add_mod(input logic [W-1:0] u, input logic [W-1:0] v,
                                           input logic [W-1:0] md);
    logic [W:0] s;
    s = {1'b0, u} + {1'b0, v};
    return (s >= {1'b0, md}) ? W'(s - {1'b0, md}) : W'(s);
  endfunction

  function automatic logic [W-1:0] sub_mod(input logic [W-1:0] u, input logic [W-1:0] v,
                                           input logic [W-1:0] md);
    return (u >= v) ? u - v : u - v + md;
  endfunction

  logic          is_intt;
  logic [W-1:0]  diff_r, w_r;
  logic [W-1:0]  mul_x, mul_y, prod;
  logic [W-1:0]  side_in;
  logic [W-1:0]  side_d [DL];
  logic          v_d    [DL];
  logic [W-1:0]  side_t;
  logic          v_t;
  logic [W-1:0]  half_side, half_prod;

  assign is_intt = (mode == OP_INTT);

  // INTT pre-stage: subtraction before the multiplier.
  always_ff @(posedge clk) begin
    diff_r <= sub_mod(a, b, q);
    w_r    <= w;
  end

  // Multiplier operand multiplexers.
  always_comb begin
    unique case (mode)
      OP_INTT: begin mul_x = diff_r; mul_y = w_r; end
      OP_MULT: begin mul_x = b;      mul_y = a;   end
      default: begin mul_x = b;      mul_y = w;   end
    endcase
  end

  barrett_mulmod #(.W(W), .KW(KW)) u_mul (
    .clk, .a(mul_x), .b(mul_y), .q, .m, .k, .z(prod)
  );

  // Side data travelling beside the multiplier: a (NTT, MultMod) or a+b (INTT).
  assign side_in = is_intt ? add_mod(a, b, q) : a;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < DL; i++) v_d[i] <= 1'b0;
    end else begin
      v_d[0] <= in_valid;
      for (int i = 1; i < DL; i++) v_d[i] <= v_d[i-1];
    end
  end

  always_ff @(posedge clk) begin
    side_d[0] <= side_in;
    for (int i = 1; i < DL; i++) side_d[i] <= side_d[i-1];
  end

  // Tap where the product of the same butterfly leaves the multiplier.
  always_comb begin
    unique case (mode)
      OP_INTT: begin side_t = side_d[CBU_LAT_INTT-2]; v_t = v_d[CBU_LAT_INTT-2]; end
      OP_MULT: begin side_t = side_d[CBU_LAT_MULT-2]; v_t = v_d[CBU_LAT_MULT-2]; end
      default: begin side_t = side_d[CBU_LAT_NTT-2];  v_t = v_d[CBU_LAT_NTT-2];  end
    endcase
  end

  half_mod #(.W(W)) u_half_x (.x(side_t), .q, .y(half_side));
  half_mod #(.W(W)) u_half_y (.x(prod),   .q, .y(half_prod));

  // Output stage: add/sub (NTT), halve (INTT) or pass the product (MultMod).
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= v_t;
  end

  always_ff @(posedge clk) begin
    unique case (mode)
      OP_INTT: begin x <= half_side;                  y <= half_prod;               end
      OP_MULT: begin x <= side_t;                     y <= prod;                    end
      default: begin x <= add_mod(side_t, prod, q);   y <= sub_mod(side_t, prod, q); end
    endcase
  end
endmodule
