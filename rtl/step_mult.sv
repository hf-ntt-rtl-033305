// step_mult: step-by-step multiplier (Fig. 7(3) of the HF-NTT paper).
//
// Both WIDTH-bit operands are split into a high half (MSBs) and a low half
// (LSBs). The four half-width products MSB*MSB, MSB*LSB, LSB*MSB and LSB*LSB are
// formed in parallel, each small enough for one FPGA DSP slice, then shifted by
// 2*LO, LO, LO and 0 bits and summed, giving the full 2*WIDTH-bit product.
// The split and the shift-and-add recombination follow the paper; the two
// pipeline registers (after the partial products and after the adder) are this
// design's choice.
//
// Timing: p is valid STEP_LAT = 2 cycles after a and b. No reset: the pipeline
// carries data only, validity is tracked by the caller.
module step_mult #(
  parameter int unsigned WIDTH = 32
) (
  input  logic                 clk,
  input  logic [WIDTH-1:0]     a,
  input  logic [WIDTH-1:0]     b,
  output logic [2*WIDTH-1:0]   p
);
  localparam int unsigned LO = WIDTH / 2;   // LSB half width
  localparam int unsigned HI = WIDTH - LO;  // MSB half width

  logic [2*HI-1:0]   pp_hh;
  logic [HI+LO-1:0]  pp_hl, pp_lh;
  logic [2*LO-1:0]   pp_ll;

  always_ff @(posedge clk) begin
    pp_hh <= a[WIDTH-1:LO] * b[WIDTH-1:LO];
    pp_hl <= a[WIDTH-1:LO] * b[LO-1:0];
    pp_lh <= a[LO-1:0]     * b[WIDTH-1:LO];
    pp_ll <= a[LO-1:0]     * b[LO-1:0];
  end

  always_ff @(posedge clk) begin
    p <= ({{(2*WIDTH-2*HI){1'b0}}, pp_hh} << (2*LO))
       + ({{(2*WIDTH-HI-LO){1'b0}}, pp_hl} << LO)
       + ({{(2*WIDTH-HI-LO){1'b0}}, pp_lh} << LO)
       +  {{(2*WIDTH-2*LO){1'b0}}, pp_ll};
  end
endmodule
