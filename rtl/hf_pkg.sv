// hf_pkg: types and constants shared by the HF-NTT accelerator.
//
// The accelerator runs three operations on polynomials held in on-chip memory:
// a forward negacyclic NTT (Cooley-Tukey butterflies, natural-order input,
// bit-reversed output), the point-wise modular product of two transformed
// polynomials (MultMod), and the inverse NTT (Gentleman-Sande butterflies,
// bit-reversed input, natural-order output, the factor 1/N folded in as a halving
// in every stage). The op_t encoding, the latency constants and the issue_t
// schedule descriptor below are this design's own choices; the paper fixes only
// that the INTT butterfly takes one cycle more than the NTT butterfly.
package hf_pkg;

  typedef enum logic [1:0] {
    OP_NTT  = 2'd0,
    OP_INTT = 2'd1,
    OP_MULT = 2'd2
  } op_t;

  // Pipeline latencies in cycles (see cbu.sv and ntt_lane.sv).
  localparam int unsigned STEP_LAT    = 2;                 // one step multiplier
  localparam int unsigned BARRETT_LAT = 3 * STEP_LAT + 1;  // Alg. 3 end to end
  localparam int unsigned CBU_LAT_NTT  = BARRETT_LAT + 1;  // multiply, then add/sub
  localparam int unsigned CBU_LAT_MULT = BARRETT_LAT + 1;  // multiply, then output register
  localparam int unsigned CBU_LAT_INTT = BARRETT_LAT + 2;  // add/sub, multiply, halve
  // Issue to CBU input: one register stage in the address generators, one in the RAMs.
  localparam int unsigned RD_LAT = 2;

  // One schedule slot as issued by the controller. Field widths are sized for
  // the largest supported transform (N up to 2^16: 16 stages, n up to 256).
  typedef struct packed {
    logic       valid;
    op_t        op;
    logic       sel;    // polynomial RAM (0 or 1) that an NTT/INTT works on
    logic [4:0] stage;  // butterfly stage s, 0 .. log2(N)-1 (CT order; INTT walks it backwards)
    logic [8:0] slot;   // slot inside the stage, 0 .. n-1 (MultMod: row)
    logic [8:0] sub;    // sub-cycle inside the slot, 0 .. n/(2*NPE)-1 (MultMod: n/NPE-1)
  } issue_t;

  // Skewed data layout (Eq. 1): coefficient i lives in row i/n, bank (i%n + i/n)%n.
  function automatic int unsigned bank_of(int unsigned row, int unsigned col, int unsigned n);
    return (row + col) % n;
  endfunction

endpackage
