// data_agu: data address generator of the HF-NTT accelerator (Sec. III-B/III-C,
// Figs. 3-5 of the HF-NTT paper).
//
// For every schedule slot issued by the controller it computes, for each of the
// 2*NPE CBU operands, the coefficient's position (row, column) in the logical
// n x n matrix (coefficient i = row*n + column) and from it the physical bank
// (row + column) % n and address (row), following the skewed layout of Eq. 1.
// Operand 2p is the lower input a of CBU p, operand 2p+1 the upper input b.
//
// Butterfly numbering: a slot holds n/2 butterflies; with NPE < n/2 CBUs a slot
// is spread over n/(2*NPE) sub-cycles and CBU p takes butterfly P = sub*NPE + p.
//   Phase 0 (stage s < log2(n), butterfly distance t = N/2^(s+1) >= n): the
//     pairs lie in one column. The stage has 2^s rounds of n/2^s slots; round r
//     covers rows [r*n/2^s, (r+1)*n/2^s). In slot c of a round the columns
//     c + j*n/2^s (j < 2^s) are read; their cells form diagonals in the banks,
//     so every bank is hit once. Butterfly P = j*h + x pairs rows
//     r*n/2^s + x and r*n/2^s + x + h of column c + j*n/2^s, h = n/2^(s+1).
//   Phase 1 (stage s >= log2(n), t < n): one full row per slot; butterfly P
//     pairs columns (P/t)*2t + P%t and that plus t.
//   MultMod: one row per n/NPE cycles, CBU p takes column sub*NPE + p; the
//     same position is read in both polynomial RAMs (operand 2p; operand 2p+1
//     repeats it and is not used).
// The diagonal/row orders and the round structure follow the paper's Fig. 4
// and Fig. 5; the formulas for N_pe < n/2 and for MultMod are this design's.
// INTT uses the same stage geometry, the controller simply walks the stages
// backwards.
//
// Timing: outputs are registered, one cycle after the issue slot.
module data_agu
  import hf_pkg::*;
#(
  parameter int unsigned N   = 4096,
  parameter int unsigned NPE = 32,
  parameter int unsigned K   = $clog2(N),
  parameter int unsigned K2  = K / 2,
  parameter int unsigned NB  = 1 << K2,
  parameter int unsigned AW  = K2
) (
  input  logic          clk,
  input  logic          rst_n,
  input  issue_t        iss,
  output logic          out_valid,
  output op_t           out_op,
  output logic          out_sel,
  output logic [AW-1:0] bank [2*NPE],
  output logic [AW-1:0] addr [2*NPE]
);
  logic [AW-1:0] bank_c [2*NPE];
  logic [AW-1:0] addr_c [2*NPE];

  always_comb begin
    int unsigned s, slot, sub, pb, rs, h, r, c, j, xx, col, row0, row1, t, lo;
    s    = int'(iss.stage);
    slot = int'(iss.slot);
    sub  = int'(iss.sub);
    for (int p = 0; p < NPE; p++) begin
      pb = sub * NPE + p;
      {rs, h, r, c, j, xx, col, row0, row1, t, lo} = '0;
      if (iss.op == OP_MULT) begin
        row0 = slot;
        col  = pb;
        bank_c[2*p]   = AW'((row0 + col) % NB);
        addr_c[2*p]   = AW'(row0);
        bank_c[2*p+1] = AW'((row0 + col) % NB);
        addr_c[2*p+1] = AW'(row0);
      end else if (s < K2) begin
        rs   = NB >> s;
        h    = rs >> 1;
        r    = slot >> (K2 - s);
        c    = slot & (rs - 1);
        j    = pb >> (K2 - 1 - s);
        xx   = pb & (h - 1);
        col  = c + j * rs;
        row0 = r * rs + xx;
        row1 = row0 + h;
        bank_c[2*p]   = AW'((row0 + col) % NB);
        addr_c[2*p]   = AW'(row0);
        bank_c[2*p+1] = AW'((row1 + col) % NB);
        addr_c[2*p+1] = AW'(row1);
      end else begin
        t    = N >> (s + 1);
        lo   = (pb / t) * 2 * t + (pb % t);
        row0 = slot;
        bank_c[2*p]   = AW'((row0 + lo) % NB);
        addr_c[2*p]   = AW'(row0);
        bank_c[2*p+1] = AW'((row0 + lo + t) % NB);
        addr_c[2*p+1] = AW'(row0);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_op    <= OP_NTT;
      out_sel   <= 1'b0;
    end else begin
      out_valid <= iss.valid;
      out_op    <= iss.op;
      out_sel   <= iss.sel;
    end
  end

  always_ff @(posedge clk) begin
    bank <= bank_c;
    addr <= addr_c;
  end
endmodule
