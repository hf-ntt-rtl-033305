// cbu_array: the N_pe configurable butterfly units that serve one RNS modulus
// (the "CBU_i" stacks of Fig. 6 of the HF-NTT paper).
//
// All units share the mode and the modulus constants q, m, k and work in lock
// step on their own operands; unit p takes a[p], b[p], w[p] and returns x[p],
// y[p]. Latency and throughput are those of cbu (8 cycles NTT/MultMod,
// 9 cycles INTT, one butterfly per unit per cycle). The replication is the
// paper's; nothing inside the array is shared beyond the configuration.
module cbu_array
  import hf_pkg::*;
#(
  parameter int unsigned W   = 32,
  parameter int unsigned NPE = 32,
  parameter int unsigned KW  = $clog2(W + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  op_t           mode,
  input  logic          in_valid,
  input  logic [W-1:0]  a [NPE],
  input  logic [W-1:0]  b [NPE],
  input  logic [W-1:0]  w [NPE],
  input  logic [W-1:0]  q,
  input  logic [W:0]    m,
  input  logic [KW-1:0] k,
  output logic          out_valid,
  output logic [W-1:0]  x [NPE],
  output logic [W-1:0]  y [NPE]
);
  logic [NPE-1:0] ov;

  for (genvar p = 0; p < NPE; p++) begin : g_pe
    cbu #(.W(W), .KW(KW)) u_cbu (
      .clk, .rst_n, .mode, .in_valid,
      .a(a[p]), .b(b[p]), .w(w[p]), .q, .m, .k,
      .out_valid(ov[p]), .x(x[p]), .y(y[p])
    );
  end

  assign out_valid = &ov;  // all units run in lock step
endmodule
