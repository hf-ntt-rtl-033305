// bus_xbar: the bus between the data memory and the CBU array of one modulus
// (the "BUS" of Fig. 6 of the HF-NTT paper).
//
// It has three parts, all driven by the operand->bank map of data_agu
// (operand 2p is input a of CBU p, operand 2p+1 input b):
//   * read-address scatter: bank bank[o] gets read address addr[o];
//   * read-data gather, one cycle later: CBU p gets a = RAM[sel] bank bank[2p],
//     b = RAM[sel] bank bank[2p+1]; in MultMod mode a comes from RAM 0 and b
//     from RAM 1, both at bank[2p];
//   * write-back scatter, when the CBU results arrive: x goes back to the cell
//     operand a came from and y to the cell of b (results return to their
//     original locations, as in the paper); in MultMod mode the product y
//     goes to RAM 0 at the cell of operand 2p.
// A full crossbar indexed by bank number is the simplest structure that carries
// any schedule; the paper names the bus but not its structure. An assertion
// checks the property the skewed layout guarantees: no two operands of one cycle
// address the same bank.
//
// Purely combinational; the caller supplies the maps at the right delays.
// rst_n only keeps the assertion quiet while the design is held in reset.
module bus_xbar
  import hf_pkg::*;
#(
  parameter int unsigned W   = 32,
  parameter int unsigned N   = 4096,
  parameter int unsigned NPE = 32,
  parameter int unsigned K2  = $clog2(N) / 2,
  parameter int unsigned NB  = 1 << K2,
  parameter int unsigned AW  = K2
) (
  input  logic          clk,
  input  logic          rst_n,  // only gates the conflict assertion
  // read-address scatter (AGU output cycle)
  input  logic          rd_valid,
  input  op_t           rd_op,
  input  logic [AW-1:0] rd_bank [2*NPE],
  input  logic [AW-1:0] rd_addr [2*NPE],
  output logic [AW-1:0] raddr   [NB],
  // read-data gather (one cycle later)
  input  op_t           dt_op,
  input  logic          dt_sel,
  input  logic [AW-1:0] dt_bank [2*NPE],
  input  logic [W-1:0]  rdata0  [NB],
  input  logic [W-1:0]  rdata1  [NB],
  output logic [W-1:0]  a       [NPE],
  output logic [W-1:0]  b       [NPE],
  // write-back scatter (CBU output cycle)
  input  logic          wb_valid,
  input  op_t           wb_op,
  input  logic          wb_sel,
  input  logic [AW-1:0] wb_bank [2*NPE],
  input  logic [AW-1:0] wb_addr [2*NPE],
  input  logic [W-1:0]  x       [NPE],
  input  logic [W-1:0]  y       [NPE],
  output logic          we0     [NB],
  output logic          we1     [NB],
  output logic [AW-1:0] waddr   [NB],
  output logic [W-1:0]  wdata   [NB]
);
  logic conflict;

  always_comb begin
    logic [NB-1:0] hit;
    hit      = '0;
    conflict = 1'b0;
    for (int bk = 0; bk < NB; bk++) raddr[bk] = '0;
    for (int o = 0; o < 2 * NPE; o++) begin
      raddr[rd_bank[o]] = rd_addr[o];
      if (rd_op != OP_MULT || o % 2 == 0) begin
        if (hit[rd_bank[o]]) conflict = 1'b1;
        hit[rd_bank[o]] = 1'b1;
      end
    end
  end

  always_comb begin
    for (int p = 0; p < NPE; p++) begin
      if (dt_op == OP_MULT) begin
        a[p] = rdata0[dt_bank[2*p]];
        b[p] = rdata1[dt_bank[2*p]];
      end else if (dt_sel) begin
        a[p] = rdata1[dt_bank[2*p]];
        b[p] = rdata1[dt_bank[2*p+1]];
      end else begin
        a[p] = rdata0[dt_bank[2*p]];
        b[p] = rdata0[dt_bank[2*p+1]];
      end
    end
  end

  always_comb begin
    for (int bk = 0; bk < NB; bk++) begin
      we0[bk]   = 1'b0;
      we1[bk]   = 1'b0;
      waddr[bk] = '0;
      wdata[bk] = '0;
    end
    if (wb_valid) begin
      for (int p = 0; p < NPE; p++) begin
        if (wb_op == OP_MULT) begin
          we0[wb_bank[2*p]]   = 1'b1;
          waddr[wb_bank[2*p]] = wb_addr[2*p];
          wdata[wb_bank[2*p]] = y[p];
        end else begin
          we0[wb_bank[2*p]]     = !wb_sel;
          we1[wb_bank[2*p]]     = wb_sel;
          waddr[wb_bank[2*p]]   = wb_addr[2*p];
          wdata[wb_bank[2*p]]   = x[p];
          we0[wb_bank[2*p+1]]   = !wb_sel;
          we1[wb_bank[2*p+1]]   = wb_sel;
          waddr[wb_bank[2*p+1]] = wb_addr[2*p+1];
          wdata[wb_bank[2*p+1]] = y[p];
        end
      end
    end
  end

  // The skewed layout makes every cycle's accesses bank-conflict free.
  always_ff @(posedge clk) begin
    if (rst_n && rd_valid) assert (!conflict) else $error("bus_xbar: two operands in one bank");
  end
endmodule
