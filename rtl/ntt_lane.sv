// ntt_lane: everything that belongs to one RNS modulus q_i in the HF-NTT
// accelerator: the two polynomial RAM arrays (RAM 0 and RAM 1), the twiddle
// memory, the bus and the CBU array (one column of Fig. 6 of the HF-NTT paper).
//
// The address maps come from the shared address generators in hf_ntt_top at
// three points of the pipeline: rd_* in the cycle the RAM read addresses are
// applied, dt_* one cycle later when read data and twiddles reach the CBUs, and
// wb_* when the CBU results come out and are written back. q, m and k are the
// modulus and its Barrett constants.
//
// Host access (only while the accelerator is idle, host_en = 1): h_we writes
// coefficient h_idx of RAM h_ram; h_rdata shows that coefficient one cycle
// after h_idx/h_ram. Coefficient i is placed at row i/n of bank (i%n + i/n)%n (Eq. 1).
// t_we writes entry t_idx of the NTT (t_inv = 0) or INTT (t_inv = 1) twiddle
// table of every TF bank. The host port is this design's own.
module ntt_lane
  import hf_pkg::*;
#(
  parameter int unsigned W   = 32,
  parameter int unsigned N   = 4096,
  parameter int unsigned NPE = 32,
  parameter int unsigned KW  = $clog2(W + 1),
  parameter int unsigned K   = $clog2(N),
  parameter int unsigned K2  = K / 2,
  parameter int unsigned NB  = 1 << K2,
  parameter int unsigned AW  = K2
) (
  input  logic          clk,
  input  logic          rst_n,
  // modulus configuration
  input  logic [W-1:0]  q,
  input  logic [W:0]    m,
  input  logic [KW-1:0] k,
  // pipeline maps from the shared address generators
  input  logic          rd_valid,
  input  op_t           rd_op,
  input  logic [AW-1:0] rd_bank [2*NPE],
  input  logic [AW-1:0] rd_addr [2*NPE],
  input  logic [K-1:0]  tf_idx  [NPE],
  input  logic          dt_valid,
  input  op_t           dt_op,
  input  logic          dt_sel,
  input  logic [AW-1:0] dt_bank [2*NPE],
  input  op_t           wb_op,
  input  logic          wb_sel,
  input  logic [AW-1:0] wb_bank [2*NPE],
  input  logic [AW-1:0] wb_addr [2*NPE],
  // host access
  input  logic          host_en,
  input  logic          h_we,
  input  logic          h_ram,
  input  logic [K-1:0]  h_idx,
  input  logic [W-1:0]  h_wdata,
  output logic [W-1:0]  h_rdata,
  input  logic          t_we,
  input  logic          t_inv,
  input  logic [K-1:0]  t_idx,
  input  logic [W-1:0]  t_wdata
);
  logic [AW-1:0] x_raddr [NB];
  logic [AW-1:0] raddr   [NB];
  logic [W-1:0]  rdata0  [NB], rdata1 [NB];
  logic          x_we0   [NB], x_we1  [NB];
  logic [AW-1:0] x_waddr [NB];
  logic [W-1:0]  x_wdata [NB];
  logic          we0     [NB], we1    [NB];
  logic [AW-1:0] waddr   [NB];
  logic [W-1:0]  wdata   [NB];
  logic [W-1:0]  ca      [NPE], cb [NPE], cw [NPE], cx [NPE], cy [NPE];
  logic          c_ovalid;

  // Host coefficient position (Eq. 1).
  logic [AW-1:0] h_row, h_col, h_bank, h_bank_q;
  logic          h_ram_q;
  assign h_row  = h_idx[K-1:AW];
  assign h_col  = h_idx[AW-1:0];
  assign h_bank = h_row + h_col;  // wraps modulo n

  always_ff @(posedge clk) begin
    h_bank_q <= h_bank;
    h_ram_q  <= h_ram;
  end
  assign h_rdata = h_ram_q ? rdata1[h_bank_q] : rdata0[h_bank_q];

  always_comb begin
    for (int bk = 0; bk < NB; bk++) begin
      if (host_en) begin
        raddr[bk] = h_row;
        we0[bk]   = h_we && !h_ram && (h_bank == AW'(bk));
        we1[bk]   = h_we &&  h_ram && (h_bank == AW'(bk));
        waddr[bk] = h_row;
        wdata[bk] = h_wdata;
      end else begin
        raddr[bk] = x_raddr[bk];
        we0[bk]   = x_we0[bk];
        we1[bk]   = x_we1[bk];
        waddr[bk] = x_waddr[bk];
        wdata[bk] = x_wdata[bk];
      end
    end
  end

  poly_ram #(.W(W), .N(N)) u_ram0 (
    .clk, .raddr, .rdata(rdata0), .we(we0), .waddr, .wdata
  );
  poly_ram #(.W(W), .N(N)) u_ram1 (
    .clk, .raddr, .rdata(rdata1), .we(we1), .waddr, .wdata
  );

  tf_mem #(.W(W), .N(N), .NPE(NPE)) u_tf (
    .clk, .wr_en(t_we), .wr_inv(t_inv), .wr_idx(t_idx), .wr_data(t_wdata),
    .rd_inv(rd_op == OP_INTT), .rd_idx(tf_idx), .rd_data(cw)
  );

  bus_xbar #(.W(W), .N(N), .NPE(NPE)) u_bus (
    .clk, .rst_n,
    .rd_valid, .rd_op, .rd_bank, .rd_addr, .raddr(x_raddr),
    .dt_op, .dt_sel, .dt_bank, .rdata0, .rdata1, .a(ca), .b(cb),
    .wb_valid(c_ovalid), .wb_op, .wb_sel, .wb_bank, .wb_addr, .x(cx), .y(cy),
    .we0(x_we0), .we1(x_we1), .waddr(x_waddr), .wdata(x_wdata)
  );

  cbu_array #(.W(W), .NPE(NPE), .KW(KW)) u_cbus (
    .clk, .rst_n, .mode(dt_op), .in_valid(dt_valid),
    .a(ca), .b(cb), .w(cw), .q, .m, .k,
    .out_valid(c_ovalid), .x(cx), .y(cy)
  );
endmodule
