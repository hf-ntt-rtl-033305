// poly_ram: one polynomial memory array ("Memory RAM 0/1" of Fig. 6 of the
// HF-NTT paper): n = sqrt(N) independent dual-port banks, each n words deep,
// together holding the N coefficients of one polynomial for one modulus.
//
// Coefficient i is stored at row i/n of bank (i%n + i/n) % n: each row is the
// previous one rotated right by one bank (Eq. 1). With this skew the two
// operands of every butterfly of every stage sit in different banks, so all
// n banks can be read in one cycle without conflict. This module only holds
// the banks; the address generator (data_agu) and the bus (bus_xbar) apply the
// layout. Every bank has its own read address, write enable, write address and
// write data; reads take one cycle.
module poly_ram #(
  parameter int unsigned W  = 32,
  parameter int unsigned N  = 4096,
  parameter int unsigned NB = 1 << ($clog2(N) / 2),     // n = sqrt(N) banks
  parameter int unsigned AW = $clog2(N) / 2             // log2(n) address bits
) (
  input  logic          clk,
  input  logic [AW-1:0] raddr [NB],
  output logic [W-1:0]  rdata [NB],
  input  logic          we    [NB],
  input  logic [AW-1:0] waddr [NB],
  input  logic [W-1:0]  wdata [NB]
);
  for (genvar bk = 0; bk < NB; bk++) begin : g_bank
    mem_bank #(.W(W), .DEPTH(NB), .AW(AW)) u_bank (
      .clk, .raddr(raddr[bk]), .rdata(rdata[bk]),
      .we(we[bk]), .waddr(waddr[bk]), .wdata(wdata[bk])
    );
  end

  initial begin
    assert (NB * NB == N) else $fatal(1, "poly_ram: N must be an even power of two");
  end
endmodule
