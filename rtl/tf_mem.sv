// tf_mem: twiddle-factor memory for one RNS modulus ("NTT TF / INTT TF" of
// Fig. 6 of the HF-NTT paper).
//
// NPE banks, one per CBU, so that every CBU can read its own twiddle in every
// cycle. Each bank holds the NTT table (psi^brv(i), entries 1..N-1) and the
// INTT table (psi^-brv(i)) in two halves, 2N words in all; rd_inv selects the
// half. The host writes the tables once before use; a write goes to the same
// entry of every bank (broadcast). The paper describes n/2 banks of depth N/2
// per table without saying how the tables are packed into them; here each bank
// keeps a full copy, which makes any index readable by any CBU.
//
// Timing: rd_data is valid one cycle after rd_idx (registered read).
module tf_mem #(
  parameter int unsigned W   = 32,
  parameter int unsigned N   = 4096,
  parameter int unsigned NPE = 32,
  parameter int unsigned K   = $clog2(N)
) (
  input  logic         clk,
  input  logic         wr_en,
  input  logic         wr_inv,
  input  logic [K-1:0] wr_idx,
  input  logic [W-1:0] wr_data,
  input  logic         rd_inv,
  input  logic [K-1:0] rd_idx  [NPE],
  output logic [W-1:0] rd_data [NPE]
);
  for (genvar p = 0; p < NPE; p++) begin : g_bank
    logic [W-1:0] mem [2*N];
    always_ff @(posedge clk) begin
      if (wr_en) mem[{wr_inv, wr_idx}] <= wr_data;
      rd_data[p] <= mem[{rd_inv, rd_idx[p]}];
    end
  end
endmodule
