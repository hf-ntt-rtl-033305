// mem_bank: one simple dual-port memory bank of the HF-NTT data memory
// ("Bank 0 .. Bank n-1" of Fig. 6 of the HF-NTT paper).
//
// One read port and one write port, usable in the same cycle at different
// addresses, which is what lets a butterfly stage read new operands while
// earlier results are being written back. The read is registered (block-RAM
// style): rdata shows mem[raddr] one cycle after raddr. A read of the address
// being written in the same cycle returns the old word; the schedule never
// does this. Written as an array so that an FPGA flow infers block RAM.
module mem_bank #(
  parameter int unsigned W     = 32,
  parameter int unsigned DEPTH = 64,
  parameter int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end
endmodule
