// hf_ntt_top: the HF-NTT accelerator (Fig. 6 of the HF-NTT paper).
//
// NQ modulus lanes (ntt_lane), one per RNS modulus q_i, run in lock step under
// one controller and one pair of address generators, since every modulus
// follows the same schedule. Each lane holds two polynomials (RAM 0 and RAM 1)
// of N coefficients in the skewed bank layout, the twiddle tables and NPE
// configurable butterfly units. A command performs, on every lane at once:
//   op = OP_NTT,  sel: forward negacyclic NTT of RAM sel, in place, output in
//                      bit-reversed order
//   op = OP_INTT, sel: inverse NTT of RAM sel (bit-reversed in, natural out,
//                      1/N included)
//   op = OP_MULT:      RAM 0 := RAM 0 (.) RAM 1, point-wise mod q_i
// so a product of two polynomials is NTT(0), NTT(1), MULT, INTT(0).
//
// Pipeline (issue cycle t): controller slot at t; data_agu / tf_agu register
// bank maps and twiddle indices at t+1 and the RAMs and TF memories are read;
// operands reach the CBUs at t+2; results (8 cycles later, 9 for INTT) are
// written back to the cells they came from. The bank maps of each slot are
// carried beside the CBUs in a delay line to steer the write-back. One slot
// is issued every cycle without stalls, so an NTT takes N*log2(N)/(2*NPE) issue
// cycles plus 11 (12 for INTT): 779 cycles at the defaults, against 787 in the
// paper's Table I.
//
// Host interface (use only while busy = 0): h_we writes coefficient h_idx of
// RAM h_ram in lane h_lane; h_rdata shows that coefficient one cycle after
// h_lane/h_ram/h_idx;
// t_we writes twiddle entry t_idx of the NTT (t_inv = 0) or INTT (t_inv = 1)
// table of lane t_lane. cfg_q/m/k give each lane's modulus, m = floor(2^(2k)/q)
// and k = ceil(log2 q). The host protocol is this design's own; the paper only
// says the controller answers "input stimuli".
module hf_ntt_top
  import hf_pkg::*;
#(
  parameter int unsigned W   = 32,
  parameter int unsigned N   = 4096,
  parameter int unsigned NPE = 32,
  parameter int unsigned NQ  = 1,
  parameter int unsigned KW  = $clog2(W + 1),
  parameter int unsigned K   = $clog2(N),
  parameter int unsigned LW  = (NQ > 1) ? $clog2(NQ) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  // command
  input  logic          start,
  input  op_t           op,
  input  logic          sel,
  output logic          busy,
  output logic          done,
  // per-modulus configuration
  input  logic [W-1:0]  cfg_q [NQ],
  input  logic [W:0]    cfg_m [NQ],
  input  logic [KW-1:0] cfg_k [NQ],
  // host access to the polynomial RAMs
  input  logic          h_we,
  input  logic [LW-1:0] h_lane,
  input  logic          h_ram,
  input  logic [K-1:0]  h_idx,
  input  logic [W-1:0]  h_wdata,
  output logic [W-1:0]  h_rdata,
  // host access to the twiddle memories
  input  logic          t_we,
  input  logic [LW-1:0] t_lane,
  input  logic          t_inv,
  input  logic [K-1:0]  t_idx,
  input  logic [W-1:0]  t_wdata
);
  localparam int unsigned K2 = K / 2;
  localparam int unsigned AW = K2;
  localparam int unsigned WBL = CBU_LAT_INTT;  // write-back delay line length

  issue_t        iss;
  logic          rd_valid, rd_sel;
  op_t           rd_op;
  logic [AW-1:0] rd_bank [2*NPE], rd_addr [2*NPE];
  logic [K-1:0]  tf_idx  [NPE];
  logic          dt_valid, dt_sel;
  op_t           dt_op;
  logic [AW-1:0] dt_bank [2*NPE], dt_addr [2*NPE];
  logic [AW-1:0] wl_bank [WBL][2*NPE];
  logic [AW-1:0] wl_addr [WBL][2*NPE];
  logic [AW-1:0] wb_bank [2*NPE], wb_addr [2*NPE];
  logic [W-1:0]  lane_rdata [NQ];
  logic [LW-1:0] h_lane_q;

  controller #(.N(N), .NPE(NPE)) u_ctrl (
    .clk, .rst_n, .start, .op, .sel, .busy, .done, .iss
  );

  data_agu #(.N(N), .NPE(NPE)) u_dagu (
    .clk, .rst_n, .iss,
    .out_valid(rd_valid), .out_op(rd_op), .out_sel(rd_sel), .bank(rd_bank), .addr(rd_addr)
  );

  tf_agu #(.N(N), .NPE(NPE)) u_tagu (.clk, .iss, .tf_idx);

  // Data stage: the maps one cycle after the read addresses.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dt_valid <= 1'b0;
      dt_op    <= OP_NTT;
      dt_sel   <= 1'b0;
    end else begin
      dt_valid <= rd_valid;
      dt_op    <= rd_op;
      dt_sel   <= rd_sel;
    end
  end

  always_ff @(posedge clk) begin
    dt_bank <= rd_bank;
    dt_addr <= rd_addr;
    wl_bank[0] <= dt_bank;
    wl_addr[0] <= dt_addr;
    for (int i = 1; i < WBL; i++) begin
      wl_bank[i] <= wl_bank[i-1];
      wl_addr[i] <= wl_addr[i-1];
    end
  end

  // Tap matching the CBU latency of the running operation.
  always_comb begin
    if (dt_op == OP_INTT) begin
      wb_bank = wl_bank[CBU_LAT_INTT-1];
      wb_addr = wl_addr[CBU_LAT_INTT-1];
    end else begin
      wb_bank = wl_bank[CBU_LAT_NTT-1];
      wb_addr = wl_addr[CBU_LAT_NTT-1];
    end
  end

  for (genvar l = 0; l < NQ; l++) begin : g_lane
    ntt_lane #(.W(W), .N(N), .NPE(NPE), .KW(KW)) u_lane (
      .clk, .rst_n,
      .q(cfg_q[l]), .m(cfg_m[l]), .k(cfg_k[l]),
      .rd_valid, .rd_op, .rd_bank, .rd_addr, .tf_idx,
      .dt_valid, .dt_op, .dt_sel, .dt_bank,
      .wb_op(dt_op), .wb_sel(dt_sel), .wb_bank, .wb_addr,
      .host_en(!busy),
      .h_we(h_we && h_lane == LW'(l)),
      .h_ram, .h_idx, .h_wdata, .h_rdata(lane_rdata[l]),
      .t_we(t_we && t_lane == LW'(l)), .t_inv, .t_idx, .t_wdata
    );
  end

  always_ff @(posedge clk) h_lane_q <= h_lane;
  assign h_rdata = lane_rdata[h_lane_q];
endmodule
