// controller: control state machine and stage counter of the HF-NTT
// accelerator ("Controller: Stage Counter, Controller Logic" of Fig. 6 of the
// HF-NTT paper).
//
// A command (start pulse with op and sel, accepted only while idle) runs one
// whole operation:
//   OP_NTT  on polynomial RAM sel: stages 0 .. log2(N)-1
//   OP_INTT on polynomial RAM sel: stages log2(N)-1 .. 0 (the NTT order reversed)
//   OP_MULT RAM0 := RAM0 (.) RAM1 point-wise, N/NPE cycles
// In the RUN state one schedule slot (issue_t) is issued in every cycle, with no
// bubbles between stages: the data layout and read order make the pipeline free
// of bank conflicts and read-after-write hazards as long as the pipeline delay
// is below (n/2)*(n/(2*NPE)) cycles (Eq. 2), which an elaboration-time check
// enforces. Each butterfly stage is n slots of n/(2*NPE) sub-cycles; MultMod is
// n rows of n/NPE sub-cycles. After the last slot the DRAIN state waits until
// the last result is written back, then done pulses for one cycle.
//
// Timing: start in cycle 0, first issue in cycle 1, done in cycle
// I + RD_LAT + L + 1 with I issue cycles and L the CBU latency of the op
// (779 cycles for an NTT at N = 4096, NPE = 32). The handshake and the drain
// are this design's; the stage/round structure is the paper's.
module controller
  import hf_pkg::*;
#(
  parameter int unsigned N   = 4096,
  parameter int unsigned NPE = 32,
  parameter int unsigned K   = $clog2(N),
  parameter int unsigned K2  = K / 2,
  parameter int unsigned NB  = 1 << K2
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   start,
  input  op_t    op,
  input  logic   sel,
  output logic   busy,
  output logic   done,
  output issue_t iss
);
  localparam int unsigned SUBS_BF = NB / (2 * NPE);  // sub-cycles per butterfly slot
  localparam int unsigned SUBS_MM = NB / NPE;        // sub-cycles per MultMod row

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN} state_t;

  state_t     state;
  op_t        cur_op;
  logic       cur_sel;
  logic [4:0] stage;
  logic [8:0] slot, sub;
  logic [4:0] drain;

  logic last_sub, last_slot, last_stage;

  assign last_sub   = (cur_op == OP_MULT) ? (sub == 9'(SUBS_MM - 1)) : (sub == 9'(SUBS_BF - 1));
  assign last_slot  = (slot == 9'(NB - 1));
  assign last_stage = (cur_op == OP_MULT) ? 1'b1 :
                      (cur_op == OP_INTT) ? (stage == 5'd0) : (stage == 5'(K - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      cur_op  <= OP_NTT;
      cur_sel <= 1'b0;
      stage   <= '0;
      slot    <= '0;
      sub     <= '0;
      drain   <= '0;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          state   <= S_RUN;
          cur_op  <= op;
          cur_sel <= sel;
          stage   <= (op == OP_INTT) ? 5'(K - 1) : 5'd0;
          slot    <= '0;
          sub     <= '0;
        end
        S_RUN: begin
          if (!last_sub) begin
            sub <= sub + 9'd1;
          end else begin
            sub <= '0;
            if (!last_slot) begin
              slot <= slot + 9'd1;
            end else begin
              slot <= '0;
              if (!last_stage) begin
                stage <= (cur_op == OP_INTT) ? stage - 5'd1 : stage + 5'd1;
              end else begin
                state <= S_DRAIN;
                drain <= 5'((cur_op == OP_INTT) ? CBU_LAT_INTT + RD_LAT - 1 :
                                (cur_op == OP_MULT) ? CBU_LAT_MULT + RD_LAT - 1 : CBU_LAT_NTT + RD_LAT - 1);
              end
            end
          end
        end
        S_DRAIN: begin
          if (drain == '0) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            drain <= drain - 5'd1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

  always_comb begin
    iss       = '0;
    iss.valid = (state == S_RUN);
    iss.op    = cur_op;
    iss.sel   = cur_sel;
    iss.stage = stage;
    iss.slot  = slot;
    iss.sub   = sub;
  end

  initial begin
    assert (K % 2 == 0 && K >= 4 && K <= 16) else $fatal(1, "controller: N must be 2^4 .. 2^16, even power");
    assert (NPE >= 1 && NPE <= NB / 2 && (NPE & (NPE - 1)) == 0)
      else $fatal(1, "controller: NPE must be a power of two, 1 .. n/2");
    // Eq. 2: read + CBU + write delay must fit in the slack between stages.
    assert (RD_LAT + CBU_LAT_INTT + 1 < (NB / 2) * SUBS_BF)
      else $fatal(1, "controller: pipeline too deep for this N/NPE, RAW hazard possible");
  end
endmodule
