// mapping_decision: decides when the estimated mapping replaces the
// predefined one, and when to roll back.
//
// States (dream_pkg::map_state_t):
//   MS_BASE     The predefined mapping (PAMS) is used. After each window the
//               estimator's candidate is compared with the predefined mapping;
//               it qualifies if it lowers the row-bit change cost by more than
//               thr_pct percent:  (cost_base - cost_cand) * 100 > thr_pct * cost_base.
//               When `consistency` consecutive windows qualify with the same
//               candidate, that candidate becomes act_mask and the state moves
//               to MS_DREAM.
//   MS_DREAM    The estimated mapping (EAMS) is in use (eams_on). Monitoring
//               goes on; the active mapping is scored on every window. When it
//               no longer beats the predefined mapping (cost_act >= cost_base)
//               for `consistency` consecutive windows, the state moves to
//               MS_ROLLBACK.
//   MS_ROLLBACK rollback_req is held until rollback_done, then MS_BASE. Only
//               then may another estimated mapping be adopted.
//
// A consistency value of 0 is treated as 1. Each estimator result (est_done
// pulse) is evaluated in the cycle it arrives; outputs are registered.
//
// The threshold test, the consecutive-window rule and the rollback follow the
// paper (which used a 7% threshold); the exact rollback condition, the demand
// that consecutive windows agree on one candidate, and the counter widths
// are this design's choices.
module mapping_decision #(
  parameter int unsigned FRAME_W = dream_pkg::BANK_W + dream_pkg::ROW_W,
  parameter int unsigned COST_W  = dream_pkg::CNT_W + $clog2(FRAME_W + 1),
  parameter logic [FRAME_W-1:0] RESET_MASK = FRAME_W'((1 << dream_pkg::BANK_W) - 1)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    est_done,
  input  logic [FRAME_W-1:0]      cand_mask,
  input  logic [COST_W-1:0]       cost_base,
  input  logic [COST_W-1:0]       cost_cand,
  input  logic [COST_W-1:0]       cost_act,
  input  logic [6:0]              thr_pct,
  input  logic [3:0]              consistency,
  input  logic                    rollback_done,
  output dream_pkg::map_state_t   state,
  output logic [FRAME_W-1:0]      act_mask,
  output logic                    eams_on,
  output logic                    rollback_req
);
  import dream_pkg::*;

  localparam int unsigned PW = COST_W + 7;

  logic [3:0]         run;        // consecutive qualifying windows
  logic [FRAME_W-1:0] last_cand;
  logic [3:0]         need;
  logic               qualifies;
  logic [PW-1:0]      lhs, rhs;

  assign need = (consistency == 4'd0) ? 4'd1 : consistency;
  assign lhs  = (cost_base > cost_cand) ? PW'(cost_base - cost_cand) * PW'(100) : '0;
  assign rhs  = PW'(thr_pct) * PW'(cost_base);
  assign qualifies = (cost_base > cost_cand) && (lhs > rhs);

  assign eams_on      = (state == MS_DREAM);
  assign rollback_req = (state == MS_ROLLBACK);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= MS_BASE;
      act_mask  <= RESET_MASK;
      run       <= '0;
      last_cand <= '0;
    end else begin
      unique case (state)
        MS_BASE: if (est_done) begin
          last_cand <= cand_mask;
          if (!qualifies) begin
            run <= '0;
          end else begin
            logic [3:0] r;
            r = (run != 0 && cand_mask == last_cand) ? run + 1'b1 : 4'd1;
            if (r >= need) begin
              act_mask <= cand_mask;
              state    <= MS_DREAM;
              run      <= '0;
            end else begin
              run <= r;
            end
          end
        end
        MS_DREAM: if (est_done) begin
          if (cost_act >= cost_base) begin
            if (run + 1'b1 >= need) begin
              state <= MS_ROLLBACK;
              run   <= '0;
            end else begin
              run <= run + 1'b1;
            end
          end else begin
            run <= '0;
          end
        end
        MS_ROLLBACK: if (rollback_done) begin
          state    <= MS_BASE;
          act_mask <= RESET_MASK;
          run      <= '0;
        end
        default: state <= MS_BASE;
      endcase
    end
  end

endmodule
