// roi_calibrator: offline calibration of a workload-specific mapping.
//
// For systems that run the same kind of work for a long time, the access
// pattern is observed over a Region Of Interest (ROI) of hours or days and a
// single mapping is derived from the totals; the system is then rebooted
// with that mapping as its predefined one, so no data has to migrate.
//
// While roi_active is high, every completed monitoring window (win_done,
// win_cnt) is added into ACC_W-bit saturating per-bit totals. The totals are
// cleared when roi_active rises. A roi_end pulse starts a mapping_estimator
// on the totals; when it finishes, calib_mask holds the estimated mapping
// and calib_valid goes high until the next ROI starts. calib_cost_base and
// calib_cost_new give the row-bit change totals of the predefined and the
// calibrated mapping, for the decision whether to boot with it.
//
// Timing: a window is accumulated in the cycle after win_done; calib_valid
// rises FRAME_W + 2 cycles after roi_end.
//
// The use of the ROI totals follows the paper; the accumulator width and
// its saturation are this design's choices.
module roi_calibrator #(
  parameter int unsigned COL_W    = dream_pkg::COL_W,
  parameter int unsigned BANK_W   = dream_pkg::BANK_W,
  parameter int unsigned ROW_W    = dream_pkg::ROW_W,
  parameter int unsigned CNT_W    = dream_pkg::CNT_W,
  parameter int unsigned ACC_W    = 40,
  parameter int unsigned NUM_BITS = COL_W + BANK_W + ROW_W,
  parameter int unsigned FRAME_W  = BANK_W + ROW_W,
  parameter int unsigned COST_W   = ACC_W + $clog2(FRAME_W + 1)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               roi_active,
  input  logic               roi_end,
  input  logic               win_done,
  input  logic [CNT_W-1:0]   win_cnt [NUM_BITS],
  input  logic [FRAME_W-1:0] base_mask,
  output logic               calib_valid,
  output logic [FRAME_W-1:0] calib_mask,
  output logic [COST_W-1:0]  calib_cost_base,
  output logic [COST_W-1:0]  calib_cost_new
);

  logic [ACC_W-1:0] acc [NUM_BITS];
  logic             active_q;
  logic             est_done;
  logic [COST_W-1:0] unused_cost_act;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      active_q    <= 1'b0;
      calib_valid <= 1'b0;
      for (int i = 0; i < NUM_BITS; i++) acc[i] <= '0;
    end else begin
      active_q <= roi_active;
      if (roi_active && !active_q) begin
        calib_valid <= 1'b0;
        for (int i = 0; i < NUM_BITS; i++) acc[i] <= '0;
      end else if (roi_active && win_done) begin
        for (int i = 0; i < NUM_BITS; i++) begin
          logic [ACC_W:0] s;
          s = {1'b0, acc[i]} + (ACC_W+1)'(win_cnt[i]);
          acc[i] <= s[ACC_W] ? '1 : s[ACC_W-1:0];
        end
      end
      if (est_done) calib_valid <= 1'b1;
    end
  end

  mapping_estimator #(
    .COL_W(COL_W), .BANK_W(BANK_W), .ROW_W(ROW_W), .CNT_W(ACC_W), .COST_W(COST_W)
  ) u_est (
    .clk, .rst_n,
    .start     (roi_end),
    .cnt       (acc),
    .base_mask (base_mask),
    .act_mask  (base_mask),
    .busy      (),
    .done      (est_done),
    .cand_mask (calib_mask),
    .cost_base (calib_cost_base),
    .cost_cand (calib_cost_new),
    .cost_act  (unused_cost_act)
  );

endmodule
