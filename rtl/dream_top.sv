// dream_top: the DReAM unit of a DRAM memory controller.
//
// It sits between the request stream from the caches (physical cache-line
// requests) and the DRAM command scheduler, and
//   1. counts, per line-address bit, how often consecutive requests differ
//      in that bit over windows of WINDOW requests (bit_change_monitor);
//   2. after each window derives an estimated mapping that gives the most
//      frequently changing non-column bits to the bank index and the rest to
//      the row index, and scores it and the mappings in use
//      (mapping_estimator);
//   3. adopts the estimated mapping when it beats the predefined one by more
//      than cfg_thr_pct percent for cfg_consistency consecutive windows, and
//      rolls back when it stops beating it (mapping_decision);
//   4. translates every request to {bank, row, column}, migrating rows to
//      their new location on first touch and keeping one Migration bit and
//      one Swap bit per row (migration_controller with two status_tables);
//   5. performs each relocation inside the DRAM as an inter-bank row swap
//      over the 64-bit internal bus (migration_sequencer, dcmd_* outputs);
//   6. optionally accumulates the windows of a Region Of Interest into one
//      offline mapping to boot with (roi_calibrator, calib_* outputs).
//
// The predefined mapping is cfg_base_mask (bank bits at frame bits 0..2 for
// Row | Bank | Column | Offset; booting with calib_mask gives the offline
// variant). cfg_base_mask must stay constant while the unit runs.
//
// Interfaces: req_* and svc_* are valid/ready handshakes, one request in
// flight. The address is {row frame, column, block offset}; the block offset
// is not used, since a request moves a whole line. svc_* carries the DRAM
// coordinates. dcmd_* is one in-DRAM migration command per cycle.
// req_ready stays low for 2**FRAME_W cycles after reset while the status
// tables clear, and during relocations and rollback sweeps.
//
// The structure follows the paper. The encodings, handshakes and the
// restrictions listed in migration_controller are this design's choices.
module dream_top #(
  parameter int unsigned ROW_W    = dream_pkg::ROW_W,
  parameter int unsigned BANK_W   = dream_pkg::BANK_W,
  parameter int unsigned COL_W    = dream_pkg::COL_W,
  parameter int unsigned OFFSET_W = dream_pkg::OFFSET_W,
  parameter int unsigned CNT_W    = dream_pkg::CNT_W,
  parameter int unsigned WINDOW   = dream_pkg::WINDOW,
  parameter int unsigned BEATS    = dream_pkg::ROW_BEATS,
  parameter bit          PERMUTE  = 1'b1,
  parameter int unsigned FRAME_W  = BANK_W + ROW_W,
  parameter int unsigned ADDR_W   = OFFSET_W + COL_W + FRAME_W
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // configuration
  input  logic [FRAME_W-1:0]         cfg_base_mask,
  input  logic [6:0]                 cfg_thr_pct,
  input  logic [3:0]                 cfg_consistency,
  // offline calibration
  input  logic                       roi_active,
  input  logic                       roi_end,
  output logic                       calib_valid,
  output logic [FRAME_W-1:0]         calib_mask,
  // requests from the cache side
  input  logic                       req_valid,
  output logic                       req_ready,
  input  logic [ADDR_W-1:0]          req_addr,
  input  logic                       req_we,
  // translated requests to the DRAM scheduler
  output logic                       svc_valid,
  input  logic                       svc_ready,
  output logic [BANK_W-1:0]          svc_bank,
  output logic [ROW_W-1:0]           svc_row,
  output logic [COL_W-1:0]           svc_col,
  output logic                       svc_we,
  // in-DRAM migration commands
  output dream_pkg::dcmd_t           dcmd,
  output logic [FRAME_W-1:0]         dcmd_a,
  output logic [FRAME_W-1:0]         dcmd_b,
  output logic [$clog2(BEATS)-1:0]   dcmd_beat,
  // status and events
  output dream_pkg::map_state_t      map_state,
  output logic [FRAME_W-1:0]         act_mask,
  output logic                       win_done,
  output logic                       ev_migrate,
  output logic                       ev_skip_intra,
  output logic                       ev_skip_taken,
  output logic                       ev_chain,
  output logic                       ev_rb_swap
);

  localparam int unsigned NUM_BITS = COL_W + FRAME_W;
  localparam int unsigned COST_W   = CNT_W + $clog2(FRAME_W + 1);

  logic [CNT_W-1:0]   win_cnt [NUM_BITS];
  logic               est_done;
  logic [FRAME_W-1:0] cand_mask;
  logic [COST_W-1:0]  cost_base, cost_cand, cost_act;
  logic               eams_on, rollback_req, rollback_done;
  logic               mig_valid, mig_ready, mig_swap, mig_done;
  logic [FRAME_W-1:0] mig_src, mig_dst;
  logic               req_fire;

  assign req_fire = req_valid && req_ready;

  bit_change_monitor #(.NUM_BITS(NUM_BITS), .CNT_W(CNT_W), .WINDOW(WINDOW)) u_mon (
    .clk, .rst_n,
    .req_fire (req_fire),
    .req_line (req_addr[ADDR_W-1:OFFSET_W]),
    .win_done (win_done),
    .win_cnt  (win_cnt)
  );

  mapping_estimator #(.COL_W(COL_W), .BANK_W(BANK_W), .ROW_W(ROW_W), .CNT_W(CNT_W), .COST_W(COST_W)) u_est (
    .clk, .rst_n,
    .start     (win_done),
    .cnt       (win_cnt),
    .base_mask (cfg_base_mask),
    .act_mask  (act_mask),
    .busy      (),
    .done      (est_done),
    .cand_mask (cand_mask),
    .cost_base (cost_base),
    .cost_cand (cost_cand),
    .cost_act  (cost_act)
  );

  mapping_decision #(.FRAME_W(FRAME_W), .COST_W(COST_W),
                     .RESET_MASK(FRAME_W'((1 << BANK_W) - 1))) u_dec (
    .clk, .rst_n,
    .est_done      (est_done),
    .cand_mask     (cand_mask),
    .cost_base     (cost_base),
    .cost_cand     (cost_cand),
    .cost_act      (cost_act),
    .thr_pct       (cfg_thr_pct),
    .consistency   (cfg_consistency),
    .rollback_done (rollback_done),
    .state         (map_state),
    .act_mask      (act_mask),
    .eams_on       (eams_on),
    .rollback_req  (rollback_req)
  );

  migration_controller #(.BANK_W(BANK_W), .ROW_W(ROW_W), .COL_W(COL_W), .PERMUTE(PERMUTE)) u_ctl (
    .clk, .rst_n,
    .base_mask     (cfg_base_mask),
    .act_mask      (act_mask),
    .eams_on       (eams_on),
    .rollback_req  (rollback_req),
    .rollback_done (rollback_done),
    .init_busy     (),
    .req_valid     (req_valid),
    .req_ready     (req_ready),
    .req_frame     (req_addr[ADDR_W-1:OFFSET_W+COL_W]),
    .req_col       (req_addr[OFFSET_W+COL_W-1:OFFSET_W]),
    .req_we        (req_we),
    .svc_valid, .svc_ready, .svc_bank, .svc_row, .svc_col, .svc_we,
    .mig_valid, .mig_ready, .mig_src, .mig_dst, .mig_swap, .mig_done,
    .ev_migrate, .ev_skip_intra, .ev_skip_taken, .ev_chain, .ev_rb_swap
  );

  migration_sequencer #(.BANK_W(BANK_W), .FRAME_W(FRAME_W), .BEATS(BEATS)) u_seq (
    .clk, .rst_n,
    .mig_valid, .mig_ready, .mig_src, .mig_dst, .mig_swap, .mig_done,
    .dcmd, .dcmd_a, .dcmd_b, .dcmd_beat
  );

  roi_calibrator #(.COL_W(COL_W), .BANK_W(BANK_W), .ROW_W(ROW_W), .CNT_W(CNT_W)) u_roi (
    .clk, .rst_n,
    .roi_active, .roi_end,
    .win_done (win_done),
    .win_cnt  (win_cnt),
    .base_mask (cfg_base_mask),
    .calib_valid, .calib_mask,
    .calib_cost_base (),
    .calib_cost_new  ()
  );

endmodule
