// tb_roi_calibrator: self-checking test of the offline (ROI) calibration.
//
// Sends windows of random per-bit counts, some while the ROI is active and
// some outside it, and checks that the calibrated mask equals the three
// frame bits with the largest ROI totals (ties to the lower bit), that the
// reported costs match the totals, that windows outside the ROI are
// ignored, that a new ROI starts from zero, and that calib_valid rises
// FRAME_W+2 cycles after roi_end.
module tb_roi_calibrator;
  localparam int COL = 7, BK = 3, RW = 16, CW = 18, ACC = 40;
  localparam int NB = COL + BK + RW, FW = BK + RW, COSTW = ACC + 5;

  logic clk = 0, rst_n = 0;
  logic roi_active = 0, roi_end = 0, win_done = 0;
  logic [CW-1:0] win_cnt [NB];
  logic [FW-1:0] base_mask = FW'(7);
  logic calib_valid;
  logic [FW-1:0] calib_mask;
  logic [COSTW-1:0] calib_cost_base, calib_cost_new;

  roi_calibrator #(.COL_W(COL), .BANK_W(BK), .ROW_W(RW), .CNT_W(CW), .ACC_W(ACC)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint tot [NB];
  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic window(bit count_it, int hot);
    @(negedge clk);
    foreach (win_cnt[i]) win_cnt[i] = CW'($urandom_range(0, 1000));
    if (hot >= 0) win_cnt[hot] = CW'(200000);
    if (count_it) foreach (tot[i]) tot[i] += win_cnt[i];
    win_done = 1;
    @(negedge clk);
    win_done = 0;
  endtask

  task automatic finish_roi(string tag);
    logic [FW-1:0] m = '0;
    longint cb = 0, cn = 0;
    int lat = 0;
    for (int k = 0; k < BK; k++) begin
      int best = -1;
      for (int i = 0; i < FW; i++) if (!m[i] && (best < 0 || tot[COL+i] > tot[COL+best])) best = i;
      m[best] = 1;
    end
    for (int i = 0; i < FW; i++) begin
      if (!base_mask[i]) cb += tot[COL+i];
      if (!m[i]) cn += tot[COL+i];
    end
    @(negedge clk); roi_end = 1;
    @(negedge clk); roi_end = 0; lat = 1;
    while (!calib_valid) begin @(negedge clk); lat++; end
    chk(lat == FW + 2, $sformatf("%s latency %0d", tag, lat));
    chk(calib_mask == m, $sformatf("%s mask %h exp %h", tag, calib_mask, m));
    chk(calib_cost_base == COSTW'(cb) && calib_cost_new == COSTW'(cn), $sformatf("%s costs", tag));
  endtask

  initial begin
    foreach (win_cnt[i]) win_cnt[i] = '0;
    foreach (tot[i]) tot[i] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    window(0, 20);                      // outside the ROI: ignored
    @(negedge clk); roi_active = 1;
    for (int n = 0; n < 40; n++) window(1, (n % 4 == 0) ? 14 : -1);
    finish_roi("roi1");
    chk(calib_mask[14 - COL], "hot line bit 14 chosen as bank bit");
    roi_active = 0;
    window(0, 22);                      // outside the ROI: ignored
    foreach (tot[i]) tot[i] = 0;
    @(negedge clk); roi_active = 1;
    @(negedge clk);
    chk(!calib_valid, "new ROI clears the result");
    for (int n = 0; n < 25; n++) window(1, -1);
    finish_roi("roi2");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
