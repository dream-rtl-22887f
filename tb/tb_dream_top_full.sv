// tb_dream_top_full: end-to-end self-checking test of dream_top with every parameter at its default (8 banks x 65,536 rows, 250K-request windows).
//
// A tb_dram_model holds the row tags and executes the in-DRAM relocation
// commands; every translated request (svc_*) is checked to land on the
// location that holds the requested row frame. The request stream goes
// through four phases, each a whole number of monitoring windows:
//   A  (stream-like) sequential cache lines: the estimate equals the
//      predefined mapping, nothing is adopted, nothing moves;
//   B  (libquantum-like) one row bit, line-address bit 14, changes on every request, two bank bits
//      on half of them: the estimated mapping is adopted after two
//      consistent windows and rows migrate on demand (swaps, served swapped
//      rows, skipped same-bank moves and taken destinations); a request for
//      the row displaced by the last swap, and one for a row whose
//      destination is taken, make sure both cases occur at least once; the same
//      windows also run an offline calibration (ROI);
//   C  the hot bit freezes and the three predefined bank bits change
//      constantly: the active mapping stops paying off, a rollback sweeps
//      every migrated row back, and the predefined mapping returns;
//   D  (reduced size only) reset with the calibrated mapping as the
//      predefined one (the offline variant) and re-run phase B traffic: it
//      is served at the new locations and no further change is adopted.
// Each mechanism (window, adoption, migration, swapped-row service,
// same-bank skip, taken skip, rollback, rollback swap, calibration) is
// counted and must occur at least once.
module tb_dream_top_full;
  import dream_pkg::*;
  localparam int BK = BANK_W, RW = ROW_W, COL = COL_W, OFF = OFFSET_W, WIN = WINDOW;
  localparam int FW  = BK + RW;
  localparam int AW  = OFF + COL + FW;
  localparam int HOT = 7;   // line-address bit 14 (COL_W = 7), the hot bit of libquantum

  logic clk = 0, rst_n = 0;
  logic [FW-1:0] cfg_base_mask = FW'(7);
  logic [6:0] cfg_thr_pct = 7'd7;
  logic [3:0] cfg_consistency = 4'd2;
  logic roi_active = 0, roi_end = 0, calib_valid;
  logic [FW-1:0] calib_mask;
  logic req_valid = 0, req_ready, req_we = 0;
  logic [AW-1:0] req_addr = '0;
  logic svc_valid, svc_ready = 1, svc_we;
  logic [BK-1:0] svc_bank;
  logic [RW-1:0] svc_row;
  logic [COL-1:0] svc_col;
  dcmd_t dcmd;
  logic [FW-1:0] dcmd_a, dcmd_b;
  logic [5:0] dcmd_beat;
  map_state_t map_state;
  logic [FW-1:0] act_mask;
  logic win_done, ev_migrate, ev_skip_intra, ev_skip_taken, ev_chain, ev_rb_swap;

  dream_top u_dut (.*);
  tb_dram_model #(.BANK_W(BK), .ROW_W(RW), .BEATS(64)) u_dram (.clk, .rst_n, .dcmd, .dcmd_a, .dcmd_b, .dcmd_beat);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // event counters
  int n_win = 0, n_mig = 0, n_intra = 0, n_taken = 0, n_chain = 0, n_rb = 0;
  int n_adopt = 0, n_rollback = 0, n_served = 0, n_bad = 0;
  map_state_t prev_state = MS_BASE;
  always @(posedge clk) if (rst_n) begin
    n_win   += int'(win_done);
    n_mig   += int'(ev_migrate);
    n_intra += int'(ev_skip_intra);
    n_taken += int'(ev_skip_taken);
    n_chain += int'(ev_chain);
    n_rb    += int'(ev_rb_swap);
    if (prev_state == MS_BASE && map_state == MS_DREAM) n_adopt++;
    if (prev_state == MS_DREAM && map_state == MS_ROLLBACK) n_rollback++;
    prev_state = map_state;
  end

  // every service must hit the requested row frame
  logic [FW-1:0] inflight;
  always @(posedge clk) if (rst_n) begin
    if (req_valid && req_ready) inflight <= req_addr[AW-1:OFF+COL];
    if (svc_valid && svc_ready) begin
      n_served++;
      if (u_dram.tag[{svc_row, svc_bank}] != inflight) begin
        n_bad++;
        if (n_bad < 10) $display("FAIL: frame %h served at %h holding %h", inflight, {svc_row, svc_bank}, u_dram.tag[{svc_row, svc_bank}]);
      end
    end
  end

  // source location of the latest relocation: after the swap it holds the
  // row displaced from the destination, which is then found by the chain
  logic [FW-1:0] last_src = '0;
  always @(posedge clk) if (rst_n && dcmd == DC_ACT_AB) last_src <= dcmd_a;

  // A frame still at its predefined location whose estimated location, in
  // another bank, already holds a relocated row: its migration must be
  // skipped because the destination is taken.
  task automatic send_taken();
    for (longint x = 0; x < 2**FW; x++) begin
      logic [FW-1:0] px, ex;
      px = u_dram.map_fwd(cfg_base_mask, FW'(x));
      ex = u_dram.map_fwd(act_mask, FW'(x));
      if (u_dram.tag[px] == FW'(x) && px[BK-1:0] != ex[BK-1:0] &&
          u_dram.map_fwd(cfg_base_mask, u_dram.tag[ex]) != ex) begin
        send(FW'(x), COL'(0));
        return;
      end
    end
  endtask

  logic [FW-1:0] cur;
  task automatic send(logic [FW-1:0] f, logic [COL-1:0] c);
    @(negedge clk);
    req_valid = 1;
    req_addr  = {f, c, OFF'(0)};
    req_we    = 1'($urandom_range(0, 1));
    @(posedge clk);
    while (!req_ready) @(posedge clk);
    @(negedge clk);
    req_valid = 0;
  endtask

  // Phase patterns.
  task automatic stream(int n);
    logic [FW+COL-1:0] line = '0;
    for (int i = 0; i < n; i++) begin
      send(line[FW+COL-1:COL], line[COL-1:0]);
      line++;
    end
  endtask
  task automatic hot_row(int n, int rare = 15);
    for (int i = 0; i < n; i++) begin
      cur[HOT] = ~cur[HOT];
      if (i % 2 == 0) cur[1:0] = cur[1:0] + 1'b1;
      if ($urandom_range(0, rare) == 0) cur[$urandom_range(2, FW-1)] ^= 1'b1;
      send(cur, COL'($urandom));
    end
  endtask
  task automatic hot_bank(int n);
    for (int i = 0; i < n; i++) begin
      cur[2:0] = cur[2:0] + 3'd3;
      if ($urandom_range(0, 31) == 0) cur[$urandom_range(3, FW-2)] ^= 1'b1;
      cur[HOT] = 1'b0;
      send(cur, COL'($urandom));
    end
  endtask

  task automatic wait_idle();
    repeat (2 * FW + 8) @(negedge clk);
  endtask

  logic [FW-1:0] calibrated;

  initial begin
    cur = '0;
    repeat (3) @(negedge clk);
    u_dram.load(cfg_base_mask);
    rst_n = 1;
    // A: streaming
    stream(3 * WIN);
    wait_idle();
    chk(map_state == MS_BASE && n_adopt == 0, "streaming keeps the predefined mapping");
    chk(u_dram.relocations == 0, "no relocation while streaming");
    // B: hot row bit, with an ROI around it
    @(negedge clk); roi_active = 1;
    hot_row(2 * WIN);
    wait_idle();
    chk(map_state == MS_DREAM && act_mask[HOT], $sformatf("hot-row workload adopts a mapping with the hot bit in the bank (state %0d mask %h)", map_state, act_mask));
    hot_row(WIN, 3);
    wait_idle();
    while (!req_ready) @(negedge clk);     // the last relocation has finished
    send(u_dram.tag[last_src], COL'(0));   // a row that was swapped out
    wait_idle();
    while (!req_ready) @(negedge clk);
    send_taken();
    @(negedge clk); roi_end = 1;
    @(negedge clk); roi_end = 0; roi_active = 0;
    while (!calib_valid) @(negedge clk);
    calibrated = calib_mask;
    chk(calibrated[HOT], $sformatf("calibrated mask %h uses the hot bit as a bank bit", calibrated));
    chk(u_dram.misplaced(cfg_base_mask) > 0, "rows migrated");
    // C: bank bits hot, hot row bit frozen -> rollback
    hot_bank(2 * WIN);
    while (map_state != MS_BASE) @(negedge clk);
    chk(n_rollback == 1 && n_rb == n_mig, $sformatf("rollback %0d, swaps back %0d of %0d", n_rollback, n_rb, n_mig));
    chk(u_dram.misplaced(cfg_base_mask) == 0, "all rows back at their predefined locations");
    hot_bank(WIN / 2);

    chk(n_bad == 0 && n_served > 0, $sformatf("%0d of %0d services hit the wrong row", n_bad, n_served));
    chk(u_dram.errors == 0, $sformatf("DRAM command errors %0d", u_dram.errors));
    chk(n_win > 0, "windows");
    chk(n_adopt > 0, "adoption");
    chk(n_mig > 0, "migration");
    chk(n_chain > 0, "swapped-row service");
    chk(n_intra > 0, "same-bank skip");
    chk(n_taken > 0, "taken-destination skip");
    chk(n_rollback > 0 && n_rb > 0, "rollback");
    $display("windows=%0d adopt=%0d migrations=%0d swapped_served=%0d intra_skip=%0d taken_skip=%0d rollbacks=%0d rollback_swaps=%0d served=%0d",
             n_win, n_adopt, n_mig, n_chain, n_intra, n_taken, n_rollback, n_rb, n_served);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400 * WIN + 200 * (2 ** FW) + 20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
