// tb_mapping_decision: self-checking test of the adopt / rollback decision.
//
// Feeds sequences of window results with known costs and checks: the 7%
// threshold (a 7% gain does not qualify, 8% does); that `consistency`
// consecutive agreeing windows are needed; that a different candidate or a
// failing window restarts the count; that the active mapping is kept while
// it beats the predefined one; that rollback is requested after
// `consistency` windows without a gain and held until rollback_done; and
// that a new mapping can be adopted afterwards.
module tb_mapping_decision;
  import dream_pkg::*;
  localparam int FW = 19, CW = 23;

  logic clk = 0, rst_n = 0;
  logic est_done = 0, rollback_done = 0;
  logic [FW-1:0] cand_mask = '0;
  logic [CW-1:0] cost_base = '0, cost_cand = '0, cost_act = '0;
  logic [6:0] thr_pct = 7'd7;
  logic [3:0] consistency = 4'd2;
  map_state_t state;
  logic [FW-1:0] act_mask;
  logic eams_on, rollback_req;

  mapping_decision #(.FRAME_W(FW), .COST_W(CW)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic win(logic [FW-1:0] m, int base, int cand, int act);
    @(negedge clk);
    est_done = 1; cand_mask = m; cost_base = CW'(base); cost_cand = CW'(cand); cost_act = CW'(act);
    @(negedge clk);
    est_done = 0;
  endtask

  localparam logic [FW-1:0] M1 = FW'('h00481), M2 = FW'('h01110);

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(state == MS_BASE && act_mask == FW'(7) && !eams_on, "reset state");
    win(M1, 1000, 930, 1000);            // exactly 7%: no
    win(M1, 1000, 930, 1000);
    win(M1, 1000, 930, 1000);
    chk(state == MS_BASE, "7% gain does not qualify");
    win(M1, 1000, 920, 1000);            // 8%: 1st
    chk(state == MS_BASE, "one window is not enough");
    win(M2, 1000, 900, 1000);            // other candidate: restart
    chk(state == MS_BASE, "changed candidate restarts count");
    win(M2, 1000, 1000, 1000);           // no gain: restart
    win(M2, 1000, 500, 1000);            // 1st
    chk(state == MS_BASE, "count restarted after failing window");
    win(M2, 1000, 500, 1000);            // 2nd: adopt
    chk(state == MS_DREAM && eams_on && act_mask == M2, "adopt after 2 windows");
    win(M1, 1000, 400, 600);             // active still better
    win(M1, 1000, 400, 990);
    chk(state == MS_DREAM && act_mask == M2, "keep while better");
    win(M1, 1000, 400, 1000);            // 1st not better
    win(M1, 1000, 400, 900);             // better again: restart
    win(M1, 1000, 400, 1200);            // 1st
    chk(state == MS_DREAM, "one bad window is not enough");
    win(M1, 1000, 400, 1100);            // 2nd: rollback
    chk(state == MS_ROLLBACK && rollback_req && !eams_on, "rollback requested");
    win(M1, 1000, 100, 1100);
    repeat (5) @(negedge clk);
    chk(state == MS_ROLLBACK && rollback_req, "rollback held until done");
    rollback_done = 1;
    @(negedge clk);
    rollback_done = 0;
    chk(state == MS_BASE && !rollback_req && act_mask == FW'(7), "back to predefined mapping");
    consistency = 4'd3;
    win(M1, 2000, 1000, 2000);
    win(M1, 2000, 1000, 2000);
    chk(state == MS_BASE, "consistency 3 needs three");
    win(M1, 2000, 1000, 2000);
    chk(state == MS_DREAM && act_mask == M1, "third mapping adopted after rollback");
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
