// tb_migration_sequencer: self-checking test of the in-DRAM relocation
// command sequence.
//
// For swaps and one-way moves between random locations in different banks,
// checks the exact command stream: one DC_ACT_AB, 64 DC_RD_A_WR_B beats
// numbered 0..63, 64 DC_RD_B_WR_A beats for a swap only, one DC_CONNECT,
// then mig_done; the locations on dcmd_a/dcmd_b; mig_ready only when idle;
// and the total of 130 (swap) or 66 (move) cycles.
module tb_migration_sequencer;
  import dream_pkg::*;
  localparam int FW = 19, BEATS = 64;

  logic clk = 0, rst_n = 0;
  logic mig_valid = 0, mig_ready, mig_swap = 0, mig_done;
  logic [FW-1:0] mig_src = '0, mig_dst = '0;
  dcmd_t dcmd;
  logic [FW-1:0] dcmd_a, dcmd_b;
  logic [5:0] dcmd_beat;

  migration_sequencer #(.FRAME_W(FW), .BEATS(BEATS)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic one(bit swap);
    logic [FW-1:0] a, b;
    int cyc = 0;
    a = FW'($urandom);
    b = FW'($urandom);
    b[2:0] = a[2:0] + 3'($urandom_range(1, 7));
    @(negedge clk);
    chk(mig_ready, "ready when idle");
    mig_valid = 1; mig_src = a; mig_dst = b; mig_swap = swap;
    @(negedge clk);
    mig_valid = 0; mig_src = '0; mig_dst = '0;
    chk(!mig_ready, "not ready while busy");
    chk(dcmd == DC_ACT_AB && dcmd_a == a && dcmd_b == b, "activate both rows");
    cyc = 1;
    for (int k = 0; k < BEATS; k++) begin
      @(negedge clk); cyc++;
      chk(dcmd == DC_RD_A_WR_B && dcmd_beat == 6'(k), $sformatf("A->B beat %0d (cmd %0d beat %0d)", k, dcmd, dcmd_beat));
    end
    if (swap) for (int k = 0; k < BEATS; k++) begin
      @(negedge clk); cyc++;
      chk(dcmd == DC_RD_B_WR_A && dcmd_beat == 6'(k), $sformatf("B->A beat %0d", k));
    end
    @(negedge clk); cyc++;
    chk(dcmd == DC_CONNECT && dcmd_a == a && dcmd_b == b, "connect");
    @(negedge clk);
    chk(mig_done && dcmd == DC_NOP && mig_ready, "done and idle");
    chk(cyc == (swap ? 2*BEATS + 2 : BEATS + 2), $sformatf("cycles %0d", cyc));
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(dcmd == DC_NOP && !mig_done, "idle after reset");
    for (int n = 0; n < 30; n++) one(n % 3 != 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
