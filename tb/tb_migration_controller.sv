// tb_migration_controller: self-checking test of on-demand migration,
// swap-chain lookup and rollback, at a reduced size (8 banks x 32 rows).
//
// The controller drives a real migration_sequencer, whose commands move row
// tags inside tb_dram_model. Every serviced request is checked against the
// model: the location the controller sends must hold the requested frame.
// Phases: predefined mapping only (every request at its PAMS location, no
// relocation); estimated mapping on with random traffic (migrations, served
// swapped rows, skipped same-bank and already-taken destinations must all
// occur); rollback (all rows back at their PAMS locations afterwards, and
// requests again served there). Each relocation must end (mig_done) 131 cycles after it is accepted.
module tb_migration_controller;
  import dream_pkg::*;
  localparam int BK = 3, RW = 5, COL = 7, FW = BK + RW, BEATS = 64;

  logic clk = 0, rst_n = 0;
  logic [FW-1:0] base_mask = FW'(7), act_mask = FW'(7);
  logic eams_on = 0, rollback_req = 0, rollback_done, init_busy;
  logic req_valid = 0, req_ready, req_we = 0;
  logic [FW-1:0] req_frame = '0;
  logic [COL-1:0] req_col = '0;
  logic svc_valid, svc_ready = 0, svc_we;
  logic [BK-1:0] svc_bank;
  logic [RW-1:0] svc_row;
  logic [COL-1:0] svc_col;
  logic mig_valid, mig_ready, mig_swap, mig_done;
  logic [FW-1:0] mig_src, mig_dst;
  logic ev_migrate, ev_skip_intra, ev_skip_taken, ev_chain, ev_rb_swap;
  dcmd_t dcmd;
  logic [FW-1:0] dcmd_a, dcmd_b;
  logic [5:0] dcmd_beat;

  migration_controller #(.BANK_W(BK), .ROW_W(RW), .COL_W(COL)) dut (.*);
  migration_sequencer #(.BANK_W(BK), .FRAME_W(FW), .BEATS(BEATS)) u_seq (.*);
  tb_dram_model #(.BANK_W(BK), .ROW_W(RW), .BEATS(BEATS)) u_dram (.clk, .rst_n, .dcmd, .dcmd_a, .dcmd_b, .dcmd_beat);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_mig = 0, n_intra = 0, n_taken = 0, n_chain = 0, n_rb = 0;
  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) if (rst_n) begin
    n_mig   += int'(ev_migrate);
    n_intra += int'(ev_skip_intra);
    n_taken += int'(ev_skip_taken);
    n_chain += int'(ev_chain);
    n_rb    += int'(ev_rb_swap);
  end

  // Relocation length: mig handshake to mig_done.
  int mig_t0 = 0, cyc = 0;
  always @(posedge clk) begin
    cyc++;
    if (!rst_n) mig_t0 = cyc;
    else if (mig_valid && mig_ready) mig_t0 = cyc;
    if (rst_n && mig_done) chk(cyc - mig_t0 == 2 * BEATS + 3, $sformatf("relocation took %0d cycles", cyc - mig_t0));
  end

  task automatic request(logic [FW-1:0] f, bit expect_pams);
    logic [COL-1:0] c;
    c = COL'($urandom);
    @(negedge clk);
    req_valid = 1; req_frame = f; req_col = c; req_we = 1'($urandom_range(0, 1));
    while (!req_ready) @(negedge clk);
    @(negedge clk);
    req_valid = 0;
    while (!svc_valid) @(negedge clk);
    repeat ($urandom_range(0, 2)) @(negedge clk);
    chk(u_dram.tag[{svc_row, svc_bank}] == f,
        $sformatf("frame %h served at %h holding %h", f, {svc_row, svc_bank}, u_dram.tag[{svc_row, svc_bank}]));
    chk(svc_col == c, "column passes through");
    if (expect_pams) chk({svc_row, svc_bank} == u_dram.map_fwd(base_mask, f), "served at PAMS location");
    svc_ready = 1;
    @(negedge clk);
    svc_ready = 0;
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    u_dram.load(base_mask);
    while (init_busy) @(negedge clk);
    // Phase 1: predefined mapping only.
    for (int n = 0; n < 100; n++) request(FW'($urandom), 1'b1);
    chk(u_dram.relocations == 0, "no relocation with the predefined mapping");
    // Phase 2: estimated mapping (bank bits = frame bits 3, 5, 7).
    act_mask = FW'('b1010_1000);
    @(negedge clk);
    eams_on = 1;
    for (int n = 0; n < 1500; n++) request(FW'($urandom), 1'b0);
    chk(n_mig > 0 && n_mig == u_dram.relocations, $sformatf("migrations %0d model %0d", n_mig, u_dram.relocations));
    chk(n_chain > 0, $sformatf("served swapped rows %0d", n_chain));
    chk(n_intra > 0, $sformatf("same-bank skips %0d", n_intra));
    chk(n_taken > 0, $sformatf("taken-destination skips %0d", n_taken));
    chk(u_dram.misplaced(base_mask) > 0, "rows moved");
    // Phase 3: rollback.
    eams_on = 0;
    rollback_req = 1;
    while (!rollback_done) @(negedge clk);
    rollback_req = 0;
    chk(n_rb == n_mig, $sformatf("rollback swaps %0d of %0d", n_rb, n_mig));
    chk(u_dram.misplaced(base_mask) == 0, "all rows back at PAMS locations");
    act_mask = FW'(7);
    for (int n = 0; n < 100; n++) request(FW'($urandom), 1'b1);
    chk(u_dram.errors == 0, $sformatf("DRAM model errors %0d", u_dram.errors));
    $display("migrations=%0d chains=%0d intra=%0d taken=%0d rollback=%0d", n_mig, n_chain, n_intra, n_taken, n_rb);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
