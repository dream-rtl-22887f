// tb_mapping_estimator: self-checking test of the mapping estimate.
//
// Applies random and tie-heavy bit-change signatures, computes in the
// testbench the three most-changing frame bits (lower index first on ties)
// and the row-bit costs of the predefined, candidate and active masks, and
// compares them with the block. Also checks the FRAME_W+1-cycle latency,
// and a "libquantum-like" signature where one row bit (line bit 14) changes
// far more often than the rest and must move into the bank field.
module tb_mapping_estimator;
  localparam int COL = 7, BK = 3, RW = 16, CW = 18;
  localparam int NB = COL + BK + RW, FW = BK + RW, COSTW = CW + 5;

  logic clk = 0, rst_n = 0, start = 0;
  logic [CW-1:0] cnt [NB];
  logic [FW-1:0] base_mask = FW'(7), act_mask = '0;
  logic busy, done;
  logic [FW-1:0] cand_mask;
  logic [COSTW-1:0] cost_base, cost_cand, cost_act;

  mapping_estimator #(.COL_W(COL), .BANK_W(BK), .ROW_W(RW), .CNT_W(CW)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic longint cost(logic [FW-1:0] m);
    longint s = 0;
    for (int i = 0; i < FW; i++) if (!m[i]) s += cnt[COL + i];
    return s;
  endfunction

  function automatic logic [FW-1:0] ref_mask();
    logic [FW-1:0] m = '0;
    for (int k = 0; k < BK; k++) begin
      int best = -1;
      for (int i = 0; i < FW; i++)
        if (!m[i] && (best < 0 || cnt[COL + i] > cnt[COL + best])) best = i;
      m[best] = 1'b1;
    end
    return m;
  endfunction

  task automatic run_one(string tag);
    logic [FW-1:0] em;
    int lat = 0;
    em = ref_mask();
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    lat = 1;
    while (!done) begin @(negedge clk); lat++; end
    chk(lat == FW + 1, $sformatf("%s latency %0d", tag, lat));
    chk(cand_mask == em, $sformatf("%s mask %h exp %h", tag, cand_mask, em));
    chk(cost_base == COSTW'(cost(base_mask)), $sformatf("%s cost_base", tag));
    chk(cost_cand == COSTW'(cost(em)), $sformatf("%s cost_cand %0d exp %0d", tag, cost_cand, cost(em)));
    chk(cost_act == COSTW'(cost(act_mask)), $sformatf("%s cost_act", tag));
  endtask

  initial begin
    foreach (cnt[i]) cnt[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // All zero: ties everywhere, predefined bank bits keep the bank.
    run_one("zero");
    chk(cand_mask == FW'(7), "all-zero signature keeps predefined mapping");
    // libquantum-like: line bit 14 (frame bit 7) changes most among frame bits.
    foreach (cnt[i]) cnt[i] = (i < COL) ? CW'(200000 >> i) : CW'(1000);
    cnt[14] = CW'(90000);
    cnt[7]  = CW'(5000);
    cnt[8]  = CW'(4000);
    act_mask = FW'(7);
    run_one("libq");
    chk(cand_mask[7] == 1'b1, "hot row bit moves to bank");
    // Random signatures, some with many ties.
    for (int n = 0; n < 200; n++) begin
      foreach (cnt[i]) cnt[i] = (n % 3 == 0) ? CW'($urandom_range(0, 3)) : CW'($urandom_range(0, 250000));
      act_mask = '0;
      for (int k = 0; k < BK; k++) act_mask[$urandom_range(0, FW-1)] = 1'b1;
      run_one($sformatf("rand%0d", n));
    end
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
