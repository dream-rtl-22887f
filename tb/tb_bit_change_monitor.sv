// tb_bit_change_monitor: self-checking test of the per-bit change counters.
//
// Drives random line addresses (with idle gaps) into a monitor with a short
// window, keeps its own history and per-bit counts, and compares every
// window's snapshot with them. Also checks that win_done comes exactly once
// per WINDOW requests and one cycle after the last request of the window,
// and the five-request example of a bit changing once and one changing four
// times. A second instance counts its window in clock cycles and is checked
// against its own reference on every clock edge.
module tb_bit_change_monitor;
  localparam int NB = 26, CW = 18, WIN = 5;

  logic clk = 0, rst_n = 0;
  logic req_fire = 0;
  logic [NB-1:0] req_line = '0;
  logic win_done;
  logic [CW-1:0] win_cnt [NB];

  bit_change_monitor #(.NUM_BITS(NB), .CNT_W(CW), .WINDOW(WIN)) dut (.*);

  // Second instance with a window of WINC clock cycles.
  localparam int WINC = 7;
  logic win_done_c;
  logic [CW-1:0] win_cnt_c [NB];
  bit_change_monitor #(.NUM_BITS(NB), .CNT_W(CW), .WINDOW(WINC), .WINDOW_IN_CYCLES(1'b1)) dut_c (
    .clk, .rst_n, .req_fire, .req_line, .win_done(win_done_c), .win_cnt(win_cnt_c));
  int ref_c [NB];
  int exp_c [NB];
  logic [NB-1:0] hist_c;
  bit hv_c = 0, check_c = 0;
  int cyc_c = 0, windows_c = 0;
  // Reference for the cycle-window instance, evaluated on each rising edge.
  always @(posedge clk) if (rst_n) begin
    if (check_c) begin
      checks++;
      if (win_done_c !== 1'b1) begin failures++; $display("FAIL: cycle window pulse"); end
      for (int i = 0; i < NB; i++) begin
        checks++;
        if (win_cnt_c[i] != CW'(exp_c[i])) begin
          failures++;
          $display("FAIL: cycle window %0d bit %0d got %0d exp %0d", windows_c, i, win_cnt_c[i], exp_c[i]);
        end
      end
      windows_c++;
    end
    check_c = 0;
    if (req_fire) begin
      if (hv_c) for (int i = 0; i < NB; i++) if (hist_c[i] != req_line[i]) ref_c[i]++;
      hist_c = req_line;
      hv_c = 1;
    end
    cyc_c++;
    if (cyc_c == WINC) begin
      cyc_c = 0;
      exp_c = ref_c;
      foreach (ref_c[i]) ref_c[i] = 0;
      check_c = 1;
    end
  end

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int ref_cnt [NB];
  int exp_win [NB];
  logic [NB-1:0] hist;
  bit hv = 0;
  int nreq = 0, windows = 0;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // Count every win_done pulse.
  int pulses = 0;
  always @(posedge clk) if (rst_n && win_done) pulses++;

  task automatic send(logic [NB-1:0] a);
    @(negedge clk);
    req_fire = 1;
    req_line = a;
    if (hv) for (int i = 0; i < NB; i++) if (hist[i] != a[i]) ref_cnt[i]++;
    hist = a;
    hv = 1;
    nreq++;
    if (nreq == WIN) begin
      nreq = 0;
      exp_win = ref_cnt;
      foreach (ref_cnt[i]) ref_cnt[i] = 0;
      @(negedge clk);
      req_fire = 0;
      chk(win_done === 1'b1, "win_done one cycle after last request");
      for (int i = 0; i < NB; i++)
        chk(win_cnt[i] == CW'(exp_win[i]), $sformatf("window %0d bit %0d: got %0d exp %0d", windows, i, win_cnt[i], exp_win[i]));
      windows++;
    end else begin
      @(negedge clk);
      req_fire = 0;
      chk(win_done === 1'b0, "no win_done inside a window");
    end
  endtask

  initial begin
    foreach (ref_cnt[i]) ref_cnt[i] = 0;
    foreach (ref_c[i]) ref_c[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // Example: bit 15 changes once, bit 20 changes four times in five requests.
    send(26'h0000000);
    send(26'h0100000);
    send(26'h0008000);
    send(26'h0108000);
    send(26'h0008000);
    chk(win_cnt[15] == 1 && win_cnt[20] == 4, "five-request example");
    // Random traffic with gaps.
    for (int n = 0; n < 400; n++) begin
      logic [NB-1:0] a;
      a = NB'({$urandom, $urandom});
      if ($urandom_range(0, 3) == 0) a = hist ^ NB'(1 << $urandom_range(0, NB-1));
      send(a);
      repeat ($urandom_range(0, 2)) @(negedge clk);
    end
    repeat (3) @(negedge clk);
    chk(windows_c > 100, $sformatf("cycle windows %0d", windows_c));
    chk(windows == 81 && pulses == 81, $sformatf("window count %0d pulses %0d", windows, pulses));
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
