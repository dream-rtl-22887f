// bit_change_monitor: per-address-bit change counters (the access-pattern
// "signature" of the running workload).
//
// Every accepted request's line address is XORed bit by bit with the line
// address of the previous request, held in a history register. Each bit that
// differs increments that bit's counter. After WINDOW requests the counters
// are copied into win_cnt, win_done pulses for one cycle, and counting starts
// again from zero with the next request. Bits that change most often are the
// ones with the highest entropy in the current access stream.
//
// With WINDOW_IN_CYCLES = 1 the window is WINDOW clock cycles instead of
// WINDOW requests; the counting is the same.
//
// Interface and timing: req_fire/req_line are sampled on the rising clock
// edge. The request that completes a window is included in that window; its
// counts appear on win_cnt in the cycle after it, together with win_done.
// win_cnt holds its value until the next window ends. The very first request
// after reset has no predecessor and changes no counter (it still counts
// towards the window length).
//
// The counter-per-bit, history register and XOR array follow the paper, as
// do the defaults (18-bit counters, 250K-request window). The paper allows
// either kind of window; requests are the default here. Saturating counters
// are this design's choice.
module bit_change_monitor #(
  parameter int unsigned NUM_BITS = dream_pkg::COL_W + dream_pkg::BANK_W + dream_pkg::ROW_W,
  parameter int unsigned CNT_W    = dream_pkg::CNT_W,
  parameter int unsigned WINDOW   = dream_pkg::WINDOW,
  parameter bit          WINDOW_IN_CYCLES = 1'b0
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                req_fire,
  input  logic [NUM_BITS-1:0] req_line,
  output logic                win_done,
  output logic [CNT_W-1:0]    win_cnt [NUM_BITS]
);

  localparam int unsigned WIN_W = $clog2(WINDOW + 1);

  logic [NUM_BITS-1:0] hist;
  logic                hist_valid;
  logic [CNT_W-1:0]    cnt [NUM_BITS];
  logic [WIN_W-1:0]    nreq;
  logic [NUM_BITS-1:0] changed;
  logic                last;

  assign changed = hist_valid ? (hist ^ req_line) : '0;
  assign last    = (nreq == WIN_W'(WINDOW - 1));
  logic  tick;
  assign tick    = WINDOW_IN_CYCLES ? 1'b1 : req_fire;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      hist       <= '0;
      hist_valid <= 1'b0;
      nreq       <= '0;
      win_done   <= 1'b0;
      for (int i = 0; i < NUM_BITS; i++) begin
        cnt[i]     <= '0;
        win_cnt[i] <= '0;
      end
    end else begin
      win_done <= 1'b0;
      if (req_fire) begin
        hist       <= req_line;
        hist_valid <= 1'b1;
      end
      if (tick) begin
        for (int i = 0; i < NUM_BITS; i++) begin
          logic [CNT_W-1:0] nxt;
          nxt = (req_fire && changed[i] && (cnt[i] != '1)) ? cnt[i] + 1'b1 : cnt[i];
          if (last) begin
            win_cnt[i] <= nxt;
            cnt[i]     <= '0;
          end else begin
            cnt[i]     <= nxt;
          end
        end
        if (last) begin
          nreq     <= '0;
          win_done <= 1'b1;
        end else begin
          nreq <= nreq + 1'b1;
        end
      end
    end
  end

endmodule
