// mapping_estimator: turns one bit-change signature into an estimated
// address mapping (EAMS) and scores it against the mappings in use.
//
// Only the row-frame bits (line-address bits above the column field) are
// considered: the column bits stay where they are so that no migration at
// cache-line granularity is ever needed. Of the FRAME_W frame bits, the
// BANK_W bits that changed most often in the window become the bank index;
// all others become the row index. Bits that rarely change therefore address
// rows, which keeps row switches inside a bank (page conflicts) rare.
//
// A mapping is a FRAME_W-bit mask: a set bit feeds the bank index, a clear
// bit feeds the row index (see addr_mapper). The cost of a mapping is the sum
// of the counts of its row bits, i.e. how often the row index would have
// changed between consecutive requests in the window. The block returns the
// cost of the predefined mapping (base_mask), of the new candidate, and of
// the estimated mapping currently in use (act_mask).
//
// Timing: a start pulse snapshots the counts; the bits are then scanned one
// per cycle, keeping the BANK_W largest counts in a small sorted list (ties
// keep the lower bit index, so the predefined bank bits win ties). done
// pulses FRAME_W+1 cycles after start, and the outputs hold until the next
// start. A start while busy is ignored.
//
// The selection rule (most-changing non-column bits to the bank, least to
// the row) follows the paper; the cost measure, the tie rule and the serial
// scan are this design's choices.
module mapping_estimator #(
  parameter int unsigned COL_W    = dream_pkg::COL_W,
  parameter int unsigned BANK_W   = dream_pkg::BANK_W,
  parameter int unsigned ROW_W    = dream_pkg::ROW_W,
  parameter int unsigned CNT_W    = dream_pkg::CNT_W,
  parameter int unsigned NUM_BITS = COL_W + BANK_W + ROW_W,
  parameter int unsigned FRAME_W  = BANK_W + ROW_W,
  parameter int unsigned COST_W   = CNT_W + $clog2(FRAME_W + 1)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  logic [CNT_W-1:0]   cnt [NUM_BITS],
  input  logic [FRAME_W-1:0] base_mask,
  input  logic [FRAME_W-1:0] act_mask,
  output logic               busy,
  output logic               done,
  output logic [FRAME_W-1:0] cand_mask,
  output logic [COST_W-1:0]  cost_base,
  output logic [COST_W-1:0]  cost_cand,
  output logic [COST_W-1:0]  cost_act
);

  localparam int unsigned IDX_W = $clog2(FRAME_W);

  logic [CNT_W-1:0]   snap [FRAME_W];
  logic [FRAME_W-1:0] bmask, amask;
  logic [IDX_W-1:0]   idx;
  logic [CNT_W-1:0]   top_v  [BANK_W];
  logic [IDX_W-1:0]   top_i  [BANK_W];
  logic [BANK_W-1:0]  top_ok;
  logic [COST_W-1:0]  acc_base, acc_act, acc_tot;

  // Insertion of the current count into the sorted top list.
  logic [CNT_W-1:0]   n_top_v [BANK_W];
  logic [IDX_W-1:0]   n_top_i [BANK_W];
  logic [BANK_W-1:0]  n_top_ok;
  logic [CNT_W-1:0]   cur;

  assign cur = snap[idx];

  always_comb begin
    int pos;
    pos = BANK_W;
    for (int k = BANK_W - 1; k >= 0; k--)
      if (!top_ok[k] || cur > top_v[k]) pos = k;
    for (int k = 0; k < BANK_W; k++) begin
      if (k < pos) begin
        n_top_v[k]  = top_v[k];
        n_top_i[k]  = top_i[k];
        n_top_ok[k] = top_ok[k];
      end else if (k == pos) begin
        n_top_v[k]  = cur;
        n_top_i[k]  = idx;
        n_top_ok[k] = 1'b1;
      end else begin
        n_top_v[k]  = top_v[k-1];
        n_top_i[k]  = top_i[k-1];
        n_top_ok[k] = top_ok[k-1];
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      done      <= 1'b0;
      idx       <= '0;
      top_ok    <= '0;
      acc_base  <= '0;
      acc_act   <= '0;
      acc_tot   <= '0;
      cand_mask <= '0;
      cost_base <= '0;
      cost_cand <= '0;
      cost_act  <= '0;
      bmask     <= '0;
      amask     <= '0;
      for (int k = 0; k < BANK_W; k++) begin
        top_v[k] <= '0;
        top_i[k] <= '0;
      end
      for (int i = 0; i < FRAME_W; i++) snap[i] <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          for (int i = 0; i < FRAME_W; i++) snap[i] <= cnt[COL_W + i];
          bmask    <= base_mask;
          amask    <= act_mask;
          idx      <= '0;
          top_ok   <= '0;
          acc_base <= '0;
          acc_act  <= '0;
          acc_tot  <= '0;
          busy     <= 1'b1;
        end
      end else begin
        top_v  <= n_top_v;
        top_i  <= n_top_i;
        top_ok <= n_top_ok;
        acc_tot <= acc_tot + COST_W'(cur);
        if (!bmask[idx]) acc_base <= acc_base + COST_W'(cur);
        if (!amask[idx]) acc_act  <= acc_act  + COST_W'(cur);
        if (idx == IDX_W'(FRAME_W - 1)) begin
          logic [FRAME_W-1:0] m;
          logic [COST_W-1:0]  sel;
          m   = '0;
          sel = '0;
          for (int k = 0; k < BANK_W; k++) begin
            m[n_top_i[k]] = 1'b1;
            sel = sel + COST_W'(n_top_v[k]);
          end
          cand_mask <= m;
          cost_base <= acc_base + (bmask[idx] ? '0 : COST_W'(cur));
          cost_act  <= acc_act  + (amask[idx] ? '0 : COST_W'(cur));
          cost_cand <= acc_tot + COST_W'(cur) - sel;
          busy      <= 1'b0;
          done      <= 1'b1;
        end else begin
          idx <= idx + 1'b1;
        end
      end
    end
  end

endmodule
