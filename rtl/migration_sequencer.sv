// migration_sequencer: drives one inter-bank row relocation inside the DRAM.
//
// The DRAM is assumed to support several activated subarrays per bank and a
// global row buffer per bank, connected by the internal 64-bit I/O bus. A
// relocation of location A (bank A) to location B (bank B), with the content
// of B moved to A when mig_swap is set, is issued as:
//   1 cycle   DC_ACT_AB      activate both rows into their local row buffers
//   BEATS     DC_RD_A_WR_B   bank A reads, bank B writes: A's row, one 64-bit
//                            beat per cycle, into B's global row buffer
//   BEATS     DC_RD_B_WR_A   (swap only) B's row into A's global row buffer
//   1 cycle   DC_CONNECT     each global row buffer is connected to its row
// dcmd_beat numbers the beats of a transfer from 0 to BEATS-1. With the
// default 64 beats a swap occupies 130 cycles, a one-way move 66.
//
// Handshake: a command is accepted when mig_valid and mig_ready are both
// high; mig_ready is high only when idle. mig_done pulses for one cycle after
// the DC_CONNECT cycle. The sequencer never stalls once started.
//
// The six steps and the 64-beat transfers follow the paper. The command set,
// its encoding and the one-cycle activate and connect steps are this
// design's own.
module migration_sequencer #(
  parameter int unsigned BANK_W  = dream_pkg::BANK_W,
  parameter int unsigned FRAME_W = BANK_W + dream_pkg::ROW_W,
  parameter int unsigned BEATS   = dream_pkg::ROW_BEATS
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  mig_valid,
  output logic                  mig_ready,
  input  logic [FRAME_W-1:0]    mig_src,
  input  logic [FRAME_W-1:0]    mig_dst,
  input  logic                  mig_swap,
  output logic                  mig_done,
  output dream_pkg::dcmd_t      dcmd,
  output logic [FRAME_W-1:0]    dcmd_a,
  output logic [FRAME_W-1:0]    dcmd_b,
  output logic [$clog2(BEATS)-1:0] dcmd_beat
);
  import dream_pkg::*;

  localparam int unsigned BW = $clog2(BEATS);

  typedef enum logic [2:0] {S_IDLE, S_ACT, S_AB, S_BA, S_CONN} seq_t;

  seq_t            st;
  logic            swap;
  logic [BW-1:0]   beat;

  assign mig_ready = (st == S_IDLE);
  assign dcmd_beat = beat;

  always_comb begin
    unique case (st)
      S_ACT:   dcmd = DC_ACT_AB;
      S_AB:    dcmd = DC_RD_A_WR_B;
      S_BA:    dcmd = DC_RD_B_WR_A;
      S_CONN:  dcmd = DC_CONNECT;
      default: dcmd = DC_NOP;
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st       <= S_IDLE;
      swap     <= 1'b0;
      beat     <= '0;
      dcmd_a   <= '0;
      dcmd_b   <= '0;
      mig_done <= 1'b0;
    end else begin
      mig_done <= 1'b0;
      unique case (st)
        S_IDLE: if (mig_valid) begin
          dcmd_a <= mig_src;
          dcmd_b <= mig_dst;
          swap   <= mig_swap;
          beat   <= '0;
          st     <= S_ACT;
        end
        S_ACT: st <= S_AB;
        S_AB: begin
          beat <= beat + 1'b1;
          if (beat == BW'(BEATS - 1)) begin
            beat <= '0;
            st   <= swap ? S_BA : S_CONN;
          end
        end
        S_BA: begin
          beat <= beat + 1'b1;
          if (beat == BW'(BEATS - 1)) begin
            beat <= '0;
            st   <= S_CONN;
          end
        end
        S_CONN: begin
          st       <= S_IDLE;
          mig_done <= 1'b1;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  // Source and destination must lie in different banks (inter-bank only).
  a_interbank: assert property (@(posedge clk) disable iff (!rst_n)
    (mig_valid && mig_ready) |-> (mig_src[BANK_W-1:0] != mig_dst[BANK_W-1:0]));

endmodule
