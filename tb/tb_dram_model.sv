// tb_dram_model: behavioural model of the DRAM side of the design, for
// testbenches only. Not synthesizable logic of the design.
//
// Instead of row data it keeps, for every location {row, bank}, the tag of
// the row frame currently stored there; that is enough to check that every
// access lands on the right data. It executes the in-DRAM relocation
// commands of migration_sequencer: DC_ACT_AB latches the two rows into row
// buffers, DC_RD_A_WR_B / DC_RD_B_WR_A beats are counted (and must arrive in
// order 0..BEATS-1), and DC_CONNECT writes a row buffer into the other
// location only when a complete row (BEATS beats) has been transferred.
// Any malformed sequence, or a transfer inside one bank, counts in errors.
// Commands are ignored while rst_n is low.
module tb_dram_model #(
  parameter int unsigned BANK_W  = 3,
  parameter int unsigned ROW_W   = 16,
  parameter int unsigned BEATS   = 64,
  parameter int unsigned FRAME_W = BANK_W + ROW_W
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  dream_pkg::dcmd_t         dcmd,
  input  logic [FRAME_W-1:0]       dcmd_a,
  input  logic [FRAME_W-1:0]       dcmd_b,
  input  logic [$clog2(BEATS)-1:0] dcmd_beat
);
  import dream_pkg::*;

  logic [FRAME_W-1:0] tag [2**FRAME_W];
  logic [FRAME_W-1:0] buf_a, buf_b;
  int   beats_ab = 0, beats_ba = 0;
  int   errors = 0, relocations = 0, swaps = 0, transfer_cycles = 0;

  // Forward predefined-style mapping: set mask bits feed the bank index
  // (ascending), the others the row index, then bank ^= low row bits.
  function automatic logic [FRAME_W-1:0] map_fwd(logic [FRAME_W-1:0] m, logic [FRAME_W-1:0] f);
    logic [BANK_W-1:0] b;
    logic [ROW_W-1:0]  r;
    int bi = 0, ri = 0;
    b = '0; r = '0;
    for (int i = 0; i < FRAME_W; i++)
      if (m[i]) begin b[bi] = f[i]; bi++; end else begin r[ri] = f[i]; ri++; end
    return {r, b ^ r[BANK_W-1:0]};
  endfunction

  // Store every frame at its location under mapping m.
  task automatic load(logic [FRAME_W-1:0] m);
    for (longint f = 0; f < 2**FRAME_W; f++) tag[map_fwd(m, FRAME_W'(f))] = FRAME_W'(f);
  endtask

  // Number of frames not at their location under mapping m.
  function automatic int misplaced(logic [FRAME_W-1:0] m);
    int n = 0;
    for (longint f = 0; f < 2**FRAME_W; f++) if (tag[map_fwd(m, FRAME_W'(f))] != FRAME_W'(f)) n++;
    return n;
  endfunction

  always @(posedge clk) if (rst_n) begin
    unique case (dcmd)
      DC_ACT_AB: begin
        buf_a <= tag[dcmd_a];
        buf_b <= tag[dcmd_b];
        beats_ab <= 0;
        beats_ba <= 0;
        if (dcmd_a[BANK_W-1:0] == dcmd_b[BANK_W-1:0]) errors <= errors + 1;
      end
      DC_RD_A_WR_B: begin
        if (int'(dcmd_beat) != beats_ab) errors <= errors + 1;
        beats_ab <= beats_ab + 1;
        transfer_cycles <= transfer_cycles + 1;
      end
      DC_RD_B_WR_A: begin
        if (int'(dcmd_beat) != beats_ba || beats_ab != BEATS) errors <= errors + 1;
        beats_ba <= beats_ba + 1;
        transfer_cycles <= transfer_cycles + 1;
      end
      DC_CONNECT: begin
        if (beats_ab == BEATS) tag[dcmd_b] <= buf_a; else errors <= errors + 1;
        if (beats_ba == BEATS) begin
          tag[dcmd_a] <= buf_b;
          swaps <= swaps + 1;
        end else if (beats_ba != 0) errors <= errors + 1;
        relocations <= relocations + 1;
      end
      default: ;
    endcase
  end
endmodule
