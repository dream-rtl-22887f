// dream_pkg: constants and types shared by the DReAM address-mapping unit.
//
// The memory geometry is the evaluated system: a 4 GB single-channel,
// single-rank DRAM with 8 banks of 65,536 rows and 64-byte cache lines.
// A physical byte address is split, from the most significant end, into
// Row | Bank | Column | Block offset (rank and channel fields are empty in a
// one-rank, one-channel system). The 7-bit column width is not stated as
// such; it is what is left of 32 address bits after the other fields.
//
// The "row frame" used throughout this design is the part of the line
// address above the column bits: exactly the bits that the estimated mapping
// may rearrange (column bits are never moved). A "location" is the
// {row, bank} pair a frame is stored at; both are FRAME_W bits wide.
//
// In-DRAM migration moves a 4 Kbit row over a 64-bit internal bus, so one
// direction of a row transfer takes 64 beats.
package dream_pkg;

  localparam int unsigned ROW_W       = 16;   // 65,536 rows per bank
  localparam int unsigned BANK_W      = 3;    // 8 banks per rank
  localparam int unsigned COL_W       = 7;    // 128 cache lines per row
  localparam int unsigned OFFSET_W    = 6;    // 64-byte cache line
  localparam int unsigned ADDR_W      = OFFSET_W + COL_W + BANK_W + ROW_W; // 32
  localparam int unsigned ROWBUF_BITS = 4096; // row buffer per device
  localparam int unsigned IO_W        = 64;   // internal narrow I/O bus
  localparam int unsigned ROW_BEATS   = ROWBUF_BITS / IO_W; // 64

  // Monitoring defaults.
  localparam int unsigned CNT_W       = 18;      // per-bit change counter
  localparam int unsigned WINDOW      = 250000;  // requests per time window

  // In-DRAM migration commands issued by the migration sequencer.
  //   DC_ACT_AB   : activate the source row (bank A) and destination row (bank B)
  //   DC_RD_A_WR_B: bank A read mode, bank B write mode, one 64-bit beat A -> B
  //   DC_RD_B_WR_A: bank B read mode, bank A write mode, one 64-bit beat B -> A
  //   DC_CONNECT  : connect each global row buffer to its new row (write back)
  typedef enum logic [2:0] {
    DC_NOP       = 3'd0,
    DC_ACT_AB    = 3'd1,
    DC_RD_A_WR_B = 3'd2,
    DC_RD_B_WR_A = 3'd3,
    DC_CONNECT   = 3'd4
  } dcmd_t;

  // State of the online mapping controller.
  typedef enum logic [1:0] {
    MS_BASE     = 2'd0,   // predefined mapping (PAMS) only
    MS_DREAM    = 2'd1,   // estimated mapping (EAMS) in use, rows migrate on demand
    MS_ROLLBACK = 2'd2    // returning migrated rows to their PAMS locations
  } map_state_t;

endpackage
