// addr_mapper: translation between a row frame and a DRAM location.
//
// A row frame is the FRAME_W = BANK_W + ROW_W line-address bits above the
// column field. A mapping is given as a FRAME_W-bit mask with BANK_W bits
// set. Forward direction (INVERSE = 0): the frame bits at the set mask
// positions, in ascending order, form the raw bank index; the remaining bits,
// in ascending order, form the row index. With PERMUTE = 1 the bank index is
// then XORed with the lowest BANK_W row bits (permutation-based page
// interleaving), so that rows that would collide in one bank are spread over
// the banks. The output location is {row, bank}, bank in the low bits.
//
// Inverse direction (INVERSE = 1): takes a location and returns the frame
// stored there under the same mapping. The XOR is undone first (it is its own
// inverse because the row bits are unchanged) and the bits are scattered back
// to their mask positions.
//
// The mask 0...0111 gives the predefined mapping: Row | Bank | Column |
// Offset, with the bank bits straight above the column, plus the XOR.
// Purely combinational.
//
// The field order and the XOR of row bits into the bank follow the paper's
// predefined mappings; which row bits are XORed (the lowest ones) and the
// ascending bit order inside each field are this design's choices.
module addr_mapper #(
  parameter int unsigned BANK_W  = dream_pkg::BANK_W,
  parameter int unsigned ROW_W   = dream_pkg::ROW_W,
  parameter int unsigned FRAME_W = BANK_W + ROW_W,
  parameter bit          PERMUTE = 1'b1,
  parameter bit          INVERSE = 1'b0
) (
  input  logic [FRAME_W-1:0] mask,
  input  logic [FRAME_W-1:0] din,
  output logic [FRAME_W-1:0] dout
);

  if (!INVERSE) begin : g_fwd
    always_comb begin
      logic [BANK_W-1:0] bank;
      logic [ROW_W-1:0]  row;
      int unsigned bi, ri;
      bank = '0;
      row  = '0;
      bi   = 0;
      ri   = 0;
      for (int unsigned i = 0; i < FRAME_W; i++) begin
        if (mask[i]) begin
          if (bi < BANK_W) bank[bi] = din[i];
          bi++;
        end else begin
          if (ri < ROW_W) row[ri] = din[i];
          ri++;
        end
      end
      if (PERMUTE) bank = bank ^ row[BANK_W-1:0];
      dout = {row, bank};
    end
  end else begin : g_inv
    always_comb begin
      logic [BANK_W-1:0] bank;
      logic [ROW_W-1:0]  row;
      int unsigned bi, ri;
      row  = din[FRAME_W-1:BANK_W];
      bank = din[BANK_W-1:0];
      if (PERMUTE) bank = bank ^ row[BANK_W-1:0];
      dout = '0;
      bi   = 0;
      ri   = 0;
      for (int unsigned i = 0; i < FRAME_W; i++) begin
        if (mask[i]) begin
          if (bi < BANK_W) dout[i] = bank[bi];
          bi++;
        end else begin
          if (ri < ROW_W) dout[i] = row[ri];
          ri++;
        end
      end
    end
  end

endmodule
