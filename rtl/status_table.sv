// status_table: one status bit per DRAM row, used twice by the migration
// controller: as the Migration Table (MT, "this row's original content has
// moved to its estimated-mapping location") and as the Swap Table (ST,
// "the content of this row was pushed out by a swap").
//
// A single-port memory of 2**AW one-bit words with a registered read: rdata
// is the word at the address presented on the previous clock edge (the old
// value if that edge also wrote it). A write happens on the edge when we is
// high. After reset the table clears itself, one word per cycle; busy is high
// during that sweep and accesses are ignored. The default size is one bit for
// each of the 8 x 65,536 rows of the evaluated memory.
//
// The two tables and their meaning follow the paper; keeping them in the
// controller rather than in the DRAM (the paper allows both) and the clearing
// sweep are this design's choices.
module status_table #(
  parameter int unsigned AW = dream_pkg::BANK_W + dream_pkg::ROW_W
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [AW-1:0] addr,
  input  logic          we,
  input  logic          wdata,
  output logic          rdata,
  output logic          busy
);

  logic          mem [2**AW];
  logic [AW-1:0] clr_addr;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy     <= 1'b1;
      clr_addr <= '0;
    end else if (busy) begin
      clr_addr <= clr_addr + 1'b1;
      if (clr_addr == '1) busy <= 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    if (busy) begin
      mem[clr_addr] <= 1'b0;
    end else begin
      if (we) mem[addr] <= wdata;
      rdata <= mem[addr];
    end
  end

endmodule
