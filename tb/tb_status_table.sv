// tb_status_table: self-checking test of the one-bit-per-row status memory.
//
// Checks that the table clears itself after reset (busy for 2**AW cycles,
// then every word reads 0), that reads return the addressed word one cycle
// later, and random writes/reads against a reference array.
module tb_status_table;
  localparam int AW = 8;

  logic clk = 0, rst_n = 0;
  logic [AW-1:0] addr = '0;
  logic we = 0, wdata = 0;
  logic rdata, busy;

  status_table #(.AW(AW)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  bit model [2**AW];
  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    int busy_cycles = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    while (busy) begin @(negedge clk); busy_cycles++; end
    chk(busy_cycles == 2**AW, $sformatf("clear took %0d cycles", busy_cycles));
    for (int a = 0; a < 2**AW; a++) begin
      addr = AW'(a);
      @(negedge clk);
      chk(rdata == 1'b0, $sformatf("cleared word %0d", a));
      model[a] = 0;
    end
    for (int n = 0; n < 3000; n++) begin
      logic [AW-1:0] ra;
      ra = AW'($urandom);
      addr = ra;
      we = $urandom_range(0, 1);
      wdata = $urandom_range(0, 1);
      @(negedge clk);
      chk(rdata == model[ra], $sformatf("read %0d", ra));
      if (we) model[ra] = wdata;
      we = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
