// tb_addr_mapper: self-checking test of frame <-> location translation.
//
// For the predefined mask (bank = frame bits 0..2) the forward result must
// be row = frame[18:3], bank = frame[2:0] ^ frame[5:3]. For random masks the
// testbench builds the expected location from a list of bank-bit positions,
// and checks that the inverse mapper returns the original frame and that
// the forward mapping is one-to-one on a sample.
module tb_addr_mapper;
  localparam int BK = 3, RW = 16, FW = BK + RW;

  logic [FW-1:0] mask, din, loc, back;

  addr_mapper #(.BANK_W(BK), .ROW_W(RW), .PERMUTE(1'b1), .INVERSE(1'b0)) u_f (.mask(mask), .din(din), .dout(loc));
  addr_mapper #(.BANK_W(BK), .ROW_W(RW), .PERMUTE(1'b1), .INVERSE(1'b1)) u_i (.mask(mask), .din(loc), .dout(back));

  int checks = 0, failures = 0;
  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [FW-1:0] ref_fwd(logic [FW-1:0] m, logic [FW-1:0] f);
    int bpos[$], rpos[$];
    logic [BK-1:0] b;
    logic [RW-1:0] r;
    for (int i = 0; i < FW; i++) if (m[i]) bpos.push_back(i); else rpos.push_back(i);
    for (int k = 0; k < BK; k++) b[k] = f[bpos[k]];
    for (int k = 0; k < RW; k++) r[k] = f[rpos[k]];
    return {r, b ^ r[BK-1:0]};
  endfunction

  initial begin
    #1;
    mask = FW'(7);
    for (int n = 0; n < 200; n++) begin
      din = FW'($urandom);
      #1;
      chk(loc == {din[FW-1:BK], din[2:0] ^ din[5:3]}, $sformatf("predefined mapping of %h -> %h", din, loc));
      chk(back == din, "predefined inverse");
    end
    for (int n = 0; n < 2000; n++) begin
      mask = '0;
      while ($countones(mask) < BK) mask[$urandom_range(0, FW-1)] = 1'b1;
      din = FW'($urandom);
      #1;
      chk(loc == ref_fwd(mask, din), $sformatf("mask %h frame %h -> %h exp %h", mask, din, loc, ref_fwd(mask, din)));
      chk(back == din, $sformatf("inverse mask %h frame %h back %h", mask, din, back));
    end
    // one-to-one on 4096 consecutive frames under one mask
    begin
      bit seen [logic [FW-1:0]];
      int dup = 0;
      mask = FW'('b0000_0010_0000_1000_1);
      for (int n = 0; n < 4096; n++) begin
        din = FW'(n << 3);
        #1;
        if (seen.exists(loc)) dup++;
        seen[loc] = 1;
      end
      chk(dup == 0, $sformatf("%0d duplicate locations", dup));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
