// tb_addr_map: self-checking test of the address mapping, at the default
// 32 DIMMs and at the 16 ranks of the paper's mapping figure. The expected
// fields are computed with division and modulo on the address instead of
// bit slices; consecutive 64-byte blocks must walk through all ranks.
module tb_addr_map;
  import tdimm_pkg::*;
  int checks = 0, failures = 0;

  logic [FIELD_W+BYTE_OFF_BITS-1:0] a32, a16;
  logic [4:0] rank32; logic [3:0] rank16;
  logic [BANK_BITS-1:0] bank32, bank16;
  logic [ROW_BITS-1:0]  row32, row16;
  logic [COL_BITS-1:0]  col32, col16;
  logic [LOCAL_BLK_BITS-1:0] lb32, lb16;

  addr_map #(.RANK_BITS(5)) m32 (.byte_addr(a32), .rank(rank32), .bank(bank32),
    .row(row32), .col(col32), .local_blk(lb32));
  addr_map #(.RANK_BITS(4)) m16 (.byte_addr(a16), .rank(rank16), .bank(bank16),
    .row(row16), .col(col16), .local_blk(lb16));

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic expect_fields(longint unsigned a, int unsigned nr,
      logic [31:0] rank, logic [BANK_BITS-1:0] bank, logic [ROW_BITS-1:0] row,
      logic [COL_BITS-1:0] col, logic [LOCAL_BLK_BITS-1:0] lb);
    longint unsigned blk, lblk;
    blk  = a / 64;
    lblk = blk / nr;
    check(rank == 32'(blk % nr), $sformatf("rank nr=%0d a=%h", nr, a));
    check(bank == BANK_BITS'(lblk % 16), $sformatf("bank nr=%0d a=%h", nr, a));
    check(col == COL_BITS'(((lblk / 16) % 64) * 8 + (a % 64) / 8), $sformatf("col nr=%0d a=%h", nr, a));
    check(row == ROW_BITS'((lblk / 1024) % (1 << ROW_BITS)), $sformatf("row nr=%0d a=%h", nr, a));
    check(lb == LOCAL_BLK_BITS'(lblk), $sformatf("local block nr=%0d", nr));
  endtask

  initial begin
    // the 16-rank case as drawn: bits 9..6 rank, 13..10 bank, 19..14 column
    a16 = 46'h0_0000_03C0; #1;
    check(rank16 == 4'hF && bank16 == 0 && col16 == 0, "bits 9..6 are the rank");
    a16 = 46'h0_0000_3C00; #1;
    check(rank16 == 0 && bank16 == 4'hF, "bits 13..10 are the bank");
    a16 = 46'h0_000F_C000; #1;
    check(col16 == 9'h1F8 && row16 == 0, "bits 19..14 are the high column");
    a16 = 46'h0_0010_0000; #1;
    check(row16 == 1, "bit 20 is the row LSB");
    for (int i = 0; i < 2000; i++) begin
      longint unsigned a;
      a = {$urandom, $urandom} & ((64'd1 << 42) - 1);
      a32 = 46'(a); a16 = 46'(a); #1;
      expect_fields(a, 32, 32'(rank32), bank32, row32, col32, lb32);
      if (a < (64'd1 << 41)) expect_fields(a, 16, 32'(rank16), bank16, row16, col16, lb16);
    end
    // consecutive blocks of one 2 KB embedding cover all 32 DIMMs once
    begin
      bit [31:0] seen;
      seen = '0;
      for (int k = 0; k < 32; k++) begin
        a32 = 46'(64'h12345 * 2048 + k * 64); #1;
        seen[rank32] = 1'b1;
        check(lb32 == LOCAL_BLK_BITS'(64'h12345), "one local block per embedding");
      end
      check(&seen, "embedding spread over all 32 DIMMs");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
