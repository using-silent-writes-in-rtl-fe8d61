// tb_tcc_pkg: checks the package's sizes, address split, ECC-line mapping and
// codes against values worked out by hand.
//
// ECC mapping examples: line (set 0, way 0) -> 0xF000_0000; (set 7, way 0)
// shares that line as word 7; (set 8, way 0) -> line 8 at 0xF000_0200;
// (set 2047, way 7) -> line 255*8+7 = 2047 at 0xF001_FFC0.
module tb_tcc_pkg;
  import tcc_pkg::*;
  int checks = 0, failures = 0;

  task automatic chk(logic ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0]  d;
    logic [7:0]   c;
    secded_res_t  r;
    block_t       blk;
    chk(L2_SETS == 2048, "L2_SETS");
    chk(L1_LINES == 1024, "L1_LINES");
    chk(TAG_W == 15, "TAG_W");
    chk(ECC_W == 64, "ECC_W");
    chk(addr_set(32'h0001_2340) == 11'h48D, "addr_set");
    chk(addr_tag(32'h8001_2340) == 15'h4000, "addr_tag");
    chk(make_addr(15'h4000, 11'h48D) == 32'h8001_2340, "make_addr");
    chk(ecc_line_addr(11'd0, 3'd0)    == 32'hF000_0000, "ecc (0,0)");
    chk(ecc_line_addr(11'd7, 3'd0)    == 32'hF000_0000, "ecc (7,0)");
    chk(ecc_line_addr(11'd3, 3'd5)    == 32'hF000_0140, "ecc (3,5)");
    chk(ecc_line_addr(11'd8, 3'd0)    == 32'hF000_0200, "ecc (8,0)");
    chk(ecc_line_addr(11'd2047, 3'd7) == 32'hF001_FFC0, "ecc (2047,7)");
    chk(block_parity('0) == 8'h00, "parity 0");
    chk(block_parity(512'h1) == 8'h01, "parity bit0");
    chk(block_parity(512'h101) == 8'h00, "parity bits 0,8");
    chk(block_parity(512'h8000) == 8'h80, "parity bit15");
    // data bit 0 sits at codeword position 3 -> check bits c0,c1 and parity
    chk(secded_check(64'h1) == 8'h83, "check of bit0");
    // data bit 1 at position 5 -> c0,c2
    chk(secded_check(64'h2) == 8'h85, "check of bit1");
    chk(secded_check('0) == 8'h00, "check of 0");
    blk = '0;
    blk = ecc_merge(blk, 3'd2, 64'hDEAD_BEEF_0123_4567);
    chk(blk[191:128] == 64'hDEAD_BEEF_0123_4567 && blk[127:0] == '0 && blk[511:192] == '0, "ecc_merge");
    for (int n = 0; n < 100; n++) begin
      d = {$urandom, $urandom};
      c = secded_check(d);
      r = secded_decode(d, c);
      chk(r.data == d && !r.fixed && !r.fatal, "clean decode");
      r = secded_decode(d ^ (64'h1 << (n % 64)), c);
      chk(r.data == d && r.fixed && !r.fatal, "single fix");
      r = secded_decode(d ^ (64'h3 << (n % 63)), c);
      chk(r.fatal, "double detect");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
