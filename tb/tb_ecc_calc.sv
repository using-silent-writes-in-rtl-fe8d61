// tb_ecc_calc: checks the block-ECC against an independent formulation.
//
// Reference: for each 64-bit word the seven Hamming check bits equal the XOR
// of the codeword positions (3, 5, 6, 7, 9, ..., 71: the positions that are not
// powers of two, in order) of the data bits that are 1; the eighth bit makes
// the parity of data plus check bits even. Check byte w belongs to word w.
module tb_ecc_calc;
  logic [511:0] data;
  logic [63:0]  ecc;
  int checks = 0, failures = 0;
  int pos_of [64];

  ecc_calc dut (.data, .ecc);

  function automatic logic [7:0] ref_chk(logic [63:0] d);
    logic [6:0] c = '0;
    for (int k = 0; k < 64; k++) if (d[k]) c ^= 7'(pos_of[k]);
    return {^d ^ ^c, c};
  endfunction

  task automatic check(logic [511:0] d);
    logic [63:0] e;
    data = d;
    #1;
    for (int w = 0; w < 8; w++) e[w*8 +: 8] = ref_chk(d[w*64 +: 64]);
    checks++;
    if (ecc !== e) begin
      failures++;
      $display("FAIL data=%h ecc=%h expected=%h", d, ecc, e);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [511:0] d;
    int k = 0;
    for (int p = 1; p < 72; p++) if ((p & (p - 1)) != 0) pos_of[k++] = p;
    check('0);
    check('1);
    for (int i = 0; i < 512; i += 13) check(512'(1) << i);
    for (int n = 0; n < 200; n++) begin
      for (int w = 0; w < 16; w++) d[w*32 +: 32] = $urandom;
      check(d);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
