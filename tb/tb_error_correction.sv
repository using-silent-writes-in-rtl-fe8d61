// tb_error_correction: injects 0, 1 or 2 bit errors into blocks protected by
// their block-ECC and checks the correction.
//
// The block-ECC is computed here with its own reference (positions of the
// Hamming code, see tb_ecc_calc). Errors go into data or check bits of random
// words. Expected: no error and single errors give back the original block
// with n_fixed = number of words hit; a double error in one word raises
// uncorrectable.
module tb_error_correction;
  logic [511:0] data, corrected;
  logic [63:0]  ecc;
  logic [3:0]   n_fixed;
  logic         uncorrectable;
  int checks = 0, failures = 0;
  int pos_of [64];

  error_correction dut (.data, .ecc, .corrected, .n_fixed, .uncorrectable);

  function automatic logic [7:0] ref_chk(logic [63:0] d);
    logic [6:0] c = '0;
    for (int k = 0; k < 64; k++) if (d[k]) c ^= 7'(pos_of[k]);
    return {^d ^ ^c, c};
  endfunction

  function automatic logic [511:0] rnd_block();
    logic [511:0] d;
    for (int w = 0; w < 16; w++) d[w*32 +: 32] = $urandom;
    return d;
  endfunction

  task automatic expect_ok(logic [511:0] orig, int nf, logic unc);
    #1;
    checks++;
    if (uncorrectable !== unc || (!unc && (corrected !== orig || int'(n_fixed) != nf))) begin
      failures++;
      $display("FAIL nf=%0d/%0d unc=%0b/%0b corrected_ok=%0b", n_fixed, nf, uncorrectable, unc,
               corrected === orig);
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
    logic [63:0]  e;
    int k = 0;
    for (int p = 1; p < 72; p++) if ((p & (p - 1)) != 0) pos_of[k++] = p;
    for (int n = 0; n < 300; n++) begin
      d = rnd_block();
      for (int w = 0; w < 8; w++) e[w*8 +: 8] = ref_chk(d[w*64 +: 64]);
      case (n % 5)
        0: begin data = d; ecc = e; expect_ok(d, 0, 1'b0); end
        1: begin // one data bit
          data = d; data[$urandom_range(511)] ^= 1'b1; ecc = e; expect_ok(d, 1, 1'b0);
        end
        2: begin // one check bit
          data = d; ecc = e; ecc[$urandom_range(63)] ^= 1'b1; expect_ok(d, 1, 1'b0);
        end
        3: begin // single errors in two different words
          int w1, w2;
          w1 = $urandom_range(7);
          w2 = (w1 + 1 + $urandom_range(6)) % 8;
          data = d;
          data[w1*64 + $urandom_range(63)] ^= 1'b1;
          data[w2*64 + $urandom_range(63)] ^= 1'b1;
          ecc = e; expect_ok(d, 2, 1'b0);
        end
        default: begin // two bits of one word
          int w, b1, b2;
          w  = $urandom_range(7);
          b1 = $urandom_range(63);
          b2 = (b1 + 1 + $urandom_range(62)) % 64;
          data = d; data[w*64 + b1] ^= 1'b1; data[w*64 + b2] ^= 1'b1;
          ecc = e; expect_ok(d, 0, 1'b1);
        end
      endcase
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
