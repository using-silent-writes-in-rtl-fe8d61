// tb_parity_gen: checks the interleaved parity against a byte-wise XOR.
//
// With an interleaving distance of 8, parity bit i covers bit i of every byte,
// so the parity equals the XOR of all 64 bytes. Random and hand-picked blocks
// (zero, all ones, single bits) are checked.
module tb_parity_gen;
  logic [511:0] data;
  logic [7:0]   parity;
  int checks = 0, failures = 0;

  parity_gen dut (.data, .parity);

  function automatic logic [7:0] ref_par(logic [511:0] d);
    logic [7:0] p = '0;
    for (int b = 0; b < 64; b++) p ^= d[b*8 +: 8];
    return p;
  endfunction

  task automatic check(logic [511:0] d);
    data = d;
    #1;
    checks++;
    if (parity !== ref_par(d)) begin
      failures++;
      $display("FAIL data=%h parity=%h expected=%h", d, parity, ref_par(d));
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
    check('0);
    check('1);
    for (int i = 0; i < 512; i += 37) check(512'(1) << i);
    for (int n = 0; n < 200; n++) begin
      for (int w = 0; w < 16; w++) d[w*32 +: 32] = $urandom;
      check(d);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
