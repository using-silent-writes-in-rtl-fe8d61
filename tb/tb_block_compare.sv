// tb_block_compare: equal blocks and blocks differing in one word.
//
// Checks the result and the latency: an equal result after 8 cycles (one per
// 64-bit word), an unequal one k+1 cycles after start when word k is the first
// that differs.
module tb_block_compare;
  logic clk = 0, rst_n = 0, start = 0, done, equal;
  logic [511:0] a, b;
  int checks = 0, failures = 0;

  block_compare dut (.clk, .rst_n, .start, .a, .b, .done, .equal);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int first_diff);   // -1: equal
    int cyc = 0;
    for (int w = 0; w < 16; w++) a[w*32 +: 32] = $urandom;
    b = a;
    if (first_diff >= 0) begin
      b[first_diff*64 + $urandom_range(63)] ^= 1'b1;
      for (int w = first_diff + 1; w < 8; w++) if ($urandom_range(1)) b[w*64] ^= 1'b1;
    end
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    cyc = 0;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (equal !== (first_diff < 0) || cyc != (first_diff < 0 ? 8 : first_diff + 1)) begin
      failures++;
      $display("FAIL diff=%0d equal=%0b cycles=%0d", first_diff, equal, cyc);
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 60; n++) run(n % 3 == 0 ? -1 : int'($urandom_range(7)));
    for (int k = 0; k < 8; k++) run(k);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
