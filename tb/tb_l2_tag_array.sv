// tb_l2_tag_array: checks the reset sweep, set-entry storage and the grouped
// dirty bits.
//
// After reset ready must rise after 2048 cycles and every set read must be
// cleared (valid = 0, ages = way numbers, dirty = 0). Then random entries and
// dirty groups are written and read back against a model; sets 8k..8k+7 share
// one dirty group, so a write to one set is seen by reads of its neighbours.
module tb_l2_tag_array;
  import tcc_pkg::*;
  logic clk = 0, rst_n = 0, ready, rd = 0, wr = 0;
  logic [10:0] rset, wset;
  tag_entry_t  rent, went;
  logic [63:0] rdirty, wdirty;
  tag_entry_t  m_ent [2048];
  logic [63:0] m_dirty [256];
  int checks = 0, failures = 0;

  l2_tag_array dut (.clk, .rst_n, .ready, .rd, .rset, .rent, .rdirty, .wr, .wset, .went, .wdirty);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic read_check(logic [10:0] s);
    @(negedge clk) rd = 1; rset = s;
    @(negedge clk) rd = 0;
    checks++;
    if (rent !== m_ent[s] || rdirty !== m_dirty[s >> 3]) begin
      failures++;
      $display("FAIL set %0d", s);
    end
  endtask

  initial begin
    int cyc = 0;
    tag_entry_t clr;
    clr = '0;
    for (int w = 0; w < 8; w++) clr.age[w] = 3'(w);
    for (int s = 0; s < 2048; s++) m_ent[s] = clr;
    for (int g = 0; g < 256; g++) m_dirty[g] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    while (!ready) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc < 2047 || cyc > 2049) begin
      failures++;
      $display("FAIL init took %0d cycles", cyc);
    end
    for (int n = 0; n < 64; n++) read_check(11'($urandom));
    read_check(11'd0);
    read_check(11'd2047);
    for (int n = 0; n < 2000; n++) begin
      if ($urandom_range(1)) begin
        @(negedge clk);
        wr = 1; wset = 11'($urandom_range(63));
        for (int k = 0; k < ($bits(went) + 31) / 32; k++) went[k*32 +: 32] = $urandom;
        wdirty = {$urandom, $urandom};
        m_ent[wset] = went;
        m_dirty[wset >> 3] = wdirty;
        @(negedge clk) wr = 0;
      end else begin
        read_check(11'($urandom_range(63)));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
