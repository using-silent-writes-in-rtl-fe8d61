// tb_tcc_silent_traffic: write-back traffic with a given share of silent
// writes, run through the full-size TCC L2 cache, to measure the L2 accesses
// that silent-write detection saves.
//
// The L1 side repeatedly fills a line and writes it back. With probability
// SILENT_PCT percent the block comes back unchanged, otherwise some of its
// words are changed. SILENT_PCT defaults to 37, the average share of silent L2
// writes over the SPEC2000 programs the design was evaluated on; the address
// stream itself is synthetic (32 sets x 12 tags, more lines than the ways of
// those sets, so lines and ECC lines are also evicted). Line numbers for the
// signature cache are taken from the first 512 entries only, the size a 32 KB
// L1 needs.
//
// Checks, per write-back: an unchanged block is reported silent, costs exactly
// one data-array access (the compare read) and leaves the line's dirty bit as
// it was; a changed block is not silent, costs at least two accesses (block
// and ECC) and is read back correctly. At the end: the silent count equals the
// number of unchanged write-backs, and the accesses saved against a design
// that writes every block and its ECC (each silent write costing what a
// non-silent hit costs here) are positive. The saving is printed.
module tb_tcc_silent_traffic;
  import tcc_pkg::*;

  localparam int NSETS = 32, NTAGS = 12, NOPS = 500, SILENT_PCT = 37, L1_USED = 512;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic l1_req_valid = 0, l1_req_ready, l1_req_we = 0;
  addr_t l1_req_addr;
  block_t l1_req_wdata;
  logic [L1_IDX_W-1:0] l1_req_line;
  logic l1_resp_valid, l1_resp_silent, l1_resp_err;
  block_t l1_resp_rdata;
  logic mem_req_valid, mem_req_ready, mem_req_we, mem_resp_valid;
  addr_t mem_req_addr;
  block_t mem_req_wdata, mem_resp_rdata;
  tcc_stats_t stats;

  tcc_l2_top dut (.*);
  main_memory_model u_mem (.clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready),
    .req_we(mem_req_we), .req_addr(mem_req_addr), .req_wdata(mem_req_wdata),
    .resp_valid(mem_resp_valid), .resp_rdata(mem_resp_rdata));

  int checks = 0, failures = 0;
  logic last_silent, last_err;
  block_t last_data;
  block_t golden [addr_t];

  initial begin
    repeat (20_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(logic ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  function automatic block_t gold(addr_t a);
    return golden.exists(a) ? golden[a] : u_mem.init_block(a);
  endfunction

  function automatic logic [L1_IDX_W-1:0] l1_line(addr_t a);
    return L1_IDX_W'((int'(addr_tag(a)) * NSETS + int'(addr_set(a))) % L1_USED);
  endfunction

  function automatic int find_way(addr_t a);
    for (int w = 0; w < L2_WAYS; w++)
      if (dut.u_tags.tags[addr_set(a)].valid[w] && dut.u_tags.tags[addr_set(a)].tag[w] == addr_tag(a))
        return w;
    return -1;
  endfunction

  function automatic logic is_dirty(addr_t a);
    int w;
    w = find_way(a);
    if (w < 0) return 1'b0;
    return dut.u_tags.dirty[8'(addr_set(a) >> 3)][int'(addr_set(a)) % 8 * L2_WAYS + w];
  endfunction

  task automatic request(logic we, addr_t a, block_t d);
    @(negedge clk);
    l1_req_valid = 1; l1_req_we = we; l1_req_addr = a; l1_req_wdata = d;
    l1_req_line = l1_line(a);
    while (!l1_req_ready) @(negedge clk);
    @(negedge clk);
    l1_req_valid = 0;
    while (!l1_resp_valid) @(negedge clk);
    last_silent = l1_resp_silent;
    last_err    = l1_resp_err;
    last_data   = l1_resp_rdata;
    @(negedge clk);   // the tag-array commit lands one cycle after the response
  endtask

  initial begin
    addr_t a;
    block_t d;
    int n_unchanged, n_changed, wb_acc, hit_cost_sum, hit_cost_n;
    n_unchanged = 0; n_changed = 0; wb_acc = 0; hit_cost_sum = 0; hit_cost_n = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < NOPS; n++) begin
      logic was_dirty;
      int acc0, cost;
      a = make_addr(tag_t'(1 + $urandom_range(NTAGS - 1)), set_t'(16 + $urandom_range(NSETS - 1)));
      request(0, a, '0);
      chk(!last_err && last_data == gold(a), $sformatf("fill %h", a));
      d = gold(a);
      was_dirty = is_dirty(a);
      acc0 = int'(stats.l2_access);
      if ($urandom_range(99) < SILENT_PCT) begin
        request(1, a, d);
        cost = int'(stats.l2_access) - acc0;
        chk(last_silent, $sformatf("unchanged write-back not silent %h", a));
        chk(cost == 1, $sformatf("silent write cost %0d accesses, expected 1", cost));
        chk(is_dirty(a) == was_dirty, "silent write changed the dirty bit");
        n_unchanged++;
      end else begin
        int k;
        k = 1 + $urandom_range(3);
        for (int i = 0; i < k; i++) d[$urandom_range(15)*32 +: 32] = $urandom;
        request(1, a, d);
        cost = int'(stats.l2_access) - acc0;
        chk(!last_silent && cost >= 2, $sformatf("changed write-back: silent=%0b cost=%0d", last_silent, cost));
        chk(is_dirty(a), "written line not dirty");
        golden[a] = d;
        n_changed++;
        hit_cost_sum += cost;
        hit_cost_n++;
      end
      wb_acc += cost;
    end
    // read back everything that was written
    foreach (golden[x]) begin
      request(0, x, '0);
      chk(!last_err && last_data == golden[x], $sformatf("read back %h", x));
    end
    chk(int'(stats.silent) == n_unchanged, $sformatf("silent count %0d, unchanged write-backs %0d",
        stats.silent, n_unchanged));
    begin
      real mean_cost, baseline;
      mean_cost = real'(hit_cost_sum) / real'(hit_cost_n);
      baseline  = real'(wb_acc) + real'(n_unchanged) * (mean_cost - 1.0);
      $display("write-backs %0d (silent %0d), L2 accesses for write-backs %0d, mean non-silent cost %0.2f",
        n_unchanged + n_changed, n_unchanged, wb_acc, mean_cost);
      $display("same traffic writing every block and ECC: %0.0f accesses; saved %0.1f%%",
        baseline, 100.0 * (baseline - real'(wb_acc)) / baseline);
      chk(baseline > real'(wb_acc) && n_unchanged > 0 && n_changed > 0, "silent writes save accesses");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
