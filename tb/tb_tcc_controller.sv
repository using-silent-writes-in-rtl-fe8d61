// tb_tcc_controller: directed scenarios for every branch of the TCC read and
// write flows, with the controller connected to the tag array, data array,
// signature cache and a main-memory model of the evaluated latency.
//
// Scenarios (A = set 0 tag 1, whose ECC line 0xF000_0000 also lives in set 0):
//   fill miss; fill hit (latency 18 cycles, 1 L2 access); silent write-back
//   (1 L2 access: the compare read); non-silent write-back detected by the
//   signature (data write + ECC line allocated as zeros = 2 accesses);
//   write-back with equal signature but a different block (compare read, data
//   write, ECC read and write = 4 accesses); single-bit error in a dirty line
//   corrected with the ECC from L2; single-bit error in a clean line refetched;
//   double-bit error reported; ECC line evicted and the ECC read from memory
//   for a correction; a write whose ECC line misses while an adjacent block is
//   dirty (ECC line read from memory and merged), checked by a later
//   correction. Expected data come from the memory model's initial pattern
//   and from what the testbench wrote.
module tb_tcc_controller;
  import tcc_pkg::*;

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
  logic t_ready, t_rd, t_wr;
  set_t t_rset, t_wset;
  tag_entry_t t_rent, t_went;
  logic [ADJ*L2_WAYS-1:0] t_rdirty, t_wdirty;
  logic d_req, d_we, d_done, d_busy;
  logic [SET_W+WAY_W-1:0] d_idx;
  block_t d_wdata, d_rdata;
  par_t d_wpar, d_rpar;
  logic s_we, s_re;
  logic [L1_IDX_W-1:0] s_waddr, s_raddr;
  par_t s_wdata, s_rdata;
  tcc_stats_t stats;

  tcc_controller dut (.*);
  l2_tag_array u_tags (.clk, .rst_n, .ready(t_ready), .rd(t_rd), .rset(t_rset), .rent(t_rent),
    .rdirty(t_rdirty), .wr(t_wr), .wset(t_wset), .went(t_went), .wdirty(t_wdirty));
  l2_data_array u_data (.clk, .rst_n, .req(d_req), .we(d_we), .idx(d_idx), .wdata(d_wdata),
    .wpar(d_wpar), .busy(d_busy), .done(d_done), .rdata(d_rdata), .rpar(d_rpar));
  signature_cache u_sig (.clk, .we(s_we), .waddr(s_waddr), .wdata(s_wdata), .re(s_re),
    .raddr(s_raddr), .rdata(s_rdata));
  main_memory_model u_mem (.clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready),
    .req_we(mem_req_we), .req_addr(mem_req_addr), .req_wdata(mem_req_wdata),
    .resp_valid(mem_resp_valid), .resp_rdata(mem_resp_rdata));

  int checks = 0, failures = 0;
  int last_cycles;
  logic last_silent, last_err;
  block_t last_data;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(logic ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  // One request; waits for the response and records its latency, counted
  // from the cycle in which the request is accepted.
  task automatic request(logic we, addr_t a, block_t d, int line);
    @(negedge clk);
    l1_req_valid = 1; l1_req_we = we; l1_req_addr = a; l1_req_wdata = d;
    l1_req_line = L1_IDX_W'(line);
    while (!l1_req_ready) @(negedge clk);
    @(negedge clk);
    l1_req_valid = 0;
    last_cycles = 1;
    while (!l1_resp_valid) begin @(negedge clk); last_cycles++; end
    last_silent = l1_resp_silent;
    last_err    = l1_resp_err;
    last_data   = l1_resp_rdata;
    @(negedge clk);   // the tag-array commit lands one cycle after the response
  endtask

  // Flip one bit of the L2 copy of address a.
  task automatic flip(addr_t a, int b);
    logic found = 0;
    for (int w = 0; w < L2_WAYS; w++) begin
      if (u_tags.tags[addr_set(a)].valid[w] && u_tags.tags[addr_set(a)].tag[w] == addr_tag(a)) begin
        u_data.mem[{addr_set(a), way_t'(w)}][b] = ~u_data.mem[{addr_set(a), way_t'(w)}][b];
        found = 1;
      end
    end
    chk(found, "line to corrupt is in L2");
  endtask

  function automatic addr_t A(int tag, int set);
    return make_addr(tag_t'(tag), set_t'(set));
  endfunction

  initial begin
    block_t va, va2, va3, vb, vc;
    tcc_stats_t s0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // 1. fill miss
    request(0, A(1, 0), '0, 5);
    va = u_mem.init_block(A(1, 0));
    chk(last_data == va, "fill miss data");
    chk(stats.l2_miss == 1 && stats.fills == 1, "fill miss counted");
    chk(last_cycles > 1408, "fill miss waits for memory");

    // 2. fill hit: latency and one L2 access
    s0 = stats;
    request(0, A(1, 0), '0, 5);
    chk(last_data == va, "fill hit data");
    chk(last_cycles == 18, $sformatf("fill hit latency %0d, expected 18", last_cycles));
    chk(stats.l2_access - s0.l2_access == 1, "fill hit: one L2 access");

    // 3. silent write-back: only the compare read
    s0 = stats;
    request(1, A(1, 0), va, 5);
    chk(last_silent, "silent write detected");
    chk(stats.silent - s0.silent == 1, "silent counted");
    chk(stats.l2_access - s0.l2_access == 1, "silent write: one L2 access");
    chk(stats.ecc_update == s0.ecc_update, "silent write: no ECC update");
    chk(u_tags.dirty[0][0] == 1'b0, "silent write leaves the line clean");

    // 4. non-silent, signature differs; ECC line allocated as zeros
    va2 = va ^ 512'h1;
    s0 = stats;
    request(1, A(1, 0), va2, 5);
    chk(!last_silent, "non-silent write");
    chk(stats.sig_mismatch - s0.sig_mismatch == 1, "signature mismatch counted");
    chk(stats.ecc_line_miss - s0.ecc_line_miss == 1, "ECC line miss");
    chk(stats.ecc_mem_fetch == s0.ecc_mem_fetch, "no adjacent dirty: ECC line not read");
    chk(stats.l2_access - s0.l2_access == 2, "data write + ECC write");
    chk(u_tags.dirty[0][0] == 1'b1, "line dirty");

    // 5. fill returns new data and records its signature
    request(0, A(1, 0), '0, 5);
    chk(last_data == va2, "fill after write");

    // 6. same parity, different block (bits 0 and 8 flipped): alias
    va3 = va2 ^ 512'h101;
    s0 = stats;
    request(1, A(1, 0), va3, 5);
    chk(!last_silent, "alias write not silent");
    chk(stats.sig_alias - s0.sig_alias == 1, "alias counted");
    chk(stats.l2_access - s0.l2_access == 4, "compare + data + ECC read + ECC write");
    // the ECC line in L2 holds the block-ECC of va3 in word 0
    begin
      logic [ECC_W-1:0] e;
      for (int w = 0; w < 8; w++) e[w*8 +: 8] = secded_check(va3[w*64 +: 64]);
      chk(u_data.mem[{11'd0, 3'd1}][63:0] == e, "ECC line word 0 holds the block-ECC");
    end

    // 7. single-bit error in the dirty line: corrected with the ECC in L2
    flip(A(1, 0), 300);
    s0 = stats;
    request(0, A(1, 0), '0, 5);
    chk(last_data == va3 && !last_err, "dirty line corrected");
    chk(stats.corrected - s0.corrected == 1 && stats.parity_err - s0.parity_err == 1, "correction counted");
    request(0, A(1, 0), '0, 5);
    chk(stats.parity_err - s0.parity_err == 1 && last_data == va3, "corrected line written back");

    // 8. single-bit error in a clean line: refetched from memory
    request(0, A(2, 0), '0, 6);
    vb = u_mem.init_block(A(2, 0));
    chk(last_data == vb, "fill B");
    flip(A(2, 0), 7);
    s0 = stats;
    request(0, A(2, 0), '0, 6);
    chk(last_data == vb && stats.refetch - s0.refetch == 1, "clean line refetched");

    // 9. double-bit error in one word of the dirty line
    flip(A(1, 0), 64);
    flip(A(1, 0), 65);
    s0 = stats;
    request(0, A(1, 0), '0, 5);
    chk(last_err && stats.uncorrectable - s0.uncorrectable == 1, "double error reported");
    // restore A by writing it again (non-silent: the L1 never saw the bad data)
    request(1, A(1, 0), va3, 5);

    // 10. evict the ECC line, then correct A with the ECC read from memory.
    // Set 0 holds A, B, the ECC line; fill five more tags, touch A, add two.
    for (int t = 3; t < 8; t++) request(0, A(t, 0), '0, 7);
    request(0, A(1, 0), '0, 5);
    request(0, A(2, 0), '0, 6);
    s0 = stats;
    request(0, A(8, 0), '0, 7);
    chk(stats.evict_wb - s0.evict_wb == 1, "dirty ECC line written back on eviction");
    chk(u_mem.mem.exists(ECC_BASE), "ECC line in memory");
    flip(A(1, 0), 511);
    s0 = stats;
    request(0, A(1, 0), '0, 5);
    chk(last_data == va3 && !last_err, "corrected with ECC from memory");
    chk(stats.ecc_mem_fetch - s0.ecc_mem_fetch == 1, "ECC fetched from memory");

    // 11. C = set 1, tag 1 takes way 0 of set 1: adjacent to A (set 0 way 0).
    // Its ECC line misses and A is dirty, so the line is read from memory.
    vc = u_mem.init_block(A(1, 1)) ^ {16{32'hA5A5_0001}};
    s0 = stats;
    request(1, A(1, 1), vc, 9);
    chk(stats.ecc_line_miss - s0.ecc_line_miss == 1, "ECC line miss on write");
    chk(stats.ecc_mem_fetch - s0.ecc_mem_fetch == 1, "adjacent dirty: ECC line read from memory");
    // A's block-ECC survived the merge: correct A with the ECC in L2
    flip(A(1, 0), 100);
    s0 = stats;
    request(0, A(1, 0), '0, 5);
    chk(last_data == va3 && stats.corrected - s0.corrected == 1 &&
        stats.ecc_mem_fetch == s0.ecc_mem_fetch, "A corrected from merged ECC line");
    flip(A(1, 1), 3);
    request(0, A(1, 1), '0, 9);
    chk(last_data == vc && !last_err, "C corrected");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

