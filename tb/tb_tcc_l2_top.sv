// tb_tcc_l2_top: end-to-end test of the TCC L2 cache at its full size.
//
// The testbench plays the L1 data cache and keeps a golden copy of every
// block. Traffic is random over 16 sets (two groups of adjacent blocks) and 24
// tags per set, so that lines, including ECC lines, are evicted often. It
// mixes fills, write-backs of unchanged data (silent), of new data and of data
// with the same parity but different contents (signature alias), single-bit
// errors injected into L2 lines (clean: refetched, dirty: corrected with the
// ECC from L2 or from memory) and double-bit errors (reported, after which
// the L1 rewrites the block). Checks: every fill returns the golden block
// (or raises the error flag for a double error); a silent write-back never
// changes data and a fill followed at once by an unchanged write-back is
// silent; at the end every block is read back. Each mechanism of the design
// must have happened at least once, otherwise that counts as a failure.
// The main-memory model uses the evaluated latency (512 + 7*128 cycles).
module tb_tcc_l2_top;
  import tcc_pkg::*;

  localparam int NSETS = 16, NTAGS = 24, NOPS = 700;

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

  function automatic addr_t pick_addr();
    return make_addr(tag_t'(1 + $urandom_range(NTAGS - 1)), set_t'($urandom_range(NSETS - 1)));
  endfunction

  // L1 line number of an address: distinct for every address of the pool.
  function automatic logic [L1_IDX_W-1:0] l1_line(addr_t a);
    return L1_IDX_W'(int'(addr_tag(a)) * NSETS + int'(addr_set(a)));
  endfunction

  function automatic block_t gold(addr_t a);
    return golden.exists(a) ? golden[a] : u_mem.init_block(a);
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
  endtask

  task automatic fill(addr_t a);
    request(0, a, '0);
    chk(!last_err && last_data == gold(a), $sformatf("fill %h", a));
  endtask

  task automatic writeback(addr_t a, block_t d);
    block_t old = gold(a);
    request(1, a, d);
    if (last_silent) chk(d == old, $sformatf("silent write changed data %h", a));
    else             chk(1'b1, "");
    golden[a] = d;
  endtask

  // Way of the L2 copy of a, or -1.
  function automatic int find_way(addr_t a);
    for (int w = 0; w < L2_WAYS; w++)
      if (dut.u_tags.tags[addr_set(a)].valid[w] && dut.u_tags.tags[addr_set(a)].tag[w] == addr_tag(a))
        return w;
    return -1;
  endfunction

  function automatic logic is_dirty(addr_t a, int w);
    return dut.u_tags.dirty[addr_set(a) >> 3][int'(addr_set(a) % 8) * L2_WAYS + w];
  endfunction

  // Flip nbits adjacent bits of one 64-bit word of the L2 copy of a (way w).
  task automatic corrupt(addr_t a, int w, int nbits);
    int word = $urandom_range(7), b = $urandom_range(63);
    for (int k = 0; k < nbits; k++)
      dut.u_data.mem[{addr_set(a), way_t'(w)}][word*64 + (b + k) % 64] ^= 1'b1;
  endtask

  initial begin
    addr_t a;
    block_t d;
    int n_pairs = 0, n_dbl = 0;
    addr_t last_a = make_addr(tag_t'(1), set_t'(0)), last_wb = last_a;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < NOPS; n++) begin
      int op;
      a  = pick_addr();
      op = $urandom_range(19);
      // errors are injected into the line used last or written last
      if (op >= 15) a = (op == 15 || op >= 18) ? last_wb : last_a;
      case (op)
        0, 1, 2, 3, 4, 5: fill(a);
        6, 7: begin // fill then write back unchanged: must be silent
          fill(a);
          request(1, a, gold(a));
          chk(last_silent, $sformatf("unchanged write-back right after fill not silent %h", a));
          n_pairs++;
        end
        8, 9, 10, 11: begin // new data
          fill(a);
          d = gold(a);
          for (int k = 0; k < 4; k++) d[$urandom_range(15)*32 +: 32] = $urandom;
          writeback(a, d);
        end
        12, 13: begin // same parity, different data
          fill(a);
          d = gold(a);
          begin
            int b;
            b = $urandom_range(503);
            d[b] ^= 1'b1; d[b + 8] ^= 1'b1;
          end
          writeback(a, d);
        end
        14: writeback(a, gold(a));   // unchanged, maybe after eviction
        15, 16, 17: begin            // single-bit error, then fill
          int w;
          w = find_way(a);
          if (w >= 0) corrupt(a, w, 1);
          fill(a);
        end
        default: begin               // double-bit error: dirty lines cannot be repaired
          int w;
          w = find_way(a);
          if (w >= 0 && is_dirty(a, w)) begin
            corrupt(a, w, 2);
            request(0, a, '0);
            chk(last_err, $sformatf("double error in dirty line not reported %h", a));
            n_dbl++;
            writeback(a, gold(a));    // the L1's copy repairs the line
          end else begin
            if (w >= 0) corrupt(a, w, 2);
            fill(a);                  // clean: refetched
          end
        end
      endcase
      last_a = a;
      if (op >= 8 && op <= 13) last_wb = a;
    end
    // read everything back
    for (int s = 0; s < NSETS; s++)
      for (int t = 1; t <= NTAGS; t++) fill(make_addr(tag_t'(t), set_t'(s)));

    $display("mechanisms: fills=%0d writebacks=%0d l2_miss=%0d evict_wb=%0d silent=%0d sig_mismatch=%0d sig_alias=%0d ecc_update=%0d ecc_line_miss=%0d ecc_mem_fetch=%0d parity_err=%0d refetch=%0d corrected=%0d uncorrectable=%0d l2_access=%0d",
      stats.fills, stats.writebacks, stats.l2_miss, stats.evict_wb, stats.silent, stats.sig_mismatch,
      stats.sig_alias, stats.ecc_update, stats.ecc_line_miss, stats.ecc_mem_fetch, stats.parity_err,
      stats.refetch, stats.corrected, stats.uncorrectable, stats.l2_access);
    chk(stats.l2_miss > 0, "mechanism: L2 miss");
    chk(stats.evict_wb > 0, "mechanism: dirty eviction");
    chk(stats.silent > 0 && n_pairs > 0, "mechanism: silent write");
    chk(stats.sig_mismatch > 0, "mechanism: signature mismatch");
    chk(stats.sig_alias > 0, "mechanism: equal signature, different block");
    chk(stats.ecc_update > stats.ecc_line_miss, "mechanism: ECC line hit on write");
    chk(stats.ecc_line_miss > 0, "mechanism: ECC line allocated");
    chk(stats.ecc_mem_fetch > 0, "mechanism: ECC line read from memory");
    chk(stats.parity_err > 0, "mechanism: parity error");
    chk(stats.refetch > 0, "mechanism: clean line refetched");
    chk(stats.corrected > 0, "mechanism: dirty line corrected");
    chk(stats.uncorrectable > 0 && n_dbl > 0, "mechanism: uncorrectable error");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

