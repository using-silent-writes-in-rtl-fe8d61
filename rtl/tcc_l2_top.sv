// tcc_l2_top: a 1 MB, 8-way, 64-byte-line L2 data cache protected with
// Traffic-aware ECC (TCC).
//
// Error detection uses a one-byte interleaved parity stored with each line;
// correction uses an 8-byte SEC-DED block-ECC per dirty line kept in
// memory-mapped ECC lines, which are cached in the L2 like ordinary data. The
// parity is also the line's signature: the signature cache remembers the
// parity of every line handed to the L1, so that when the L1 writes the line
// back a parity comparison, confirmed by a block comparison, finds silent
// writes. Silent writes write nothing, neither the block nor its ECC.
//
// Blocks: tcc_controller (the read and write flows), l2_tag_array (tags,
// valid, LRU, dirty bits), l2_data_array (lines and parity, 12-cycle access),
// signature_cache (one byte per L1 line). The L1 data cache and main memory are
// outside: the L1 connects to l1_*, main memory (which also holds the ECC
// region at tcc_pkg::ECC_BASE) to mem_*.
//
// Interface: see tcc_controller; stats holds event counters. Timing: after
// reset the tag array clears itself for 2048 cycles (l1_req_ready low); a
// read hit then answers 18 cycles after the request is accepted (12 of them
// in the data array, the rest tag lookup and checks), a write-back in
// about 13 (signature mismatch: data write), 26 (plus ECC line read) and 38
// (plus ECC write) cycles; memory accesses add the memory's latency.
module tcc_l2_top
  import tcc_pkg::*;
#(
  parameter int unsigned LAT = L2_LAT
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                l1_req_valid,
  output logic                l1_req_ready,
  input  logic                l1_req_we,
  input  addr_t               l1_req_addr,
  input  block_t              l1_req_wdata,
  input  logic [L1_IDX_W-1:0] l1_req_line,
  output logic                l1_resp_valid,
  output block_t              l1_resp_rdata,
  output logic                l1_resp_silent,
  output logic                l1_resp_err,
  output logic                mem_req_valid,
  input  logic                mem_req_ready,
  output logic                mem_req_we,
  output addr_t               mem_req_addr,
  output block_t              mem_req_wdata,
  input  logic                mem_resp_valid,
  input  block_t              mem_resp_rdata,
  output tcc_stats_t          stats
);

  logic                   t_ready, t_rd, t_wr;
  set_t                   t_rset, t_wset;
  tag_entry_t             t_rent, t_went;
  logic [ADJ*L2_WAYS-1:0] t_rdirty, t_wdirty;
  logic                   d_req, d_we, d_done, d_busy;
  logic [SET_W+WAY_W-1:0] d_idx;
  block_t                 d_wdata, d_rdata;
  par_t                   d_wpar, d_rpar;
  logic                   s_we, s_re;
  logic [L1_IDX_W-1:0]    s_waddr, s_raddr;
  par_t                   s_wdata, s_rdata;

  l2_tag_array #(.SETS(L2_SETS)) u_tags (
    .clk, .rst_n, .ready(t_ready),
    .rd(t_rd), .rset(t_rset), .rent(t_rent), .rdirty(t_rdirty),
    .wr(t_wr), .wset(t_wset), .went(t_went), .wdirty(t_wdirty));

  l2_data_array #(.LINES(L2_SETS * L2_WAYS), .DATA_W(DATA_W), .PAR_W(PAR_W), .LAT(LAT)) u_data (
    .clk, .rst_n, .req(d_req), .we(d_we), .idx(d_idx), .wdata(d_wdata), .wpar(d_wpar),
    .busy(d_busy), .done(d_done), .rdata(d_rdata), .rpar(d_rpar));

  signature_cache #(.LINES(L1_LINES), .SIG_W(PAR_W)) u_sig (
    .clk, .we(s_we), .waddr(s_waddr), .wdata(s_wdata),
    .re(s_re), .raddr(s_raddr), .rdata(s_rdata));

  tcc_controller u_ctrl (
    .clk, .rst_n,
    .l1_req_valid, .l1_req_ready, .l1_req_we, .l1_req_addr, .l1_req_wdata, .l1_req_line,
    .l1_resp_valid, .l1_resp_rdata, .l1_resp_silent, .l1_resp_err,
    .mem_req_valid, .mem_req_ready, .mem_req_we, .mem_req_addr, .mem_req_wdata,
    .mem_resp_valid, .mem_resp_rdata,
    .t_ready, .t_rd, .t_rset, .t_rent, .t_rdirty, .t_wr, .t_wset, .t_went, .t_wdirty,
    .d_req, .d_we, .d_idx, .d_wdata, .d_wpar, .d_done, .d_rdata, .d_rpar,
    .s_we, .s_waddr, .s_wdata, .s_re, .s_raddr, .s_rdata,
    .stats);

  // The controller never issues a data-array access while one is running.
  a_data_idle: assert property (@(posedge clk) disable iff (!rst_n) d_req |-> !d_busy);

endmodule
