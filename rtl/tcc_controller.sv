// tcc_controller: the L2 cache controller of Traffic-aware ECC (TCC).
//
// TCC keeps a one-byte interleaved parity with every L2 line for error
// detection and keeps the 8-byte SEC-DED block-ECC of every dirty line in
// memory-mapped ECC lines, ordinary cache lines of an ECC address region.
// Its point is to skip the work of silent write-backs, those that write the
// data the L2 already holds.
//
// Write-back from L1 (paper Fig. 2b):
//   1. The parity of the ready-to-write block is compared with the signature
//      that was saved in the signature cache when the line was filled.
//   2. Unequal: the write is not silent. Equal: the old block is read from L2
//      and compared word by word (block_compare); equal blocks make a silent
//      write, which ends here: nothing is written and the dirty bit stays.
//   3. Not silent: the block and its parity are written, the line is marked
//      dirty, its block-ECC is computed and written into its ECC line with an
//      extra L2 access. If the ECC line misses, a line is allocated for it and
//      read from memory only when another of its eight adjacent blocks is
//      dirty (only then can memory hold live block-ECCs); otherwise it starts
//      as zeros.
// Fill into L1 (paper Fig. 2a):
//   1. The line and its parity are read and the parity is recomputed.
//   2. Equal: the line goes to the L1 and its parity is saved as the L1
//      line's signature. Unequal: the dirty bit decides.
//   3. Clean line: the correct copy is read from memory. Dirty line: its ECC
//      line is looked up in L2.
//   4. The block-ECC comes from L2 or, on an ECC-line miss, from memory, and
//      the line is corrected.
//   A refetched or corrected line is also written back into L2; a line found
//   uncorrectable is returned with an error flag and left as it is.
// On a miss the LRU victim (an invalid way first) is replaced; a dirty victim,
// data or ECC line, is written to memory first. A fill reads the line from
// memory; a write-back that misses allocates without reading memory.
//
// The steps above follow the paper. These are this design's own choices: a
// blocking controller (one request at a time), valid/ready handshakes, writing
// refetched and corrected lines back into L2, ECC lines protected by parity
// only (a parity error in the ECC line used for a correction is reported as
// uncorrectable), and victims written back without a parity check.
//
// Interfaces: L1 request (l1_req_*, valid/ready; we = 1 for a write-back;
// l1_req_line is the L1 line number that indexes the signature cache), L1
// response (one-cycle l1_resp_valid for every request, with the fill data, a
// silent flag for write-backs and an error flag), memory (mem_req_* valid/ready;
// one mem_resp_valid per request, carrying read data; writes are acknowledged
// the same way), and the ports of the tag array, data array and signature
// cache. Timing: every data-array access costs the array's latency (12
// cycles); the tag array and signature cache answer in the next cycle.
module tcc_controller
  import tcc_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  // L1 side
  input  logic                 l1_req_valid,
  output logic                 l1_req_ready,
  input  logic                 l1_req_we,
  input  addr_t                l1_req_addr,
  input  block_t               l1_req_wdata,
  input  logic [L1_IDX_W-1:0]  l1_req_line,
  output logic                 l1_resp_valid,
  output block_t               l1_resp_rdata,
  output logic                 l1_resp_silent,
  output logic                 l1_resp_err,
  // main memory side
  output logic                 mem_req_valid,
  input  logic                 mem_req_ready,
  output logic                 mem_req_we,
  output addr_t                mem_req_addr,
  output block_t               mem_req_wdata,
  input  logic                 mem_resp_valid,
  input  block_t               mem_resp_rdata,
  // tag array
  input  logic                 t_ready,
  output logic                 t_rd,
  output set_t                 t_rset,
  input  tag_entry_t           t_rent,
  input  logic [ADJ*L2_WAYS-1:0] t_rdirty,
  output logic                 t_wr,
  output set_t                 t_wset,
  output tag_entry_t           t_went,
  output logic [ADJ*L2_WAYS-1:0] t_wdirty,
  // data array
  output logic                 d_req,
  output logic                 d_we,
  output logic [SET_W+WAY_W-1:0] d_idx,
  output block_t               d_wdata,
  output par_t                 d_wpar,
  input  logic                 d_done,
  input  block_t               d_rdata,
  input  par_t                 d_rpar,
  // signature cache
  output logic                 s_we,
  output logic [L1_IDX_W-1:0]  s_waddr,
  output par_t                 s_wdata,
  output logic                 s_re,
  output logic [L1_IDX_W-1:0]  s_raddr,
  input  par_t                 s_rdata,
  // event counters
  output tcc_stats_t           stats
);

  typedef enum logic [4:0] {
    S_INIT, S_IDLE, S_TWAIT, S_DWAIT, S_MWAIT, S_LOOKUP,
    S_ALLOC, S_EVICT, S_ALLOC_DONE,
    S_RD_CHK, S_RD_MISS, S_RD_REFILL, S_FIX_ECC_L2, S_FIX_ECC_MEM, S_FIX, S_RD_DONE,
    S_WR_CMP0, S_WR_CMP, S_WR_DATA, S_WR_ECC, S_WR_ECC_RD, S_ECC_NEW, S_ECC_MERGE_L2, S_ECC_MERGE_MEM,
    S_DONE
  } state_t;

  typedef enum logic [1:0] {PH_DATA, PH_ECC_RD, PH_ECC_WR} phase_t;

  state_t  state, ret, aret;
  phase_t  phase;

  // request
  logic                op_we;
  addr_t               op_addr;
  logic [L1_IDX_W-1:0] op_line;
  // data line and current line (the one ent/dgrp describe)
  set_t   dset;
  way_t   dway;
  set_t   cset;
  way_t   cway;
  addr_t  cur_addr;
  tag_entry_t ent;
  logic [ADJ*L2_WAYS-1:0] dgrp, dgrp_data;
  // buffers
  block_t blk;        // old line read from L2
  block_t wblk;       // line to write into L2 / send to L1
  block_t mbuf;       // line read from memory
  ecc_t   ecc_word;   // block-ECC of the data line
  logic   ecc_bad;
  logic   resp_err;

  // datapath blocks
  par_t   par_l2;     // parity of the line read from L2
  par_t   par_w;      // parity of wblk
  ecc_t   ecc_w;      // block-ECC of wblk
  block_t fixed_blk;
  logic [3:0] n_fixed;
  logic   uncorr;
  logic   cmp_start, cmp_done, cmp_equal;

  parity_gen #(.DATA_W(DATA_W), .PAR_W(PAR_W)) u_par_l2 (.data(d_rdata), .parity(par_l2));
  parity_gen #(.DATA_W(DATA_W), .PAR_W(PAR_W)) u_par_w  (.data(wblk),    .parity(par_w));
  ecc_calc   #(.BLK_W(DATA_W))                 u_ecc    (.data(wblk),    .ecc(ecc_w));
  error_correction #(.BLK_W(DATA_W)) u_fix (
    .data(blk), .ecc(ecc_word), .corrected(fixed_blk), .n_fixed(n_fixed), .uncorrectable(uncorr));
  block_compare #(.DATA_W(DATA_W), .CMP_W(WORD_W)) u_cmp (
    .clk, .rst_n, .start(cmp_start), .a(blk), .b(wblk), .done(cmp_done), .equal(cmp_equal));

  assign d_wdata = wblk;
  assign d_wpar  = par_w;
  assign l1_req_ready = (state == S_IDLE);

  // Tag lookup of cur_addr in the entry just read.
  logic hit;
  way_t hway;
  always_comb begin
    hit  = 1'b0;
    hway = '0;
    for (int w = 0; w < L2_WAYS; w++) begin
      if (t_rent.valid[w] && t_rent.tag[w] == addr_tag(cur_addr)) begin
        hit  = 1'b1;
        hway = way_t'(w);
      end
    end
  end

  // Victim of the current set: an invalid way, else the oldest.
  way_t vway;
  always_comb begin
    logic found;
    found = 1'b0;
    vway  = '0;
    for (int w = 0; w < L2_WAYS; w++) begin
      if (!found && !ent.valid[w]) begin
        found = 1'b1;
        vway  = way_t'(w);
      end
    end
    if (!found) begin
      for (int w = 0; w < L2_WAYS; w++) if (ent.age[w] >= ent.age[vway]) vway = way_t'(w);
    end
  end

  function automatic tag_entry_t lru_touch(tag_entry_t e, way_t w);
    tag_entry_t r;
    r = e;
    for (int i = 0; i < L2_WAYS; i++) if (e.age[i] < e.age[w]) r.age[i] = e.age[i] + 1'b1;
    r.age[w] = '0;
    return r;
  endfunction

  function automatic int unsigned dbit(set_t s, way_t w);
    return int'(s[$clog2(ADJ)-1:0]) * L2_WAYS + int'(w);
  endfunction

  function automatic logic [SET_W+WAY_W-1:0] line_idx(set_t s, way_t w);
    return {s, w};
  endfunction

  // Adjacent blocks of the data line other than itself: same way, the other
  // sets of its group of eight.
  logic adj_dirty;
  always_comb begin
    adj_dirty = 1'b0;
    for (int s = 0; s < ADJ; s++)
      if (s != int'(dset[$clog2(ADJ)-1:0])) adj_dirty |= dgrp_data[s*L2_WAYS + int'(dway)];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_INIT;
      ret   <= S_IDLE;
      aret  <= S_IDLE;
      phase <= PH_DATA;
      t_rd <= 1'b0; t_wr <= 1'b0; d_req <= 1'b0; d_we <= 1'b0;
      s_we <= 1'b0; s_re <= 1'b0; cmp_start <= 1'b0;
      mem_req_valid <= 1'b0; mem_req_we <= 1'b0;
      l1_resp_valid <= 1'b0; l1_resp_silent <= 1'b0; l1_resp_err <= 1'b0;
      resp_err <= 1'b0; ecc_bad <= 1'b0;
      stats <= '0;
      op_we <= 1'b0; op_addr <= '0; op_line <= '0; cur_addr <= '0;
      dset <= '0; dway <= '0; cset <= '0; cway <= '0; ent <= '0; dgrp <= '0; dgrp_data <= '0;
      blk <= '0; wblk <= '0; mbuf <= '0; ecc_word <= '0;
      l1_resp_rdata <= '0; mem_req_addr <= '0; mem_req_wdata <= '0;
      t_rset <= '0; t_wset <= '0; t_went <= '0; t_wdirty <= '0;
      d_idx <= '0; s_waddr <= '0; s_wdata <= '0; s_raddr <= '0;
    end else begin
      t_rd <= 1'b0; t_wr <= 1'b0; d_req <= 1'b0; s_we <= 1'b0; s_re <= 1'b0;
      cmp_start <= 1'b0; l1_resp_valid <= 1'b0;
      if (d_req) stats.l2_access <= stats.l2_access + 1;

      unique case (state)
        S_INIT: if (t_ready) state <= S_IDLE;

        S_IDLE: if (l1_req_valid) begin
          op_we    <= l1_req_we;
          op_addr  <= l1_req_addr;
          op_line  <= l1_req_line;
          wblk     <= l1_req_wdata;
          cur_addr <= l1_req_addr;
          dset     <= addr_set(l1_req_addr);
          cset     <= addr_set(l1_req_addr);
          phase    <= PH_DATA;
          resp_err <= 1'b0;
          t_rd <= 1'b1; t_rset <= addr_set(l1_req_addr);
          s_re <= 1'b1; s_raddr <= l1_req_line;
          if (l1_req_we) stats.writebacks <= stats.writebacks + 1;
          else           stats.fills      <= stats.fills + 1;
          state <= S_TWAIT; ret <= S_LOOKUP;
        end

        // primitive waits
        S_TWAIT: state <= ret;
        S_DWAIT: if (d_done) state <= ret;
        S_MWAIT: begin
          if (mem_req_valid && mem_req_ready) mem_req_valid <= 1'b0;
          if (mem_resp_valid) begin
            mbuf  <= mem_resp_rdata;
            state <= ret;
          end
        end

        S_LOOKUP: unique case (phase)
          PH_DATA: begin
            ent <= t_rent; dgrp <= t_rdirty;
            if (hit) begin
              dway <= hway; cway <= hway;
              if (!op_we) begin
                d_req <= 1'b1; d_we <= 1'b0; d_idx <= line_idx(dset, hway);
                state <= S_DWAIT; ret <= S_RD_CHK;
              end else if (par_w != s_rdata) begin
                stats.sig_mismatch <= stats.sig_mismatch + 1;
                state <= S_WR_DATA;
              end else begin
                d_req <= 1'b1; d_we <= 1'b0; d_idx <= line_idx(dset, hway);
                state <= S_DWAIT; ret <= S_WR_CMP0;
              end
            end else begin
              stats.l2_miss <= stats.l2_miss + 1;
              state <= S_ALLOC;
              aret  <= op_we ? S_WR_DATA : S_RD_MISS;
            end
          end
          PH_ECC_RD: begin
            // ECC for a correction: read it from L2, or from memory on a miss.
            if (hit) begin
              d_req <= 1'b1; d_we <= 1'b0; d_idx <= line_idx(addr_set(cur_addr), hway);
              state <= S_DWAIT; ret <= S_FIX_ECC_L2;
            end else begin
              stats.ecc_mem_fetch <= stats.ecc_mem_fetch + 1;
              mem_req_valid <= 1'b1; mem_req_we <= 1'b0; mem_req_addr <= cur_addr;
              state <= S_MWAIT; ret <= S_FIX_ECC_MEM;
            end
          end
          default: begin // PH_ECC_WR
            ent <= t_rent; dgrp <= t_rdirty;
            if (hit) begin
              cway  <= hway;
              d_req <= 1'b1; d_we <= 1'b0; d_idx <= line_idx(cset, hway);
              state <= S_DWAIT; ret <= S_ECC_MERGE_L2;
            end else begin
              stats.ecc_line_miss <= stats.ecc_line_miss + 1;
              state <= S_ALLOC;
              aret  <= S_ECC_NEW;
            end
          end
        endcase

        // replacement in set cset
        S_ALLOC: begin
          cway <= vway;
          if (ent.valid[vway] && dgrp[dbit(cset, vway)]) begin
            d_req <= 1'b1; d_we <= 1'b0; d_idx <= line_idx(cset, vway);
            state <= S_DWAIT; ret <= S_EVICT;
          end else begin
            state <= S_ALLOC_DONE;
          end
        end
        S_EVICT: begin
          stats.evict_wb <= stats.evict_wb + 1;
          mem_req_valid <= 1'b1; mem_req_we <= 1'b1;
          mem_req_addr  <= make_addr(ent.tag[cway], cset);
          mem_req_wdata <= d_rdata;
          state <= S_MWAIT; ret <= S_ALLOC_DONE;
        end
        S_ALLOC_DONE: begin
          ent.valid[cway] <= 1'b1;
          ent.tag[cway]   <= addr_tag(cur_addr);
          dgrp[dbit(cset, cway)] <= 1'b0;
          if (phase == PH_DATA) dway <= cway;
          state <= aret;
        end

        // fill path
        S_RD_CHK: begin
          blk <= d_rdata;
          if (par_l2 == d_rpar) begin
            wblk  <= d_rdata;
            state <= S_RD_DONE;
          end else begin
            stats.parity_err <= stats.parity_err + 1;
            if (!dgrp[dbit(dset, dway)]) begin
              stats.refetch <= stats.refetch + 1;
              mem_req_valid <= 1'b1; mem_req_we <= 1'b0; mem_req_addr <= op_addr;
              state <= S_MWAIT; ret <= S_RD_REFILL;
            end else begin
              phase    <= PH_ECC_RD;
              cur_addr <= ecc_line_addr(dset, dway);
              t_rd <= 1'b1; t_rset <= addr_set(ecc_line_addr(dset, dway));
              state <= S_TWAIT; ret <= S_LOOKUP;
            end
          end
        end
        S_RD_MISS: begin
          mem_req_valid <= 1'b1; mem_req_we <= 1'b0; mem_req_addr <= op_addr;
          state <= S_MWAIT; ret <= S_RD_REFILL;
        end
        S_RD_REFILL: begin
          wblk  <= mbuf;
          d_req <= 1'b1; d_we <= 1'b1; d_idx <= line_idx(dset, dway);
          state <= S_DWAIT; ret <= S_RD_DONE;
        end
        S_FIX_ECC_L2: begin
          ecc_word <= d_rdata[dset[$clog2(ADJ)-1:0]*ECC_W +: ECC_W];
          ecc_bad  <= (par_l2 != d_rpar);
          state    <= S_FIX;
        end
        S_FIX_ECC_MEM: begin
          ecc_word <= mbuf[dset[$clog2(ADJ)-1:0]*ECC_W +: ECC_W];
          ecc_bad  <= 1'b0;
          state    <= S_FIX;
        end
        S_FIX: begin
          wblk <= fixed_blk;
          if (uncorr || ecc_bad) begin
            // nothing trustworthy to write back: report and leave L2 as is
            stats.uncorrectable <= stats.uncorrectable + 1;
            resp_err <= 1'b1;
            state    <= S_RD_DONE;
          end else begin
            stats.corrected <= stats.corrected + 1;
            d_req <= 1'b1; d_we <= 1'b1; d_idx <= line_idx(dset, dway);
            state <= S_DWAIT; ret <= S_RD_DONE;
          end
        end
        S_RD_DONE: begin
          s_we <= 1'b1; s_waddr <= op_line; s_wdata <= par_w;
          l1_resp_rdata  <= wblk;
          l1_resp_silent <= 1'b0;
          l1_resp_err    <= resp_err;
          l1_resp_valid  <= 1'b1;
          t_wr <= 1'b1; t_wset <= dset; t_went <= lru_touch(ent, dway); t_wdirty <= dgrp;
          state <= S_IDLE;
        end

        // write-back path
        S_WR_CMP0: begin
          blk       <= d_rdata;
          cmp_start <= 1'b1;
          state     <= S_WR_CMP;
        end
        S_WR_CMP: if (cmp_done) begin
          if (cmp_equal) begin
            stats.silent <= stats.silent + 1;
            l1_resp_silent <= 1'b1;
            l1_resp_err    <= 1'b0;
            l1_resp_valid  <= 1'b1;
            t_wr <= 1'b1; t_wset <= dset; t_went <= lru_touch(ent, dway); t_wdirty <= dgrp;
            state <= S_IDLE;
          end else begin
            stats.sig_alias <= stats.sig_alias + 1;
            state <= S_WR_DATA;
          end
        end
        S_WR_DATA: begin
          // wblk holds the ready-to-write block; its parity and ECC are ready.
          ecc_word <= ecc_w;
          d_req <= 1'b1; d_we <= 1'b1; d_idx <= line_idx(dset, dway);
          dgrp[dbit(dset, dway)]      <= 1'b1;
          dgrp_data                   <= dgrp;
          dgrp_data[dbit(dset, dway)] <= 1'b1;
          state <= S_DWAIT; ret <= S_WR_ECC;
        end
        S_WR_ECC: begin
          // commit the data line, then look up its ECC line
          t_wr <= 1'b1; t_wset <= dset; t_went <= lru_touch(ent, dway); t_wdirty <= dgrp;
          stats.ecc_update <= stats.ecc_update + 1;
          phase    <= PH_ECC_WR;
          cur_addr <= ecc_line_addr(dset, dway);
          cset     <= addr_set(ecc_line_addr(dset, dway));
          state    <= S_WR_ECC_RD;
        end
        S_WR_ECC_RD: begin
          // issued a cycle after the commit so that the read sees it
          t_rd <= 1'b1; t_rset <= cset;
          state <= S_TWAIT; ret <= S_LOOKUP;
        end
        S_ECC_NEW: begin
          if (adj_dirty) begin
            stats.ecc_mem_fetch <= stats.ecc_mem_fetch + 1;
            mem_req_valid <= 1'b1; mem_req_we <= 1'b0; mem_req_addr <= cur_addr;
            state <= S_MWAIT; ret <= S_ECC_MERGE_MEM;
          end else begin
            wblk  <= ecc_merge('0, dset[$clog2(ADJ)-1:0], ecc_word);
            d_req <= 1'b1; d_we <= 1'b1; d_idx <= line_idx(cset, cway);
            dgrp[dbit(cset, cway)] <= 1'b1;
            state <= S_DWAIT; ret <= S_DONE;
          end
        end
        S_ECC_MERGE_L2, S_ECC_MERGE_MEM: begin
          wblk  <= ecc_merge(state == S_ECC_MERGE_L2 ? d_rdata : mbuf, dset[$clog2(ADJ)-1:0], ecc_word);
          d_req <= 1'b1; d_we <= 1'b1; d_idx <= line_idx(cset, cway);
          dgrp[dbit(cset, cway)] <= 1'b1;
          state <= S_DWAIT; ret <= S_DONE;
        end
        S_DONE: begin
          l1_resp_silent <= 1'b0;
          l1_resp_err    <= 1'b0;
          l1_resp_valid  <= 1'b1;
          t_wr <= 1'b1; t_wset <= cset; t_went <= lru_touch(ent, cway); t_wdirty <= dgrp;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // The tag-array read issued on a request is consumed in S_LOOKUP.
  a_one_outstanding: assert property (@(posedge clk) disable iff (!rst_n)
    d_req |-> state == S_DWAIT);
  a_mem_hold: assert property (@(posedge clk) disable iff (!rst_n)
    mem_req_valid && !mem_req_ready |=> mem_req_valid && $stable(mem_req_addr));

endmodule
