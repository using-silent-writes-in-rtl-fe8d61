// tcc_pkg: sizes, address split, memory-mapped ECC mapping and the two codes
// shared by the Traffic-aware ECC (TCC) L2 cache.
//
// Sizes follow the evaluated system: a 1 MB, 8-way L2 data cache with 64-byte
// lines (2048 sets), a 64 KB L1 data cache with 64-byte lines (1024 lines, one
// signature byte each), a one-byte interleaved parity per line and an
// eight-byte SEC-DED block-ECC per line.
//
// Choices of this design, not of the paper: 32-bit physical addresses, the
// ECC region at ECC_BASE, the order of block-ECCs inside an ECC line, bit
// interleaving of the parity, and the extended-Hamming (72,64) construction.
//
// Memory-mapped ECC: the block-ECCs of the eight "adjacent" blocks, i.e. the
// lines of one way in eight consecutive sets 8k..8k+7, share one 64-byte ECC
// line at ECC_BASE + ((set/8)*WAYS + way)*64; the block-ECC of set s is 64-bit
// word (s mod 8) of that line.
package tcc_pkg;

  localparam int unsigned ADDR_W      = 32;
  localparam int unsigned BLOCK_BYTES = 64;
  localparam int unsigned DATA_W      = BLOCK_BYTES * 8;      // 512
  localparam int unsigned PAR_W       = 8;                    // one byte of parity
  localparam int unsigned ECC_W       = DATA_W / 8;           // 64 bits = 8 bytes
  localparam int unsigned WORD_W      = 64;                   // SEC-DED word

  localparam int unsigned L2_BYTES    = 1024 * 1024;
  localparam int unsigned L2_WAYS     = 8;
  localparam int unsigned L2_SETS     = L2_BYTES / (BLOCK_BYTES * L2_WAYS); // 2048
  localparam int unsigned L2_LAT      = 12;                   // cycles per access

  localparam int unsigned L1_BYTES    = 64 * 1024;
  localparam int unsigned L1_LINES    = L1_BYTES / BLOCK_BYTES;            // 1024

  localparam int unsigned OFF_W       = $clog2(BLOCK_BYTES);  // 6
  localparam int unsigned SET_W       = $clog2(L2_SETS);      // 11
  localparam int unsigned WAY_W       = $clog2(L2_WAYS);      // 3
  localparam int unsigned TAG_W       = ADDR_W - SET_W - OFF_W; // 15
  localparam int unsigned ADJ         = 8;                    // block-ECCs per ECC line
  localparam int unsigned L1_IDX_W    = $clog2(L1_LINES);     // 10

  localparam logic [ADDR_W-1:0] ECC_BASE = 32'hF000_0000;

  typedef logic [ADDR_W-1:0] addr_t;
  typedef logic [DATA_W-1:0] block_t;
  typedef logic [PAR_W-1:0]  par_t;
  typedef logic [ECC_W-1:0]  ecc_t;
  typedef logic [SET_W-1:0]  set_t;
  typedef logic [WAY_W-1:0]  way_t;
  typedef logic [TAG_W-1:0]  tag_t;

  // One set of the tag array. Dirty bits live in a separate, group-organised
  // memory (see l2_tag_array).
  typedef struct packed {
    logic [L2_WAYS-1:0]            valid;
    logic [L2_WAYS-1:0][TAG_W-1:0] tag;
    logic [L2_WAYS-1:0][WAY_W-1:0] age;   // 0 = most recently used
  } tag_entry_t;

  // Event counters of the controller, the quantities the evaluation counts.
  typedef struct packed {
    logic [31:0] l2_access;      // data-array accesses (reads and writes)
    logic [31:0] fills;          // L1 fill requests served
    logic [31:0] writebacks;     // L1 write-backs received
    logic [31:0] l2_miss;        // requests that missed in L2
    logic [31:0] evict_wb;       // dirty victims written to memory
    logic [31:0] sig_mismatch;   // write-backs found non-silent by signature
    logic [31:0] sig_alias;      // equal signature but different block
    logic [31:0] silent;         // silent writes (nothing written)
    logic [31:0] ecc_update;     // block-ECCs written
    logic [31:0] ecc_line_miss;  // ECC line not in L2 on a write
    logic [31:0] ecc_mem_fetch;  // ECC line read from memory
    logic [31:0] parity_err;     // parity mismatch on an L2 read
    logic [31:0] refetch;        // clean line re-read from memory
    logic [31:0] corrected;      // dirty line corrected with its ECC
    logic [31:0] uncorrectable;  // correction failed
  } tcc_stats_t;

  // Replace block-ECC number `slot` of an ECC line.
  function automatic block_t ecc_merge(block_t line, logic [$clog2(ADJ)-1:0] slot, ecc_t e);
    block_t r;
    r = line;
    r[slot*ECC_W +: ECC_W] = e;
    return r;
  endfunction

  function automatic set_t addr_set(addr_t a);
    return a[OFF_W +: SET_W];
  endfunction

  function automatic tag_t addr_tag(addr_t a);
    return a[ADDR_W-1 -: TAG_W];
  endfunction

  function automatic addr_t make_addr(tag_t t, set_t s);
    return {t, s, {OFF_W{1'b0}}};
  endfunction

  // Address of the ECC line that holds the block-ECC of line (set, way).
  function automatic addr_t ecc_line_addr(set_t s, way_t w);
    logic [ADDR_W-1:0] line_no;
    line_no = ADDR_W'(s >> $clog2(ADJ)) * ADDR_W'(L2_WAYS) + ADDR_W'(w);
    return ECC_BASE + (line_no << OFF_W);
  endfunction

  // Interleaved parity: bit i is the XOR of data bits i, i+8, i+16, ...
  function automatic par_t block_parity(block_t d);
    par_t p;
    p = '0;
    for (int j = 0; j < DATA_W; j++) p[j % PAR_W] ^= d[j];
    return p;
  endfunction

  // Extended Hamming (72,64). Codeword positions 1..71: positions that are
  // powers of two hold check bits c0..c6, the others hold data bits in order
  // (data bit 0 at position 3, bit 1 at 5, bit 2 at 6, ...). Check bit b is the
  // XOR of the data bits whose position has bit b set. Check byte =
  // {overall parity, c6..c0}; the overall parity covers data and c0..c6.
  typedef logic [WORD_W-1:0][6:0] pos_tab_t;
  typedef logic [6:0][WORD_W-1:0] mask_tab_t;

  function automatic pos_tab_t make_data_pos();
    pos_tab_t t;
    int       k;
    k = 0;
    for (int pos = 3; pos < 72; pos++) begin
      if ((pos & (pos - 1)) != 0) begin
        t[k] = 7'(pos);
        k++;
      end
    end
    return t;
  endfunction

  localparam pos_tab_t DATA_POS = make_data_pos();

  function automatic mask_tab_t make_check_masks();
    mask_tab_t m;
    for (int b = 0; b < 7; b++)
      for (int k = 0; k < WORD_W; k++) m[b][k] = DATA_POS[k][b];
    return m;
  endfunction

  localparam mask_tab_t CHECK_MASK = make_check_masks();

  function automatic logic [7:0] secded_check(logic [WORD_W-1:0] d);
    logic [6:0] c;
    for (int b = 0; b < 7; b++) c[b] = ^(d & CHECK_MASK[b]);
    return {^d ^ ^c, c};
  endfunction

  typedef struct packed {
    logic [WORD_W-1:0] data;   // corrected data
    logic              fixed;  // a single-bit error was corrected
    logic              fatal;  // a double-bit error was detected
  } secded_res_t;

  function automatic secded_res_t secded_decode(logic [WORD_W-1:0] d, logic [7:0] chk);
    logic [6:0]  syn;
    logic        pe;
    secded_res_t r;
    syn = secded_check(d)[6:0] ^ chk[6:0];
    // Overall parity of the received codeword (data, check bits and parity).
    pe  = ^d ^ ^chk;
    r.data  = d;
    r.fixed = 1'b0;
    r.fatal = 1'b0;
    if (syn != '0 && pe && int'(syn) > 71) begin
      r.fatal = 1'b1;                     // odd number of errors, no valid position
    end else if (syn != '0 && pe) begin
      // Single error at codeword position syn: flip it if it is a data bit.
      for (int k = 0; k < WORD_W; k++) if (syn == DATA_POS[k]) r.data[k] = ~d[k];
      r.fixed = 1'b1;
    end else if (syn == '0 && pe) begin
      r.fixed = 1'b1;                     // the overall parity bit itself
    end else if (syn != '0) begin
      r.fatal = 1'b1;                     // even number of errors
    end
    return r;
  endfunction

endpackage
