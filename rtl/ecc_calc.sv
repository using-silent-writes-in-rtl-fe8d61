// ecc_calc: block-ECC of one 64-byte cache line.
//
// The line is cut into eight 64-bit words and each word gets the check byte of
// an extended-Hamming (72,64) SEC-DED code (tcc_pkg::secded_check). The eight
// check bytes form the 8-byte block-ECC that TCC stores in a memory-mapped ECC
// line; byte w protects data word w. The 8-byte size and the SEC-DED code
// follow the paper; splitting it into per-word (72,64) codes is this design's.
//
// Interface: data in, ecc out. Timing: purely combinational.
module ecc_calc
#(
  parameter int unsigned BLK_W = 512
) (
  input  logic [BLK_W-1:0]   data,
  output logic [BLK_W/8-1:0] ecc
);

  localparam int unsigned NW = BLK_W / tcc_pkg::WORD_W;

  always_comb begin
    for (int w = 0; w < NW; w++) ecc[w*8 +: 8] = tcc_pkg::secded_check(data[w*tcc_pkg::WORD_W +: tcc_pkg::WORD_W]);
  end

endmodule
