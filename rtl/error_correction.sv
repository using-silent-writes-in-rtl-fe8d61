// error_correction: repairs a dirty L2 line from its block-ECC.
//
// Used when the parity check of an L2 read fails on a dirty line, whose only
// correct copy is the line itself plus its ECC. Each 64-bit word is decoded
// with the (72,64) SEC-DED code of ecc_calc: a single flipped bit is corrected,
// two flipped bits in one word are reported as uncorrectable. That the line is
// corrected with an ECC fetched from L2 or from memory follows the paper; the
// code is this design's choice.
//
// Interface: data and ecc in; corrected line, number of words that had a
// corrected error, and an uncorrectable flag out. Timing: combinational.
module error_correction
#(
  parameter int unsigned BLK_W = 512
) (
  input  logic [BLK_W-1:0]   data,
  input  logic [BLK_W/8-1:0] ecc,
  output logic [BLK_W-1:0]   corrected,
  output logic [3:0]          n_fixed,
  output logic                uncorrectable
);

  localparam int unsigned NW = BLK_W / tcc_pkg::WORD_W;

  always_comb begin
    tcc_pkg::secded_res_t r;
    n_fixed       = '0;
    uncorrectable = 1'b0;
    for (int w = 0; w < NW; w++) begin
      r = tcc_pkg::secded_decode(data[w*tcc_pkg::WORD_W +: tcc_pkg::WORD_W], ecc[w*8 +: 8]);
      corrected[w*tcc_pkg::WORD_W +: tcc_pkg::WORD_W] = r.data;
      n_fixed       = n_fixed + 4'(r.fixed);
      uncorrectable = uncorrectable | r.fatal;
    end
  end

endmodule
