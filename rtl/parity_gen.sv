// parity_gen: interleaved parity of one cache line.
//
// The one-byte parity is the cache's error-detection code (EDC) and, in TCC,
// also the silent-write signature of the line. Bit i of the parity is the XOR
// of data bits i, i+PAR_W, i+2*PAR_W, ... so that a burst of up to PAR_W
// adjacent flipped bits is always detected. One byte per 64-byte line follows
// the paper; the interleaving layout is this design's choice.
//
// Interface: data in, parity out. Timing: purely combinational.
module parity_gen #(
  parameter int unsigned DATA_W = 512,
  parameter int unsigned PAR_W  = 8
) (
  input  logic [DATA_W-1:0] data,
  output logic [PAR_W-1:0]  parity
);

  always_comb begin
    parity = '0;
    for (int j = 0; j < DATA_W; j++) parity[j % PAR_W] ^= data[j];
  end

endmodule
