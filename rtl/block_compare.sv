// block_compare: confirms a silent write by comparing the old and new line.
//
// When the parity signature of a ready-to-write line equals the stored one,
// the write may still change the line (about 2% of non-silent writes in the
// paper's runs). The old line read from L2 is then compared with the new one.
// The paper sizes this comparator at 64 bits, so one 64-bit comparator is used
// once per word: word 0 in the cycle after start, word 1 in the next, and so
// on. It stops at the first unequal word (this early exit is this design's).
//
// Interface: start (one cycle, a and b held stable until done), done (one-cycle
// pulse), equal (valid with done). Timing: done comes k cycles after start,
// where k is the number of the first unequal word plus one, or DATA_W/CMP_W
// (8) when the lines are equal.
module block_compare #(
  parameter int unsigned DATA_W = 512,
  parameter int unsigned CMP_W  = 64
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [DATA_W-1:0] a,
  input  logic [DATA_W-1:0] b,
  output logic              done,
  output logic              equal
);

  localparam int unsigned NW  = DATA_W / CMP_W;
  localparam int unsigned CW  = (NW > 1) ? $clog2(NW) : 1;

  logic          busy;
  logic [CW-1:0] word;
  logic          word_eq;

  // The one 64-bit comparator.
  assign word_eq = (a[word*CMP_W +: CMP_W] == b[word*CMP_W +: CMP_W]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      word  <= '0;
      done  <= 1'b0;
      equal <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) begin
        busy <= 1'b1;
        word <= '0;
      end else if (busy) begin
        if (!word_eq || word == CW'(NW - 1)) begin
          busy  <= 1'b0;
          done  <= 1'b1;
          equal <= word_eq;
        end
        word <= word + 1'b1;
      end
    end
  end

endmodule
