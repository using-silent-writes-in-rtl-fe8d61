// signature_cache: one signature byte per L1 data-cache line.
//
// When L2 fills a line into the L1, the line's parity (its signature) is
// written here at the L1 line number; when the L1 writes the line back, the
// stored signature is read and compared with the parity of the new data. As in
// the paper it has as many entries as the L1 has lines and one byte per entry.
// Indexing by the L1 line number (L1 set and way, given with every request) is
// this design's choice. There is no valid bit and no reset: a stale entry can
// only make a silent write look non-silent or cost one block comparison.
//
// Interface: one write port and one read port. Timing: synchronous read, data
// one cycle after re; a read of the entry written in the same cycle returns
// the old value.
module signature_cache #(
  parameter int unsigned LINES = 1024,
  parameter int unsigned SIG_W = 8
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(LINES)-1:0] waddr,
  input  logic [SIG_W-1:0]         wdata,
  input  logic                     re,
  input  logic [$clog2(LINES)-1:0] raddr,
  output logic [SIG_W-1:0]         rdata
);

  logic [SIG_W-1:0] mem [LINES];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end

endmodule
