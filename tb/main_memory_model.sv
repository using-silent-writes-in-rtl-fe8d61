// main_memory_model: behavioural model of main memory for the testbenches
// (not synthesizable logic; a stand-in for the DRAM that the cache talks to).
//
// One 64-byte block per request. A request is accepted when the model is idle
// and answered after FIRST + (CHUNKS-1)*INTER cycles, the first-chunk and
// inter-chunk latencies of the evaluated system (512 and 128 cycles, 8 chunks
// of 8 bytes). Reads return the stored block, or init_block(addr) for a block
// never written; writes are acknowledged with a response too. Counts reads and
// writes.
module main_memory_model #(
  parameter int unsigned FIRST  = 512,
  parameter int unsigned INTER  = 128,
  parameter int unsigned CHUNKS = 8
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         req_valid,
  output logic         req_ready,
  input  logic         req_we,
  input  logic [31:0]  req_addr,
  input  logic [511:0] req_wdata,
  output logic         resp_valid,
  output logic [511:0] resp_rdata
);

  logic [511:0] mem [logic [31:0]];
  int unsigned  cnt;
  logic         busy;
  logic         p_we;
  logic [31:0]  p_addr;
  logic [511:0] p_wdata;
  int unsigned  reads, writes;

  // Contents of a block never written: each 32-bit word is a hash of the
  // block address and the word number.
  function automatic logic [511:0] init_block(logic [31:0] a);
    logic [511:0] b;
    for (int w = 0; w < 16; w++) b[w*32 +: 32] = (a ^ 32'h9E37_79B9) * (w + 3) + 32'h0123_4567 * w;
    return b;
  endfunction

  function automatic logic [511:0] peek(logic [31:0] a);
    return mem.exists(a) ? mem[a] : init_block(a);
  endfunction

  assign req_ready = !busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; resp_valid <= 1'b0; cnt <= 0; reads <= 0; writes <= 0;
    end else begin
      resp_valid <= 1'b0;
      if (!busy && req_valid) begin
        busy <= 1'b1; p_we <= req_we; p_addr <= {req_addr[31:6], 6'b0}; p_wdata <= req_wdata;
        cnt  <= FIRST + (CHUNKS - 1) * INTER - 1;
      end else if (busy) begin
        if (cnt == 0) begin
          busy <= 1'b0;
          resp_valid <= 1'b1;
          if (p_we) begin
            mem[p_addr] = p_wdata;
            writes <= writes + 1;
          end else begin
            resp_rdata <= peek(p_addr);
            reads <= reads + 1;
          end
        end else cnt <= cnt - 1;
      end
    end
  end

endmodule
