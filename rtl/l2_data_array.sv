// l2_data_array: data store of the L2 cache, one 64-byte line plus its
// one-byte parity per (set, way).
//
// Stands in for the L2 SRAM macro as a plain array. The parity byte is kept at
// the end of each line as in the paper; the ECC is not stored here (it lives
// in memory-mapped ECC lines, which are ordinary lines of this array). Every
// access takes LAT cycles, the paper's 12-cycle L2 access latency.
//
// Interface: req with we, idx = set*WAYS + way, wdata, wpar. Only one access is
// outstanding; req is ignored while busy. Timing: the array is read or written
// at the clock edge that samples req; done is high for one cycle LAT cycles
// after the req cycle, with rdata/rpar valid from then until the next read.
module l2_data_array #(
  parameter int unsigned LINES  = 16384,
  parameter int unsigned DATA_W = 512,
  parameter int unsigned PAR_W  = 8,
  parameter int unsigned LAT    = 12
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     req,
  input  logic                     we,
  input  logic [$clog2(LINES)-1:0] idx,
  input  logic [DATA_W-1:0]        wdata,
  input  logic [PAR_W-1:0]         wpar,
  output logic                     busy,
  output logic                     done,
  output logic [DATA_W-1:0]        rdata,
  output logic [PAR_W-1:0]         rpar
);

  logic [DATA_W+PAR_W-1:0] mem [LINES];
  logic [$clog2(LAT+1)-1:0] cnt;

  always_ff @(posedge clk) begin
    if (req && !busy) begin
      if (we) mem[idx] <= {wpar, wdata};
      else    {rpar, rdata} <= mem[idx];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      cnt  <= '0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (req && !busy) begin
        busy <= 1'b1;
        cnt  <= $bits(cnt)'(LAT - 1);
      end else if (busy) begin
        if (cnt == 1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
        cnt <= cnt - 1'b1;
      end
    end
  end

endmodule
