// tb_l2_data_array: writes and reads random lines of the full-size array.
// Checks contents (line and parity) against an associative-array model and
// that done comes exactly LAT = 12 cycles after each request.
module tb_l2_data_array;
  localparam int LAT = 12;
  logic clk = 0, rst_n = 0, req = 0, we = 0, busy, done;
  logic [13:0]  idx;
  logic [511:0] wdata, rdata;
  logic [7:0]   wpar, rpar;
  logic [519:0] model [int];
  int checks = 0, failures = 0;

  l2_data_array dut (.clk, .rst_n, .req, .we, .idx, .wdata, .wpar, .busy, .done, .rdata, .rpar);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic access(logic w, logic [13:0] i);
    int cyc = 0;
    @(negedge clk);
    req = 1; we = w; idx = i;
    if (w) begin
      for (int k = 0; k < 16; k++) wdata[k*32 +: 32] = $urandom;
      wpar = 8'($urandom);
      model[int'(i)] = {wpar, wdata};
    end
    @(negedge clk);
    req = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++;
    if (cyc != LAT) begin
      failures++;
      $display("FAIL latency %0d", cyc);
    end
    if (!w) begin
      checks++;
      if ({rpar, rdata} !== model[int'(i)]) begin
        failures++;
        $display("FAIL read line %0d", i);
      end
    end
  endtask

  initial begin
    logic [13:0] written [$];
    repeat (3) @(negedge clk);
    rst_n = 1;
    access(1'b1, 14'd0);
    access(1'b1, 14'd16383);
    written.push_back(0);
    written.push_back(16383);
    for (int n = 0; n < 300; n++) begin
      if (n % 2 == 0) begin
        logic [13:0] i = 14'($urandom);
        access(1'b1, i);
        written.push_back(i);
      end else begin
        access(1'b0, written[$urandom_range(written.size() - 1)]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
