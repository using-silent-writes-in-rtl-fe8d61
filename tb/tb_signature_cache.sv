// tb_signature_cache: random writes and reads against an array model.
// Checks one-cycle read latency and read-before-write on the same address.
module tb_signature_cache;
  logic clk = 0, we = 0, re = 0;
  logic [9:0] waddr, raddr;
  logic [7:0] wdata, rdata;
  logic [7:0] model [1024];
  int checks = 0, failures = 0;

  signature_cache dut (.clk, .we, .waddr, .wdata, .re, .raddr, .rdata);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:0] expv;
    // fill every line
    for (int i = 0; i < 1024; i++) begin
      @(negedge clk) we = 1; waddr = 10'(i); wdata = 8'($urandom); model[i] = wdata;
    end
    @(negedge clk) we = 0;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      re = 1; raddr = 10'($urandom);
      we = $urandom_range(1); waddr = ($urandom_range(3) == 0) ? raddr : 10'($urandom);
      wdata = 8'($urandom);
      expv = model[raddr];
      if (we) model[waddr] = wdata;
      @(posedge clk); #1;
      checks++;
      if (rdata !== expv) begin
        failures++;
        $display("FAIL addr=%0d rdata=%h expected=%h", raddr, rdata, expv);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
