// tb_tiara_istore: writes random words to the 1024-entry instruction store,
// reads them back and checks the one-cycle read latency and that the output
// holds while 're' is low.
module tb_tiara_istore;
  int checks = 0, failures = 0;
  logic clk = 0;
  logic we, re;
  logic [9:0] waddr, raddr;
  logic [63:0] wdata, rdata;
  logic [63:0] shadow [1024];

  tiara_istore dut (.*);
  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; re = 0; waddr = 0; raddr = 0; wdata = 0;
    for (int i = 0; i < 1024; i++) begin
      @(negedge clk);
      we = 1; waddr = 10'(i); wdata = {$urandom, $urandom}; shadow[i] = wdata;
    end
    @(negedge clk); we = 0;
    for (int k = 0; k < 2000; k++) begin
      int a;
      a = $urandom_range(0, 1023);
      @(negedge clk);
      re = 1; raddr = 10'(a);
      @(negedge clk);
      re = 0;
      checks++;
      if (rdata !== shadow[a]) begin
        failures++;
        $display("mismatch at %0d", a);
      end
      raddr = 10'(a ^ 1);
      @(negedge clk);
      checks++;
      if (rdata !== shadow[a]) failures++;   // held while re = 0
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
