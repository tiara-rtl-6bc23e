// tb_tiara_regfile: parameter load, writes and three-port reads of the
// 16 x 64-bit register file against a shadow array.
module tb_tiara_regfile;
  import tiara_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic load_params, we;
  logic [7:0][63:0] params;
  logic [3:0] waddr, ra1, ra2, ra3;
  logic [63:0] wdata, rd1, rd2, rd3;
  logic [63:0] shadow [16];

  tiara_regfile dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_all();
    for (int i = 0; i < 16; i++) begin
      ra1 = 4'(i); ra2 = 4'(15 - i); ra3 = 4'((i + 5) % 16);
      #1;
      checks += 3;
      if (rd1 !== shadow[i] || rd2 !== shadow[15-i] || rd3 !== shadow[(i+5)%16]) begin
        failures++;
        $display("read mismatch at %0d: %h/%h", i, rd1, shadow[i]);
      end
    end
  endtask

  initial begin
    load_params = 0; we = 0; params = '0; waddr = 0; wdata = 0; ra1 = 0; ra2 = 0; ra3 = 0;
    for (int i = 0; i < 16; i++) shadow[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk); check_all();
    for (int round = 0; round < 20; round++) begin
      @(negedge clk);
      for (int i = 0; i < 8; i++) params[i] = {$urandom, $urandom};
      load_params = 1;
      @(negedge clk);
      load_params = 0;
      for (int i = 0; i < 16; i++) shadow[i] = (i < 8) ? params[i] : 0;
      check_all();
      repeat (10) begin
        @(negedge clk);
        we = 1; waddr = 4'($urandom); wdata = {$urandom, $urandom};
        @(negedge clk);
        we = 0; shadow[waddr] = wdata;
      end
      check_all();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
