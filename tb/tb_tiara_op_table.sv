// tb_tiara_op_table: registers random operators, unregisters some, and
// checks hit/miss and start pc of every op_id one cycle after lookup.
module tb_tiara_op_table;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic cfg_we, cfg_valid, lookup, hit;
  logic [7:0] cfg_op, op;
  logic [9:0] cfg_pc, start_pc;
  bit         sv [256];
  logic [9:0] spc [256];

  tiara_op_table dut (.*);
  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_all();
    for (int i = 0; i < 256; i++) begin
      @(negedge clk);
      lookup = 1; op = 8'(i);
      @(negedge clk);
      lookup = 0; op = 8'(i + 1);
      checks++;
      if (hit !== sv[i] || (sv[i] && start_pc !== spc[i])) begin
        failures++;
        if (failures < 10) $display("op %0d: hit=%b pc=%0d expected %b %0d", i, hit, start_pc, sv[i], spc[i]);
      end
    end
  endtask

  initial begin
    cfg_we = 0; cfg_valid = 0; cfg_op = 0; cfg_pc = 0; lookup = 0; op = 0;
    for (int i = 0; i < 256; i++) begin sv[i] = 0; spc[i] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    check_all();
    for (int round = 0; round < 3; round++) begin
      repeat (120) begin
        @(negedge clk);
        cfg_we = 1; cfg_op = 8'($urandom); cfg_valid = ($urandom_range(0, 3) != 0);
        cfg_pc = 10'($urandom);
        sv[cfg_op] = cfg_valid; spc[cfg_op] = cfg_pc;
      end
      @(negedge clk); cfg_we = 0;
      check_all();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
