// tb_level_bank_map: the level grouping {0-4}, {5-8}, {9-10}, 11, ..., 15
// and its bank assignment for a 16-bank and a 4-bank die.
module tb_level_bank_map;
  logic [3:0] level;
  logic [2:0] unit16, unit4;
  logic [3:0] owner16;
  logic [1:0] owner4;
  int checks = 0, failures = 0;
  // expected unit of each level
  int exp_unit [16] = '{0,0,0,0,0, 1,1,1,1, 2,2, 3, 4, 5, 6, 7};

  level_bank_map #(.N_BANKS(16)) dut16 (.level, .unit_id(unit16), .owner(owner16));
  level_bank_map #(.N_BANKS(4))  dut4  (.level, .unit_id(unit4),  .owner(owner4));

  initial begin
    for (int l = 0; l < 16; l++) begin
      level = 4'(l); #1;
      checks++;
      if (int'(unit16) != exp_unit[l] || int'(owner16) != exp_unit[l] || int'(owner4) != exp_unit[l] % 4) begin
        failures++; $display("FAIL level %0d unit %0d owner %0d/%0d", l, unit16, owner16, owner4);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #10000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
