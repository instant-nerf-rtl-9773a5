// tb_bank_addr_gen: word address split into row and column, and the
// intra-level mapping: consecutive rows land in consecutive subarrays.
module tb_bank_addr_gen;
  import inerf_pkg::*;
  logic [31:0] word_addr;
  logic [16:0] rowg, map_rowg;
  logic [7:0] col;
  logic [2:0] sa;
  logic [13:0] sa_row;
  int checks = 0, failures = 0;

  bank_addr_gen dut (.*);

  initial begin
    for (int t = 0; t < 2000; t++) begin
      word_addr = $urandom & 32'h1ff_ffff;
      map_rowg  = 17'(t < 100 ? t : $urandom);
      #1;
      checks++;
      if (col !== word_addr[7:0] || rowg !== word_addr[24:8]) begin failures++; $display("FAIL split"); end
      checks++;
      if (int'(sa) != int'(map_rowg) % 8 || int'(sa_row) != int'(map_rowg) / 8) begin
        failures++; $display("FAIL map row %0d -> sa %0d row %0d", map_rowg, sa, sa_row);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
