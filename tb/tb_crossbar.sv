// tb_crossbar: random scratchpad contents and random affine patterns
// (base, stride, grp8), every lane compared with (base + j*stride) mod 512.
module tb_crossbar;
  import inerf_pkg::*;
  word_t din [SPM_WORDS];
  word_t dout [ROW_WORDS];
  logic [8:0] base, stride;
  logic grp8;
  int checks = 0, failures = 0;

  crossbar dut (.din, .base, .stride, .grp8, .dout);

  initial begin
    for (int t = 0; t < 200; t++) begin
      for (int w = 0; w < SPM_WORDS; w++) din[w] = $urandom;
      base = 9'($urandom); stride = (t % 5 == 0) ? 9'd0 : 9'($urandom_range(0, 20)); grp8 = 1'($urandom);
      #1;
      for (int i = 0; i < ROW_WORDS; i++) begin
        int j;
        j = grp8 ? i / 8 : i;
        checks++;
        if (dout[i] !== din[(int'(base) + j * int'(stride)) % SPM_WORDS]) begin
          failures++;
          if (failures < 10) $display("FAIL lane %0d base %0d stride %0d grp8 %b", i, base, stride, grp8);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
