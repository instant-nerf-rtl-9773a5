// tb_morton_hash: checks the Morton hash against a bit-by-bit reference
// model, including the example f(1011b) = 1000001001b, for random
// coordinates at the default 11-bit/2^19 size and at a small T.
module tb_morton_hash;
  localparam int CW = 11;
  localparam int LT = 19;
  logic [CW-1:0] x0, x1, x2;
  logic [LT-1:0] idx;
  logic [7:0]    idx_s;
  int checks = 0, failures = 0;

  morton_hash #(.COORD_W(CW), .LOG2_T(LT)) dut   (.x0, .x1, .x2, .idx);
  morton_hash #(.COORD_W(CW), .LOG2_T(8))  dut_s (.x0, .x1, .x2, .idx(idx_s));

  function automatic longint unsigned ref_code(int a, int b, int c);
    longint unsigned r = 0;
    for (int k = 0; k < CW; k++) begin
      r |= longint'((a >> k) & 1) << (3*k);
      r |= longint'((b >> k) & 1) << (3*k+1);
      r |= longint'((c >> k) & 1) << (3*k+2);
    end
    return r;
  endfunction

  task automatic check(int a, int b, int c);
    longint unsigned r;
    x0 = CW'(a); x1 = CW'(b); x2 = CW'(c);
    #1;
    r = ref_code(a, b, c);
    checks++;
    if (idx !== LT'(r % (64'd1 << LT))) begin
      failures++; $display("FAIL (%0d,%0d,%0d) got %h exp %h", a, b, c, idx, r);
    end
    checks++;
    if (idx_s !== 8'(r)) begin
      failures++; $display("FAIL small T (%0d,%0d,%0d)", a, b, c);
    end
  endtask

  initial begin
    // Example printed with the formula: f(1011b) = 1000001001b.
    check(11, 0, 0);
    checks++; if (idx !== LT'(10'b1000001001)) failures++;
    check(0, 1, 0); check(0, 0, 1); check(7, 7, 7);
    for (int n = 0; n < 2000; n++)
      check(int'($urandom_range(0, 2047)), int'($urandom_range(0, 2047)), int'($urandom_range(0, 2047)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
