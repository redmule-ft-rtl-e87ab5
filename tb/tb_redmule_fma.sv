// tb_redmule_fma: checks the FP16 FMA against a double-precision reference on
// random operands (normal and subnormal ranges) and on directed special cases.
module tb_redmule_fma;
  import tb_fp16_pkg::*;
  logic [15:0] a, b, c, r;
  int checks = 0, failures = 0;

  redmule_fma dut (.a_i(a), .b_i(b), .c_i(c), .r_o(r));

  task automatic check(input logic [15:0] exp);
    #1;
    checks++;
    if (r !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL a=%h b=%h c=%h got=%h exp=%h", a, b, c, r, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // Directed: 1*1+1 = 2, 2*3-1 = 5, inf cases, NaN, zero signs, overflow.
    a = 16'h3c00; b = 16'h3c00; c = 16'h3c00; check(16'h4000);
    a = 16'h4000; b = 16'h4200; c = 16'hbc00; check(16'h4500);
    a = 16'h7c00; b = 16'h3c00; c = 16'h3c00; check(16'h7c00);
    a = 16'h7c00; b = 16'h0000; c = 16'h3c00; check(16'h7e00);
    a = 16'h7c00; b = 16'h3c00; c = 16'hfc00; check(16'h7e00);
    a = 16'h3c00; b = 16'h3c00; c = 16'hfc00; check(16'hfc00);
    a = 16'h7e01; b = 16'h3c00; c = 16'h3c00; check(16'h7e00);
    a = 16'h8000; b = 16'h3c00; c = 16'h8000; check(16'h8000);
    a = 16'h3c00; b = 16'h3c00; c = 16'hbc00; check(16'h0000);
    a = 16'h7bff; b = 16'h4000; c = 16'h0000; check(16'h7c00);
    a = 16'h0001; b = 16'h3800; c = 16'h0000; check(16'h0000); // 2^-25 ties to even 0
    a = 16'h0003; b = 16'h3800; c = 16'h0000; check(16'h0002); // 1.5 ulp -> 2
    // Random, moderate range.
    for (int i = 0; i < 20000; i++) begin
      a = rand_fp16(8, 22); b = rand_fp16(8, 22); c = rand_fp16(4, 26);
      check(fma_ref(a, b, c));
    end
    // Random, near and below the subnormal range.
    for (int i = 0; i < 20000; i++) begin
      a = rand_fp16(0, 12); b = rand_fp16(0, 14); c = rand_fp16(0, 6);
      check(fma_ref(a, b, c));
    end
    // Cancellation: c close to -a*b.
    for (int i = 0; i < 5000; i++) begin
      a = rand_fp16(10, 20); b = rand_fp16(10, 20);
      c = fma_ref(a, b, 16'h0000) ^ 16'h8000;
      c[1:0] = 2'($urandom);
      check(fma_ref(a, b, c));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
