// tb_fp32_mul -- self-checking test of the fp32 multiplier against the
// double-precision reference: random operands over a wide exponent range,
// products that overflow into the next binade, zero operands, and a product
// below the smallest normal number (flushed to zero).
module tb_fp32_mul;
  import fp_ref_pkg::*;

  logic [31:0] a, b, y, exp_y;
  int          checks = 0, failures = 0;

  fp32_mul dut (.a(a), .b(b), .y(y));

  task automatic check();
    #1;
    exp_y = ref_mul(a, b);
    checks++;
    if (y !== exp_y) begin
      failures++;
      if (failures < 10) $display("FAIL a=%h b=%h y=%h exp=%h", a, b, y, exp_y);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    a = 32'h3FC0_0000; b = 32'h3FC0_0000; check();  // 1.5 * 1.5
    a = 32'h4049_0FDB; b = 32'h0000_0000; check();  // pi * 0
    a = 32'hBF80_0000; b = 32'h4049_0FDB; check();  // -1 * pi
    a = 32'h0080_0000; b = 32'h3F00_0000; check();  // underflow -> 0
    a = 32'h7F00_0000; b = 32'h4000_0000; check();  // overflow -> inf
    for (int i = 0; i < 20000; i++) begin
      a = rand_fp(i % 2 == 0 ? 60 : 5);
      b = rand_fp(i % 2 == 0 ? 60 : 5);
      check();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
