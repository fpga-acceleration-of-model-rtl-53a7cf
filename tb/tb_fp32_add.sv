// tb_fp32_add -- self-checking test of the fp32 adder/subtractor against the
// double-precision reference. Covers random operands of similar and of very
// different magnitude, exact cancellation, zero operands and operands close
// enough to cancel many bits.
module tb_fp32_add;
  import fp_ref_pkg::*;

  logic [31:0] a, b, y, exp_y;
  logic        sub;
  int          checks = 0, failures = 0;

  fp32_add dut (.a(a), .b(b), .sub(sub), .y(y));

  task automatic check();
    #1;
    exp_y = sub ? ref_sub(a, b) : ref_add(a, b);
    checks++;
    if (y !== exp_y) begin
      failures++;
      if (failures < 10) $display("FAIL a=%h b=%h sub=%0d y=%h exp=%h", a, b, sub, y, exp_y);
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
    // directed cases
    a = 32'h3F80_0000; b = 32'h3F80_0000; sub = 0; check();  // 1 + 1
    a = 32'h3F80_0000; b = 32'h3F80_0000; sub = 1; check();  // 1 - 1 = +0
    a = 32'h4049_0FDB; b = 32'h0000_0000; sub = 0; check();  // pi + 0
    a = 32'h0000_0000; b = 32'h4049_0FDB; sub = 1; check();  // 0 - pi
    a = 32'h3F80_0000; b = 32'h3380_0000; sub = 0; check();  // 1 + 2^-24 (tie)
    a = 32'h3F80_0001; b = 32'h3380_0000; sub = 0; check();  // tie, odd
    a = 32'h3F80_0000; b = 32'h3380_0001; sub = 1; check();
    for (int i = 0; i < 20000; i++) begin
      a = rand_fp(i % 3 == 0 ? 40 : 4);
      b = rand_fp(i % 3 == 0 ? 40 : 4);
      sub = 1'($urandom);
      check();
    end
    // near cancellation
    for (int i = 0; i < 5000; i++) begin
      a = rand_fp(3);
      b = {a[31], a[30:0] + 31'($urandom_range(40, 0)) - 31'd20};
      sub = 1;
      check();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
