// Self-checking testbench of fp32_add: random normal operands (exponent spread small
// enough that the double-precision sum is exact), directed special cases, and a
// comparison against the double-precision reference rounded to single precision.
module tb_fp32_add;
  import fp32_ref_pkg::*;

  logic [31:0] a, b, y;
  int checks = 0, failures = 0;

  fp32_add dut (.a(a), .b(b), .y(y));

  task automatic check(input logic [31:0] exp_y, input string what);
    #1;
    checks++;
    if (y !== exp_y) begin
      failures++;
      if (failures < 10) $display("FAIL %s: %h + %h = %h, expected %h", what, a, b, y, exp_y);
    end
  endtask

  function automatic logic [31:0] rnd_float();
    logic [31:0] f;
    f[31]    = 1'($urandom);
    f[30:23] = 8'(110 + ($urandom % 28));
    f[22:0]  = 23'($urandom);
    return f;
  endfunction

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // Directed cases.
    a = 32'h3F80_0000; b = 32'h3F80_0000; check(32'h4000_0000, "1+1");
    a = 32'h3F80_0000; b = 32'hBF80_0000; check(32'h0000_0000, "1-1");
    a = 32'h4049_0FDB; b = 32'h0000_0000; check(32'h4049_0FDB, "pi+0");
    a = 32'h7F80_0000; b = 32'h3F80_0000; check(32'h7F80_0000, "inf+1");
    a = 32'h7F80_0000; b = 32'hFF80_0000; check(32'h7FC0_0000, "inf-inf");
    a = 32'h7F7F_FFFF; b = 32'h7F7F_FFFF; check(32'h7F80_0000, "overflow");
    a = 32'h3F80_0000; b = 32'h3380_0000; check(32'h3F80_0000, "tie to even");
    a = 32'h3F80_0001; b = 32'h3380_0000; check(32'h3F80_0002, "tie to odd up");
    // Random cases against the reference.
    for (int i = 0; i < 20000; i++) begin
      logic [31:0] e;
      a = rnd_float();
      b = rnd_float();
      e = r2f(f2r(a) + f2r(b));
      check(e, "random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
