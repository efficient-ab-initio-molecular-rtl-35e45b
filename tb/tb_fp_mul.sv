// tb_fp_mul: self-checking test of the single-precision multiplier. The product of two singles is
// exact in double precision, so rounding it once gives the IEEE result, which is compared bit for
// bit with the unit's output. A set of exact ties checks the ties-to-even rule; special cases
// are checked explicitly.
module tb_fp_mul;
  import tb_fp_pkg::*;

  logic [31:0] a, b, y;
  int checks = 0, failures = 0;

  fp_mul dut (.a(a), .b(b), .y(y));

  task automatic check_exact(logic [31:0] x, logic [31:0] z, logic [31:0] exp_y);
    a = x; b = z;
    #1;
    checks++;
    if (y !== exp_y) begin
      failures++;
      if (failures < 10) $display("FAIL mul %h * %h = %h, expected %h", x, z, y, exp_y);
    end
  endtask

  initial begin
    logic [31:0] x, z;
    for (int i = 0; i < 20000; i++) begin
      x = {1'($urandom), 8'(64 + $urandom_range(126)), 23'($urandom)};
      z = {1'($urandom), 8'(64 + $urandom_range(126)), 23'($urandom)};
      check_exact(x, z, r2f(f2r(x) * f2r(z)));
    end
    // Exact ties: 3 * (1 + (2m+1) 2^-23) lies halfway between two singles.
    for (int i = 0; i < 2000; i++) begin
      x = 32'h4040_0000;
      z = {9'h07f, 22'($urandom), 1'b1};
      check_exact(x, z, r2f(f2r(x) * f2r(z)));
    end
    check_exact(32'h3f80_0000, 32'hc049_0fdb, 32'hc049_0fdb);  // 1 * -pi
    check_exact(32'h0000_0000, 32'hc049_0fdb, 32'h8000_0000);  // 0 * -pi = -0
    check_exact(32'h7f80_0000, 32'h0000_0000, 32'h7fc0_0000);  // inf * 0
    check_exact(32'h7f00_0000, 32'h7f00_0000, 32'h7f80_0000);  // overflow
    check_exact(32'h0100_0000, 32'h0100_0000, 32'h0000_0000);  // underflow, flushed
    check_exact(32'h3fc0_0000, 32'h4000_0000, 32'h4040_0000);  // 1.5 * 2 = 3
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
