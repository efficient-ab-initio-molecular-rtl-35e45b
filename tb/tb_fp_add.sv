// tb_fp_add: self-checking test of the single-precision adder. Random operands whose exponents
// differ by at most 28 (so the double-precision sum is exact and one rounding gives the IEEE
// result) are compared bit for bit; a second set with any exponent distance is compared to within
// one unit in the last place. Special cases (zeros, infinities, NaN, cancellation) are checked
// explicitly.
module tb_fp_add;
  import tb_fp_pkg::*;

  logic [31:0] a, b, y;
  int checks = 0, failures = 0;

  fp_add dut (.a(a), .b(b), .y(y));

  function automatic logic [31:0] rnd_fp(int emin, int emax);
    int e;
    e = emin + int'($urandom_range(emax - emin));
    return {1'($urandom), 8'(e), 23'($urandom)};
  endfunction

  task automatic check_exact(logic [31:0] x, logic [31:0] z, logic [31:0] exp_y);
    a = x; b = z;
    #1;
    checks++;
    if (y !== exp_y) begin
      failures++;
      if (failures < 10) $display("FAIL add %h + %h = %h, expected %h", x, z, y, exp_y);
    end
  endtask

  initial begin
    int ea;
    logic [31:0] x, z, r;
    // exact comparisons
    for (int i = 0; i < 20000; i++) begin
      ea = 60 + int'($urandom_range(120));
      x  = rnd_fp(ea, ea);
      z  = rnd_fp(ea - int'($urandom_range(28)), ea);
      if ($urandom_range(1)) {x, z} = {z, x};
      check_exact(x, z, r2f(f2r(x) + f2r(z)));
    end
    // far-apart exponents: within one ulp
    for (int i = 0; i < 5000; i++) begin
      x = rnd_fp(60, 190);
      z = rnd_fp(60, 190);
      a = x; b = z;
      #1;
      r = r2f(f2r(x) + f2r(z));
      checks++;
      if (!((y == r) || (y == r + 1) || (y == r - 1))) begin
        failures++;
        $display("FAIL add far %h + %h = %h, expected ~%h", x, z, y, r);
      end
    end
    // special cases
    check_exact(32'h3f80_0000, 32'hbf80_0000, 32'h0000_0000);  // 1 - 1 = +0
    check_exact(32'h3f80_0000, 32'h3f80_0000, 32'h4000_0000);  // 1 + 1 = 2
    check_exact(32'h0000_0000, 32'h4049_0fdb, 32'h4049_0fdb);  // 0 + pi
    check_exact(32'h7f80_0000, 32'h3f80_0000, 32'h7f80_0000);  // inf + 1
    check_exact(32'h7f80_0000, 32'hff80_0000, 32'h7fc0_0000);  // inf - inf
    check_exact(32'h7f7f_ffff, 32'h7f7f_ffff, 32'h7f80_0000);  // overflow
    check_exact(32'h3f80_0001, 32'hbf80_0000, 32'h3400_0000);  // cancellation, 2^-23
    check_exact(32'h3f80_0000, 32'h3380_0000, 32'h3f80_0000);  // 1 + 2^-24: tie, to even
    check_exact(32'h3f80_0001, 32'h3380_0000, 32'h3f80_0002);  // tie, odd -> up
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
