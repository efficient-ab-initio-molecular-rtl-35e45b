// tb_transpose2d: self-checking test of the double-buffered plane transpose at its default size.
//
// Each input point carries its own coordinates (plane, y, kx) as data, where kx is the bit-reversed
// position the 1D FFT would give it, so every output point can be checked against the expected
// coordinates (plane, kx = output row, y = 8b+l). Phase 1 runs at full rate with the consumer
// always ready and checks that the writer never waits (the two banks hide the transpose) and that
// P planes leave P*N*N/8 cycles after the first one is complete. Phase 2 adds random gaps and
// back-pressure.
module tb_transpose2d;
  import fft3d_pkg::*;

  localparam int N    = 64;
  localparam int NB   = N / LANES;
  localparam int LOGN = $clog2(N);
  localparam int P    = 4;

  logic  clk = 0, rst_n = 1, in_valid = 0, in_ready, out_valid, out_ready = 1, overlap;
  beat_t in_data = '0, out_data;
  int checks = 0, failures = 0, in_waits = 0, overlaps = 0;
  longint cyc = 0;

  transpose2d dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (in_valid && !in_ready) in_waits++;
    if (overlap) overlaps++;
  end

  function automatic int brev(int v);
    int r = 0;
    for (int k = 0; k < LOGN; k++) r = (r << 1) | ((v >> k) & 1);
    return r;
  endfunction

  function automatic cplx_t tag(int p, int y, int kx);
    cplx_t c;
    c.re = 32'(p * 65536 + y * 256 + kx);
    c.im = ~c.re;
    return c;
  endfunction

  task automatic drive(int base, bit gaps);
    for (int p = 0; p < P; p++)
      for (int y = 0; y < N; y++)
        for (int b = 0; b < NB; b++) begin
          while (gaps && $urandom_range(3) == 0) begin
            in_valid <= 0;
            @(posedge clk);
          end
          in_valid <= 1;
          for (int l = 0; l < LANES; l++) in_data[l] <= tag(base + p, y, brev(b * LANES + l));
          @(posedge clk);
          while (!in_ready) @(posedge clk);
        end
    in_valid <= 0;
  endtask

  longint t_first, t_last;

  task automatic collect(int base, bit gaps);
    for (int p = 0; p < P; p++)
      for (int kx = 0; kx < N; kx++)
        for (int b = 0; b < NB; b++) begin
          do begin
            out_ready <= gaps ? ($urandom_range(2) != 0) : 1'b1;
            @(posedge clk);
          end while (!(out_valid && out_ready));
          if (p == 0 && kx == 0 && b == 0) t_first = cyc - 1;
          t_last = cyc - 1;
          for (int l = 0; l < LANES; l++) begin
            checks++;
            if (out_data[l] !== tag(base + p, b * LANES + l, kx)) begin
              failures++;
              if (failures < 10) $display("FAIL plane %0d row %0d beat %0d lane %0d: %h", p, kx, b, l,
                                          out_data[l].re);
            end
          end
        end
    out_ready <= 1;
  endtask

  initial begin
    longint t0;
    #1 rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    t0 = cyc;
    fork
      drive(0, 0);
      collect(0, 0);
    join
    checks++;
    if (in_waits != 0) begin
      failures++;
      $display("FAIL writer waited %0d cycles at full rate", in_waits);
    end
    checks++;
    if (t_first - t0 != N * NB || t_last - t_first + 1 != P * N * NB) begin
      failures++;
      $display("FAIL timing: first out after %0d (exp %0d), %0d cycles for %0d planes (exp %0d)",
               t_first - t0, N * NB, t_last - t_first + 1, P, P * N * NB);
    end
    fork
      drive(16, 1);
      collect(16, 1);
    join
    checks++;
    if (overlaps == 0 || in_waits == 0) begin
      failures++;
      $display("FAIL overlaps=%0d waits=%0d", overlaps, in_waits);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20 * P * N * NB + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
