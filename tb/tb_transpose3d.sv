// tb_transpose3d: self-checking test of the cube transpose at a reduced size (N = 16, 4096
// points; the default N = 64 is exercised by the full-size system test).
//
// Each input point carries its coordinates (cube, kx, ky, z) as data, with ky at the bit-reversed
// position the y-direction FFT gives it. Two cubes are sent back to back: the test checks that
// every output point has the expected coordinates (rows in order ky outer, kx inner, lane = z),
// that input is refused for the whole drain of the first cube (the stall the single buffer
// causes), that the first output follows the last input by one cycle, and that a cube drains in
// N^3/8 cycles. The second cube uses random gaps and back-pressure.
module tb_transpose3d;
  import fft3d_pkg::*;

  localparam int N    = 16;
  localparam int NB   = N / LANES;
  localparam int LOGN = $clog2(N);
  localparam int BEATS = N * N * NB;

  logic  clk = 0, rst_n = 1, in_valid = 0, in_ready, out_valid, out_ready = 1, filling;
  beat_t in_data = '0, out_data;
  int checks = 0, failures = 0, refused = 0, fill_cycles = 0;
  longint cyc = 0;

  transpose3d #(.N(N)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (in_valid && !in_ready) refused++;
    if (filling) fill_cycles++;
  end

  function automatic int brev(int v);
    int r = 0;
    for (int k = 0; k < LOGN; k++) r = (r << 1) | ((v >> k) & 1);
    return r;
  endfunction

  function automatic cplx_t tag(int c, int kx, int ky, int z);
    cplx_t t;
    t.re = 32'(c * 16777216 + kx * 65536 + ky * 256 + z);
    t.im = ~t.re;
    return t;
  endfunction

  longint t_last_in, t_first_out [2], t_last_out [2];

  task automatic drive(int c, bit gaps);
    for (int z = 0; z < N; z++)
      for (int kx = 0; kx < N; kx++)
        for (int b = 0; b < NB; b++) begin
          while (gaps && $urandom_range(3) == 0) begin
            in_valid <= 0;
            @(posedge clk);
          end
          in_valid <= 1;
          for (int l = 0; l < LANES; l++) in_data[l] <= tag(c, kx, brev(b * LANES + l), z);
          @(posedge clk);
          while (!in_ready) @(posedge clk);
          t_last_in = cyc - 1;
        end
    in_valid <= 0;
  endtask

  task automatic collect(int c, bit gaps);
    for (int ky = 0; ky < N; ky++)
      for (int kx = 0; kx < N; kx++)
        for (int b = 0; b < NB; b++) begin
          do begin
            out_ready <= gaps ? ($urandom_range(2) != 0) : 1'b1;
            @(posedge clk);
          end while (!(out_valid && out_ready));
          if (ky == 0 && kx == 0 && b == 0) t_first_out[c] = cyc - 1;
          t_last_out[c] = cyc - 1;
          for (int l = 0; l < LANES; l++) begin
            checks++;
            if (out_data[l] !== tag(c, kx, ky, b * LANES + l)) begin
              failures++;
              if (failures < 10) $display("FAIL cube %0d row (%0d,%0d) beat %0d lane %0d: %h", c,
                                          kx, ky, b, l, out_data[l].re);
            end
          end
        end
    out_ready <= 1;
  endtask

  initial begin
    longint t_in0;
    #1 rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    fork
      begin
        drive(0, 0);
        t_in0 = t_last_in;
        drive(1, 1);
      end
      begin
        collect(0, 0);
        collect(1, 1);
      end
    join
    checks++;
    if (t_first_out[0] != t_in0 + 1 || t_last_out[0] - t_first_out[0] + 1 != BEATS) begin
      failures++;
      $display("FAIL cube 0 timing: first out %0d after last in %0d, drain %0d cycles (exp %0d)",
               t_first_out[0], t_in0, t_last_out[0] - t_first_out[0] + 1, BEATS);
    end
    checks++;
    if (refused < BEATS - 1) begin
      failures++;
      $display("FAIL input refused for %0d cycles, expected the whole drain (%0d)", refused, BEATS);
    end
    checks++;
    if (fill_cycles < 2 * (BEATS - 1)) begin
      failures++;
      $display("FAIL filling flag high for %0d cycles only", fill_cycles);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20 * BEATS + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
