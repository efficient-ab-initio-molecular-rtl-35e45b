// tb_fft1d: self-checking test of the streaming 1D FFT at its default size.
//
// Phase 1 streams FRAMES random frames back to back with the consumer always ready and checks
// the timing: the first output beat appears (log2 N + 1) * N/8 cycles after the first input beat,
// and the FRAMES frames leave in FRAMES * N/8 consecutive cycles (one transform per N/8 cycles).
// Phase 2 repeats with random gaps on the input and random back-pressure on the output, which
// also exercises the empty "bubble" slots that drain the pipeline. Every output point is compared
// with a direct DFT computed in double precision, X[k] = sum x[n] exp(-2 pi i n k / N), at
// position bitrev(k), to a tolerance scaled by the frame's magnitude.
module tb_fft1d;
  import fft3d_pkg::*;
  import tb_fp_pkg::*;

  localparam int N      = 64;
  localparam int LOGN   = $clog2(N);
  localparam int NB     = N / LANES;
  localparam int FRAMES = 12;

  logic  clk = 0, rst_n = 1;
  logic  in_valid = 0, in_ready, out_valid, out_ready = 1, bubble;
  beat_t in_data = '0, out_data;
  int checks = 0, failures = 0;
  int bubbles = 0, stalls = 0;
  longint cyc = 0;

  fft1d dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (bubble) bubbles <= bubbles + 1;
    if (out_valid && !out_ready) stalls <= stalls + 1;
  end

  real xr [FRAMES][N], xi [FRAMES][N];

  function automatic int brev(int v);
    int r = 0;
    for (int k = 0; k < LOGN; k++) r = (r << 1) | ((v >> k) & 1);
    return r;
  endfunction

  task automatic make_frames();
    for (int f = 0; f < FRAMES; f++)
      for (int n = 0; n < N; n++) begin
        xr[f][n] = f2r(r2f((real'($urandom_range(2000)) - 1000.0) / 100.0));
        xi[f][n] = f2r(r2f((real'($urandom_range(2000)) - 1000.0) / 100.0));
      end
  endtask

  task automatic drive(bit gaps);
    for (int f = 0; f < FRAMES; f++)
      for (int b = 0; b < NB; b++) begin
        while (gaps && $urandom_range(3) == 0) begin
          in_valid <= 0;
          @(posedge clk);
        end
        in_valid <= 1;
        for (int l = 0; l < LANES; l++) begin
          in_data[l].re <= r2f(xr[f][b*LANES+l]);
          in_data[l].im <= r2f(xi[f][b*LANES+l]);
        end
        @(posedge clk);
        while (!in_ready) @(posedge clk);
      end
    in_valid <= 0;
  endtask

  longint first_in, first_out, last_out;

  task automatic collect(bit gaps);
    real yr [N], yi [N];
    real er, ei, sr, si, mag, tol;
    int  kk;
    for (int f = 0; f < FRAMES; f++) begin
      for (int b = 0; b < NB; b++) begin
        do begin
          out_ready <= gaps ? ($urandom_range(3) != 0) : 1'b1;
          @(posedge clk);
        end while (!(out_valid && out_ready));
        if (f == 0 && b == 0) first_out = cyc - 1;
        last_out = cyc - 1;
        for (int l = 0; l < LANES; l++) begin
          yr[b*LANES+l] = f2r(out_data[l].re);
          yi[b*LANES+l] = f2r(out_data[l].im);
        end
      end
      mag = 0.0;
      for (int n = 0; n < N; n++) mag += fabs(xr[f][n]) + fabs(xi[f][n]);
      tol = mag * 4.0e-6;
      for (int k = 0; k < N; k++) begin
        sr = 0.0; si = 0.0;
        for (int n = 0; n < N; n++) begin
          kk = (n * k) % N;
          sr += xr[f][n] * $cos(2.0 * PI * kk / N) + xi[f][n] * $sin(2.0 * PI * kk / N);
          si += xi[f][n] * $cos(2.0 * PI * kk / N) - xr[f][n] * $sin(2.0 * PI * kk / N);
        end
        er = yr[brev(k)] - sr;
        ei = yi[brev(k)] - si;
        checks++;
        if (fabs(er) > tol || fabs(ei) > tol) begin
          failures++;
          if (failures < 10) $display("FAIL frame %0d X[%0d] = %f,%f, expected %f,%f", f, k,
                                      yr[brev(k)], yi[brev(k)], sr, si);
        end
      end
    end
    out_ready <= 1;
  endtask

  initial begin
    #1 rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    // Phase 1: full rate.
    make_frames();
    first_in = cyc;
    fork
      drive(0);
      collect(0);
    join
    checks++;
    if (first_out - first_in != (LOGN + 1) * NB) begin
      failures++;
      $display("FAIL latency %0d cycles, expected %0d", first_out - first_in, (LOGN + 1) * NB);
    end
    checks++;
    if (last_out - first_out + 1 != FRAMES * NB) begin
      failures++;
      $display("FAIL %0d frames took %0d cycles, expected %0d", FRAMES,
               last_out - first_out + 1, FRAMES * NB);
    end
    repeat (5 * NB) @(posedge clk);
    // Phase 2: gaps and back-pressure.
    make_frames();
    fork
      drive(1);
      collect(1);
    join
    checks++;
    if (bubbles == 0 || stalls == 0) begin
      failures++;
      $display("FAIL bubbles=%0d stalls=%0d, both expected", bubbles, stalls);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
