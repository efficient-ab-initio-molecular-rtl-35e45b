// tb_fft3d_top: end-to-end test of the 3D FFT on a reduced 16 x 16 x 16 cube.
//
// A random cube is loaded into the DDR model, the design is started, and when `done` rises the
// output cube is compared point by point with a reference 3D DFT computed in double precision,
// dimension by dimension (direct DFTs, independent of the design's FFT algorithm). The tolerance
// is a small multiple of single-precision rounding relative to the largest output magnitude.
// Run 1 uses an ideal memory and checks the cycle count against 2*N^3/8 plus the pipeline
// latencies (the z pass cannot start before the x and y passes end); run 2 uses a memory that
// stalls at random and answers reads late enough to fill the fetch unit's FIFO. Each mechanism
// of the design is counted: fetch throttling, 2D-transpose overlap (double buffering at work),
// the z pass waiting for the 3D transpose to fill, FFT drain bubbles, and DDR back-pressure on
// reads and writes; one that never happens is a failure.
module tb_fft3d_top;
  import fft3d_pkg::*;
  import tb_fp_pkg::*;

  localparam int N     = 16;
  localparam int NB    = N / LANES;
  localparam int LOGN  = $clog2(N);
  localparam int CUBE  = N * N * N;
  localparam int LINES = CUBE / LANES;
  localparam int AW    = 32;
  localparam int LAT   = 20;

  logic clk = 0, rst_n = 1, start = 0, stalls = 0;
  int   lat = 20;
  logic [AW-1:0] src_base = '0, dst_base = AW'(LINES);
  logic busy, done;
  logic rd_req_valid, rd_req_ready, rd_resp_valid, wr_valid, wr_ready;
  logic [AW-1:0] rd_req_addr, wr_addr;
  beat_t rd_resp_data, wr_data;
  logic st_fetch_throttled, st_t2d_overlap, st_t3d_wait, st_fft_bubble;

  int checks = 0, failures = 0;
  int n_throttle = 0, n_overlap = 0, n_t3d_wait = 0, n_bubble = 0;

  fft3d_top #(.N(N)) dut (.*);

  ddr_model #(.LINES(2 * LINES), .AW(AW)) u_ddr (.*);

  always #5 clk = ~clk;
  longint cyc = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (st_fetch_throttled) n_throttle++;
    if (st_t2d_overlap) n_overlap++;
    if (st_t3d_wait) n_t3d_wait++;
    if (st_fft_bubble) n_bubble++;
  end

  real ar [CUBE], ai [CUBE], br [CUBE], bi [CUBE], cs [N], sn [N];

  int n_rt;   // N as a run-time value, so the reference loops stay loops in the simulator

  function automatic int idx(int x, int y, int z);
    return x + N * y + N * N * z;
  endfunction

  // One direct DFT pass along dimension `dim` (0 = x, 1 = y, 2 = z), a -> b, then b -> a.
  task automatic dft_pass(int dim);
    int p, q, stride;
    real sr, si;
    stride = (dim == 0) ? 1 : (dim == 1) ? N : N * N;
    for (int u = 0; u < n_rt; u++)
      for (int v = 0; v < n_rt; v++) begin
        p = (dim == 0) ? idx(0, u, v) : (dim == 1) ? idx(u, 0, v) : idx(u, v, 0);
        for (int k = 0; k < n_rt; k++) begin
          sr = 0.0; si = 0.0;
          for (int n = 0; n < n_rt; n++) begin
            q = (n * k) % N;
            sr += ar[p + n*stride] * cs[q] + ai[p + n*stride] * sn[q];
            si += ai[p + n*stride] * cs[q] - ar[p + n*stride] * sn[q];
          end
          br[p + k*stride] = sr;
          bi[p + k*stride] = si;
        end
      end
    for (int i = 0; i < CUBE; i++) begin
      ar[i] = br[i];
      ai[i] = bi[i];
    end
  endtask

  task automatic run(bit with_stalls);
    longint t0, t1, bound;
    real maxmag, tol, er, ei;
    int  li, la;
    stalls = with_stalls;
    lat    = with_stalls ? 3 * LAT : LAT;   // a slow memory in run 2 throttles the fetch unit
    for (int i = 0; i < CUBE; i++) begin
      ar[i] = f2r(r2f((real'($urandom_range(2000)) - 1000.0) / 250.0));
      ai[i] = f2r(r2f((real'($urandom_range(2000)) - 1000.0) / 250.0));
      u_ddr.mem[i / LANES][i % LANES].re = r2f(ar[i]);
      u_ddr.mem[i / LANES][i % LANES].im = r2f(ai[i]);
    end
    for (int i = 0; i < LINES; i++) u_ddr.mem[LINES + i] = '0;
    @(posedge clk);
    start <= 1;
    @(posedge clk);
    start <= 0;
    t0 = cyc;
    @(posedge clk);
    while (!done) @(posedge clk);
    t1 = cyc;
    repeat (2) @(posedge clk);
    checks++;
    if (busy) begin
      failures++;
      $display("FAIL busy still high after done");
    end
    for (int d = 0; d < 3; d++) dft_pass(d);
    maxmag = 0.0;
    for (int i = 0; i < CUBE; i++) begin
      if (fabs(ar[i]) > maxmag) maxmag = fabs(ar[i]);
      if (fabs(ai[i]) > maxmag) maxmag = fabs(ai[i]);
    end
    tol = maxmag * 2.0e-6 * LOGN;
    for (int i = 0; i < CUBE; i++) begin
      li = LINES + i / LANES;
      la = i % LANES;
      er = f2r(u_ddr.mem[li][la].re) - ar[i];
      ei = f2r(u_ddr.mem[li][la].im) - ai[i];
      checks++;
      if (fabs(er) > tol || fabs(ei) > tol) begin
        failures++;
        if (failures < 10)
          $display("FAIL F(%0d,%0d,%0d) = %f,%f expected %f,%f", i % N, (i / N) % N, i / (N * N),
                   f2r(u_ddr.mem[li][la].re), f2r(u_ddr.mem[li][la].im), ar[i], ai[i]);
      end
    end
    $display("run stalls=%0d: %0d cycles", with_stalls, (t1 - t0));
    if (!with_stalls) begin
      // x and y passes stream the cube once, z pass streams it again after the 3D transpose
      // has filled: 2*N^3/8 cycles plus three FFT latencies, one plane (2D transpose), one store
      // group and the memory latency.
      bound = 2 * LINES + 3 * (LOGN + 1) * NB + N * NB + LANES * NB + N + LAT + 16;
      checks++;
      if ((t1 - t0) > bound || (t1 - t0) < 2 * LINES) begin
        failures++;
        $display("FAIL cycle count %0d outside [%0d, %0d]", (t1 - t0), 2 * LINES, bound);
      end
    end
  endtask

  initial begin
    n_rt = N;
    for (int k = 0; k < N; k++) begin
      cs[k] = $cos(2.0 * PI * k / N);
      sn[k] = $sin(2.0 * PI * k / N);
    end
    #1 rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    repeat (2) @(posedge clk);
    run(0);
    run(1);
    $display("events: throttle=%0d t2d_overlap=%0d t3d_wait=%0d bubble=%0d ddr_rd_busy=%0d ddr_wr_busy=%0d",
             n_throttle, n_overlap, n_t3d_wait, n_bubble, u_ddr.rd_busy, u_ddr.wr_busy);
    checks++;
    if (n_throttle == 0 || n_overlap == 0 || n_t3d_wait == 0 || n_bubble == 0 ||
        u_ddr.rd_busy == 0 || u_ddr.wr_busy == 0) begin
      failures++;
      $display("FAIL a mechanism was never exercised");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20 * LINES + 10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
