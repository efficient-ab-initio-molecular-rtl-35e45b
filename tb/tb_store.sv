// tb_store: self-checking test of the store unit (N = 16) against the DDR model.
//
// The stream mimics the z-direction FFT: rows (kx, ky), kx inner, ky outer, each row's points in
// bit-reversed kz order; every point carries its coordinates (kx, ky, kz) as data. After `done`
// the output region of the memory must hold point (kx, ky, kz) at line
// dst_base + kx/8 + (N/8)*ky + (N*N/8)*kz, lane kx mod 8, i.e. the natural layout. Run 1 streams
// at full rate into an ideal memory and checks that `done` follows the last input beat within
// N + 4 cycles (the last group's lines); run 2 adds random gaps and a memory that stalls.
module tb_store;
  import fft3d_pkg::*;

  localparam int N     = 16;
  localparam int NB    = N / LANES;
  localparam int LOGN  = $clog2(N);
  localparam int LINES = N * N * N / LANES;
  localparam int AW    = 32;

  logic clk = 0, rst_n = 1, start = 0, stalls = 0, done;
  int   lat = 5;
  logic [AW-1:0] dst_base;
  logic in_valid = 0, in_ready, wr_valid, wr_ready;
  beat_t in_data = '0, wr_data;
  logic [AW-1:0] wr_addr;
  logic rd_req_valid = 0, rd_req_ready, rd_resp_valid;
  logic [AW-1:0] rd_req_addr = '0;
  beat_t rd_resp_data;
  int checks = 0, failures = 0;
  longint cyc = 0;

  store #(.N(N), .AW(AW)) dut (.*);
  ddr_model #(.LINES(3 * LINES), .AW(AW)) u_ddr (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  function automatic int brev(int v);
    int r = 0;
    for (int k = 0; k < LOGN; k++) r = (r << 1) | ((v >> k) & 1);
    return r;
  endfunction

  function automatic cplx_t tag(int run, int kx, int ky, int kz);
    cplx_t t;
    t.re = 32'(run * 16777216 + kx * 65536 + ky * 256 + kz);
    t.im = ~t.re;
    return t;
  endfunction

  task automatic run_once(int r, int base, bit slow);
    longint t_last;
    int     a;
    dst_base = AW'(base);
    stalls   = slow;
    for (int i = 0; i < 3 * LINES; i++) u_ddr.mem[i] = '0;
    @(posedge clk);
    start <= 1;
    @(posedge clk);
    start <= 0;
    for (int ky = 0; ky < N; ky++)
      for (int kx = 0; kx < N; kx++)
        for (int b = 0; b < NB; b++) begin
          while (slow && $urandom_range(3) == 0) begin
            in_valid <= 0;
            @(posedge clk);
          end
          in_valid <= 1;
          for (int l = 0; l < LANES; l++) in_data[l] <= tag(r, kx, ky, brev(b * LANES + l));
          @(posedge clk);
          while (!in_ready) @(posedge clk);
        end
    in_valid <= 0;
    t_last = cyc;
    while (!done) @(posedge clk);
    if (!slow) begin
      checks++;
      if (cyc - t_last > N + 4) begin
        failures++;
        $display("FAIL done %0d cycles after the last beat", cyc - t_last);
      end
    end
    @(posedge clk);
    for (int kz = 0; kz < N; kz++)
      for (int ky = 0; ky < N; ky++)
        for (int kx = 0; kx < N; kx++) begin
          a = base + kx / LANES + NB * ky + NB * N * kz;
          checks++;
          if (u_ddr.mem[a][kx % LANES] !== tag(r, kx, ky, kz)) begin
            failures++;
            if (failures < 10) $display("FAIL (%0d,%0d,%0d) line %0d holds %h", kx, ky, kz, a,
                                        u_ddr.mem[a][kx % LANES].re);
          end
        end
  endtask

  initial begin
    #1 rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    run_once(1, 0, 0);
    run_once(2, LINES + 7, 1);
    checks++;
    if (u_ddr.wr_busy == 0) begin
      failures++;
      $display("FAIL memory back-pressure never happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20 * LINES + 2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
