// tb_fetch: self-checking test of the fetch unit (N = 16, 512 lines) against the DDR model.
//
// Memory lines are filled with data that encodes their address. Run 1: ideal memory, latency 20,
// consumer always ready; the stream must carry lines src_base, src_base+1, ... in order and end
// within LINES + latency + 4 cycles of the start (one line per cycle). Run 2: a memory with
// random stalls and a latency of 60 cycles, longer than the 32-entry FIFO, plus a consumer that
// takes only one beat in three on average; the order must still be exact, the unit must hold
// requests back, and no response may be lost (the FIFO-overflow assertion in the design would
// fire).
module tb_fetch;
  import fft3d_pkg::*;

  localparam int N     = 16;
  localparam int LINES = N * N * N / LANES;
  localparam int AW    = 32;

  logic clk = 0, rst_n = 1, start = 0, stalls = 0, busy;
  int   lat = 20;
  logic [AW-1:0] src_base;
  logic rd_req_valid, rd_req_ready, rd_resp_valid, out_valid, out_ready = 1, throttled;
  logic [AW-1:0] rd_req_addr;
  beat_t rd_resp_data, out_data;
  logic wr_valid = 0, wr_ready;
  logic [AW-1:0] wr_addr = '0;
  beat_t wr_data = '0;
  int checks = 0, failures = 0, n_throttled = 0;
  longint cyc = 0;

  fetch #(.N(N), .AW(AW)) dut (.*);
  ddr_model #(.LINES(4 * LINES), .AW(AW)) u_ddr (.*);

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (throttled) n_throttled++;
  end

  function automatic beat_t line_tag(int a);
    beat_t t;
    for (int l = 0; l < LANES; l++) begin
      t[l].re = 32'(a * 16 + l);
      t[l].im = 32'hdead_0000 ^ 32'(a);
    end
    return t;
  endfunction

  task automatic run(int base, bit slow);
    longint t0;
    src_base = AW'(base);
    stalls   = slow;
    lat      = slow ? 60 : 20;
    @(posedge clk);
    start <= 1;
    @(posedge clk);
    start <= 0;
    t0 = cyc;
    for (int i = 0; i < LINES; i++) begin
      do begin
        out_ready <= slow ? ($urandom_range(2) == 0) : 1'b1;
        @(posedge clk);
      end while (!(out_valid && out_ready));
      checks++;
      if (out_data !== line_tag(base + i)) begin
        failures++;
        if (failures < 10) $display("FAIL beat %0d carries line %0d", i, out_data[0].re / 16);
      end
    end
    out_ready <= 1;
    @(posedge clk);
    checks++;
    if (busy) begin
      failures++;
      $display("FAIL busy after the last line");
    end
    if (!slow) begin
      checks++;
      if (cyc - t0 > LINES + 20 + 4) begin
        failures++;
        $display("FAIL %0d lines took %0d cycles", LINES, cyc - t0);
      end
    end
  endtask

  initial begin
    for (int a = 0; a < 4 * LINES; a++) u_ddr.mem[a] = line_tag(a);
    #1 rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    run(100, 0);
    run(1000, 1);
    checks++;
    if (n_throttled == 0) begin
      failures++;
      $display("FAIL the unit never held a request back");
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
