// fetch: reads the N^3-point input cube from DDR memory and streams it into the first 1D FFT.
//
// Function (from the paper): "fetching data from the global memory" is the first step of the
// transform. The cube is stored in natural order, x fastest: point (x, y, z) is at point address
// x + N*y + N*N*z, and one DDR line holds eight consecutive points (512 bits), so line
// src_base + i holds points 8i .. 8i+7. The unit requests lines src_base .. src_base + N^3/8 - 1
// in order; lines come back in order and pass through a DEPTH-entry FIFO to the output. The rows
// of x therefore reach the x-direction FFT one after the other, y inner, z outer.
//
// Flow control (a choice of this design): a request is only issued while the FIFO has room for
// it counting all requests still in flight, so read data, which has no ready signal, never
// overflows. `start` (one cycle, while idle) begins a transform; `busy` stays high until the last
// line has been handed on.
module fetch
  import fft3d_pkg::*;
#(
  parameter int N     = 64,
  parameter int AW    = 32,
  parameter int DEPTH = 32,
  localparam int NB   = N / LANES
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [AW-1:0] src_base,
  output logic          busy,
  // DDR read request / response
  output logic          rd_req_valid,
  input  logic          rd_req_ready,
  output logic [AW-1:0] rd_req_addr,
  input  logic          rd_resp_valid,
  input  beat_t         rd_resp_data,
  // stream to the first FFT
  output logic          out_valid,
  input  logic          out_ready,
  output beat_t         out_data,
  output logic          throttled  // request held back because the FIFO could overflow
);

  localparam int LINES = N * N * NB;
  localparam int CW    = $clog2(LINES + 1);
  localparam int DW    = $clog2(DEPTH + 1);
  localparam int PW    = $clog2(DEPTH);

  logic [CW-1:0] req_cnt, out_cnt;
  logic [DW-1:0] pending, count;        // requests in flight, FIFO occupancy
  logic [PW-1:0] wp, rp;
  beat_t         fifo [DEPTH];
  logic [AW-1:0] base;
  logic          room, issue, pop;

  assign room         = (32'(pending) + 32'(count)) < DEPTH;
  assign rd_req_valid = busy && (req_cnt != CW'(LINES)) && room;
  assign rd_req_addr  = base + AW'(req_cnt);
  assign issue        = rd_req_valid && rd_req_ready;
  assign out_valid    = (count != '0);
  assign out_data     = fifo[rp];
  assign pop          = out_valid && out_ready;
  assign throttled    = busy && (req_cnt != CW'(LINES)) && !room;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy    <= 1'b0;
      base    <= '0;
      req_cnt <= '0;
      out_cnt <= '0;
      pending <= '0;
      count   <= '0;
      wp      <= '0;
      rp      <= '0;
    end else begin
      if (start && !busy) begin
        busy    <= 1'b1;
        base    <= src_base;
        req_cnt <= '0;
        out_cnt <= '0;
      end
      if (issue) req_cnt <= req_cnt + 1'b1;
      pending <= pending + DW'(issue) - DW'(rd_resp_valid);
      count   <= count + DW'(rd_resp_valid) - DW'(pop);
      if (rd_resp_valid) wp <= (32'(wp) == DEPTH - 1) ? '0 : wp + 1'b1;
      if (pop) begin
        rp      <= (32'(rp) == DEPTH - 1) ? '0 : rp + 1'b1;
        out_cnt <= out_cnt + 1'b1;
        if (out_cnt == CW'(LINES - 1)) busy <= 1'b0;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rd_resp_valid) fifo[wp] <= rd_resp_data;
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    rd_resp_valid |-> (32'(count) < DEPTH || pop));

endmodule
