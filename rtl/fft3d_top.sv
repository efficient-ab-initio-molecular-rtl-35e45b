// fft3d_top: single-precision 3D FFT of an N x N x N complex cube held in DDR memory.
//
// The transform F(kx,ky,kz) = sum_{x,y,z} f(x,y,z) W^(x kx) W^(y ky) W^(z kz), W = exp(-2 pi i/N),
// is done as three passes of 1D FFTs, one per dimension, joined by two transposes. The blocks and
// their order follow the paper's block diagram:
//
//   fetch -> fft1d (x) -> transpose2d -> fft1d (y) -> transpose3d -> fft1d (z) -> store
//
// Every link is an eight-point-per-cycle valid/ready stream. The first FFT sees rows along x;
// transpose2d turns each z-plane so that the second FFT sees rows along y; transpose3d collects
// the whole cube on chip and emits rows along z for the third FFT; store writes the result back
// in the same layout as the input (natural order, x fastest, eight points per 512-bit line).
// The pipeline is full-rate except at transpose3d, which must receive the last point of the cube
// before it can emit its first row and which has room for only one cube: the z-direction pass
// starts only after the x and y passes are complete, and no new cube can enter while it drains.
// One transform therefore takes about 2 * N^3/8 cycles plus the pipeline latencies.
//
// Interface: pulse `start` while idle with the line addresses of the input and output cubes;
// `busy` stays high until the last result line has been accepted by the memory, when `done`
// rises. The DDR side is one read port (request valid/ready, in-order responses without
// back-pressure) and one write port (valid/ready), each moving one 512-bit line per cycle.
// The memory controller, the DDR chips and the PCIe transfers from the host are outside this
// design. The status outputs report the events a user may want to count.
module fft3d_top
  import fft3d_pkg::*;
#(
  parameter int N     = 64,
  parameter int AW    = 32,
  parameter int DEPTH = 32
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [AW-1:0] src_base,
  input  logic [AW-1:0] dst_base,
  output logic          busy,
  output logic          done,
  // DDR read port
  output logic          rd_req_valid,
  input  logic          rd_req_ready,
  output logic [AW-1:0] rd_req_addr,
  input  logic          rd_resp_valid,
  input  beat_t         rd_resp_data,
  // DDR write port
  output logic          wr_valid,
  input  logic          wr_ready,
  output logic [AW-1:0] wr_addr,
  output beat_t         wr_data,
  // status
  output logic          st_fetch_throttled,  // fetch holds a request back (FIFO could overflow)
  output logic          st_t2d_overlap,      // 2D transpose writes one plane while reading the other
  output logic          st_t3d_wait,        // z pass waiting while the 3D transpose fills
  output logic          st_fft_bubble        // an FFT clocks an empty slot to drain
);

  logic  f_v, f_r;   beat_t f_d;     // fetch -> fft x
  logic  a_v, a_r;   beat_t a_d;     // fft x -> transpose2d
  logic  b_v, b_r;   beat_t b_d;     // transpose2d -> fft y
  logic  c_v, c_r;   beat_t c_d;     // fft y -> transpose3d
  logic  d_v, d_r;   beat_t d_d;     // transpose3d -> fft z
  logic  e_v, e_r;   beat_t e_d;     // fft z -> store
  logic  fetch_busy;
  logic [2:0] bub;

  fetch #(.N(N), .AW(AW), .DEPTH(DEPTH)) u_fetch (
    .clk, .rst_n, .start, .src_base, .busy(fetch_busy),
    .rd_req_valid, .rd_req_ready, .rd_req_addr, .rd_resp_valid, .rd_resp_data,
    .out_valid(f_v), .out_ready(f_r), .out_data(f_d), .throttled(st_fetch_throttled)
  );

  fft1d #(.N(N)) u_fft_x (
    .clk, .rst_n, .in_valid(f_v), .in_ready(f_r), .in_data(f_d),
    .out_valid(a_v), .out_ready(a_r), .out_data(a_d), .bubble(bub[0])
  );

  transpose2d #(.N(N)) u_t2d (
    .clk, .rst_n, .in_valid(a_v), .in_ready(a_r), .in_data(a_d),
    .out_valid(b_v), .out_ready(b_r), .out_data(b_d), .overlap(st_t2d_overlap)
  );

  fft1d #(.N(N)) u_fft_y (
    .clk, .rst_n, .in_valid(b_v), .in_ready(b_r), .in_data(b_d),
    .out_valid(c_v), .out_ready(c_r), .out_data(c_d), .bubble(bub[1])
  );

  transpose3d #(.N(N)) u_t3d (
    .clk, .rst_n, .in_valid(c_v), .in_ready(c_r), .in_data(c_d),
    .out_valid(d_v), .out_ready(d_r), .out_data(d_d), .filling(st_t3d_wait)
  );

  fft1d #(.N(N)) u_fft_z (
    .clk, .rst_n, .in_valid(d_v), .in_ready(d_r), .in_data(d_d),
    .out_valid(e_v), .out_ready(e_r), .out_data(e_d), .bubble(bub[2])
  );

  store #(.N(N), .AW(AW)) u_store (
    .clk, .rst_n, .start, .dst_base, .done,
    .in_valid(e_v), .in_ready(e_r), .in_data(e_d),
    .wr_valid, .wr_ready, .wr_addr, .wr_data
  );

  assign st_fft_bubble = |bub;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) busy <= 1'b0;
    else if (start && !busy) busy <= 1'b1;
    else if (done && !fetch_busy) busy <= 1'b0;
  end

endmodule
