// transpose2d: double-buffered transpose of one N x N plane, between the x- and y-direction FFTs.
//
// Function (from the paper): after the x-direction FFT the data of one z-plane must be re-read
// along y; the paper uses several buffers here so that the pipeline does not stall. This block
// has two plane buffers of N x N complex points: the writer fills one while the reader drains the
// other, so at full rate a plane goes in and a plane comes out every N*N/8 cycles.
//
// Ordering: the input is N rows (index y) of N points in bit-reversed order, as the 1D FFT emits
// them (beat b, lane l of row y holds element kx = bitrev(8b+l)). The writer stores that point at
// [kx][y]; the reader emits rows kx = 0..N-1, each in natural y order (beat b, lane l holds
// y = 8b+l). Undoing the bit reversal here, and the valid/ready handshake, are choices of this
// design. A bank is handed to the reader when its last beat is written and back to the writer
// when its last beat is read.
module transpose2d
  import fft3d_pkg::*;
#(
  parameter int N = 64,
  localparam int LOGN = $clog2(N),
  localparam int NB = N / LANES
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  output logic  in_ready,
  input  beat_t in_data,
  output logic  out_valid,
  input  logic  out_ready,
  output beat_t out_data,
  output logic  overlap     // a plane is being written while the other is being read
);

  localparam int CW = $clog2(N * NB);   // beat counter width for one plane

  cplx_t      mem [2*N*N];              // address {bank, output row, output column}
  logic [1:0] full;
  logic       wbank, rbank;
  logic [CW-1:0] wcnt, rcnt;
  logic       wr, rd;

  assign in_ready  = !full[wbank];
  assign out_valid = full[rbank];
  assign wr        = in_valid && in_ready;
  assign rd        = out_valid && out_ready;
  assign overlap   = wr && full[rbank] && (rbank != wbank);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full  <= '0;
      wbank <= 1'b0;
      rbank <= 1'b0;
      wcnt  <= '0;
      rcnt  <= '0;
    end else begin
      if (wr) begin
        wcnt <= wcnt + 1'b1;
        if (wcnt == CW'(N * NB - 1)) wbank <= !wbank;
      end
      if (rd) begin
        rcnt <= rcnt + 1'b1;
        if (rcnt == CW'(N * NB - 1)) rbank <= !rbank;
      end
      for (int k = 0; k < 2; k++) begin
        if (wr && wcnt == CW'(N * NB - 1) && wbank == k[0]) full[k] <= 1'b1;
        if (rd && rcnt == CW'(N * NB - 1) && rbank == k[0]) full[k] <= 1'b0;
      end
    end
  end

  // Write: wcnt = y * NB + b.
  always_ff @(posedge clk) begin
    if (wr)
      for (int l = 0; l < LANES; l++)
        mem[{wbank, LOGN'(bitrev(LANES * (int'(wcnt) % NB) + l, LOGN)), LOGN'(int'(wcnt) / NB)}]
          <= in_data[l];
  end

  // Read: rcnt = kx * NB + b.
  always_comb begin
    for (int l = 0; l < LANES; l++)
      out_data[l] = mem[{rbank, LOGN'(int'(rcnt) / NB), LOGN'(LANES * (int'(rcnt) % NB) + l)}];
  end

endmodule
