// fft_stage: one radix-2 DIF stage of the streaming 1D FFT, with its own double-buffered frame
// memory.
//
// Stage S of an N-point transform combines points i and i + h, h = N >> (S+1). The stage owns a
// two-bank frame memory of N complex points. While the upstream writes one frame into bank
// `wr_bank` (eight points per cycle, each with its own index), the stage reads the previous frame
// from the other bank: in beat `beat` it takes the four butterflies k = 4*beat .. 4*beat+3,
// with i = (k / h) * 2h + k mod h, j = i + h, twiddle W_N^((k mod h) * 2^S), and presents the
// eight results with their indices i, j to the next stage, combinationally. So each stage takes
// N/8 cycles per frame and the stages together keep the rate of N points per N/8 cycles that the
// paper gives for its 1D FFT. The frame scheduling and memory organisation are choices of this
// design; the paper uses Intel's OpenCL FFT sample, whose insides it does not describe.
module fft_stage
  import fft3d_pkg::*;
#(
  parameter int N = 64,
  parameter int S = 0,
  localparam int LOGN = $clog2(N),
  localparam int NB = N / LANES
) (
  input  logic                   clk,
  input  logic                   wr_en,
  input  logic                   wr_bank,
  input  logic [LOGN-1:0]        wr_idx [LANES],
  input  beat_t                  wr_data,
  input  logic [$clog2(NB+1)-1:0] beat,
  output logic [LOGN-1:0]        out_idx [LANES],
  output beat_t                  out_data
);

  localparam int H = N >> (S + 1);

  cplx_t mem [2*N];                 // address {bank, index}
  cplx_t tw_rom [N/2];

  for (genvar m = 0; m < N / 2; m++) begin : g_tw
    localparam cplx_t TW = twiddle(m, N);
    assign tw_rom[m] = TW;
  end

  always_ff @(posedge clk) begin
    if (wr_en)
      for (int l = 0; l < LANES; l++) mem[{wr_bank, wr_idx[l]}] <= wr_data[l];
  end

  for (genvar q = 0; q < LANES / 2; q++) begin : g_bf
    logic [LOGN-2:0] k, pos, tw;       // butterfly number, position in its group, twiddle
    logic [LOGN-1:0] ii, jj;           // the two points it combines
    cplx_t           x0, x1, y0, y1;

    always_comb begin
      k   = (LOGN-1)'(int'(beat) * (LANES / 2) + q);
      pos = (LOGN-1)'(int'(k) % H);
      ii  = LOGN'((int'(k) / H) * 2 * H + int'(pos));
      jj  = ii + LOGN'(H);
      tw  = pos << S;
      x0  = mem[{!wr_bank, ii}];
      x1  = mem[{!wr_bank, jj}];
    end

    fft_bfly u_bfly (.x0(x0), .x1(x1), .w(tw_rom[tw]), .y0(y0), .y1(y1));

    assign out_idx[2*q]       = ii;
    assign out_idx[2*q+1]     = jj;
    assign out_data[2*q]      = y0;
    assign out_data[2*q+1]    = y1;
  end

endmodule
