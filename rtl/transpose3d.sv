// transpose3d: on-chip N x N x N cube buffer that turns y-direction rows into z-direction rows,
// between the y- and z-direction FFTs.
//
// Function (from the paper): the whole 3D FFT fits into on-chip memory, so the transposition
// along z is done on the FPGA; unlike the 2D transpose it cannot be double-buffered (two cubes
// would not fit), so the pipeline stalls while it is emptied. The paper names this step as the
// bottleneck of its design.
//
// This block holds one cube of N^3 complex points and alternates between two phases. FILL:
// it accepts N^3/8 beats; they arrive as rows of N points along y, ordered z-plane by z-plane
// and, within a plane, by kx (the order transpose2d emits), each row in bit-reversed order
// (beat b, lane l holds ky = bitrev(8b+l)). DRAIN: it emits rows along z, ordered by ky and,
// for each ky, by kx (row index kx + N*ky), each row in natural z order (beat b, lane l holds
// z = 8b+l). The z pass waits during the whole fill phase (`filling`), and in_ready is low for
// the whole drain phase, so a following cube would stall there. Row orders, the
// bit-reversal undo and the handshake are choices of this design. One drain beat reads eight
// points from eight different z-planes; a hardware implementation would bank the memory by z.
module transpose3d
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
  output logic  filling     // part of a cube is in: the z pass waits for the rest
);

  localparam int CW    = $clog2(N * N * NB);
  localparam int LAST  = N * N * NB - 1;

  cplx_t         mem [N * N * N];        // address kx + N*ky + N*N*z
  logic          draining;
  logic [CW-1:0] wcnt, rcnt;
  logic          wr, rd;

  assign in_ready  = !draining;
  assign out_valid = draining;
  assign filling   = !draining && (wcnt != '0);
  assign wr        = in_valid && in_ready;
  assign rd        = out_valid && out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      draining <= 1'b0;
      wcnt     <= '0;
      rcnt     <= '0;
    end else begin
      if (wr) begin
        wcnt <= (wcnt == CW'(LAST)) ? '0 : wcnt + 1'b1;
        if (wcnt == CW'(LAST)) draining <= 1'b1;
      end
      if (rd) begin
        rcnt <= (rcnt == CW'(LAST)) ? '0 : rcnt + 1'b1;
        if (rcnt == CW'(LAST)) draining <= 1'b0;
      end
    end
  end

  // Write counter: wcnt = b + NB * (kx + N * z).
  logic [LOGN-1:0] w_kx, w_z;
  int unsigned     w_b;
  assign w_b  = int'(wcnt) % NB;
  assign w_kx = LOGN'(int'(wcnt) / NB);
  assign w_z  = LOGN'(int'(wcnt) / (NB * N));

  always_ff @(posedge clk) begin
    if (wr)
      for (int l = 0; l < LANES; l++)
        mem[{w_z, LOGN'(bitrev(LANES * w_b + l, LOGN)), w_kx}] <= in_data[l];
  end

  // Read counter: rcnt = b + NB * (kx + N * ky).
  logic [LOGN-1:0] r_kx, r_ky;
  int unsigned     r_b;
  assign r_b  = int'(rcnt) % NB;
  assign r_kx = LOGN'(int'(rcnt) / NB);
  assign r_ky = LOGN'(int'(rcnt) / (NB * N));

  always_comb begin
    for (int l = 0; l < LANES; l++)
      out_data[l] = mem[{LOGN'(LANES * r_b + l), r_ky, r_kx}];
  end

endmodule
