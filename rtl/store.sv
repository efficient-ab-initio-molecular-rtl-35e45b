// store: writes the transformed cube from the last 1D FFT back to DDR memory.
//
// Function (from the paper): "storing the result back to the global memory" is the last step of
// the transform. This design writes the result in the same natural layout as the input (point
// (kx, ky, kz) at kx + N*ky + N*N*kz, eight consecutive kx per 512-bit line), so the result can be
// read like the input.
//
// How it works: the z-direction FFT delivers rows along z, kx inner and ky outer, each in
// bit-reversed order (beat b, lane l of row (kx, ky) holds kz = bitrev(8b+l)). Eight consecutive
// rows kx = 8a .. 8a+7 (same ky) form a group, which fills exactly N DDR lines.
// Each group is collected in one bank of a two-bank buffer [kz][kx mod 8]; from the other bank the
// unit writes the N lines of the previous group, one per cycle, line kz to address
// dst_base + a + (N/8)*ky + (N*N/8)*kz. The layout and this reorder buffer are choices of this
// design. `start` (one cycle, while idle) arms the unit; `done` goes high when all N^3/8 lines
// have been accepted by the memory and stays high until the next start.
module store
  import fft3d_pkg::*;
#(
  parameter int N  = 64,
  parameter int AW = 32,
  localparam int LOGN = $clog2(N),
  localparam int NB = N / LANES
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [AW-1:0] dst_base,
  output logic          done,
  // stream from the last FFT
  input  logic          in_valid,
  output logic          in_ready,
  input  beat_t         in_data,
  // DDR write port
  output logic          wr_valid,
  input  logic          wr_ready,
  output logic [AW-1:0] wr_addr,
  output beat_t         wr_data
);

  localparam int GROUPS = N * N / LANES;         // groups of eight rows
  localparam int GW     = $clog2(GROUPS + 1);
  localparam int WW     = $clog2(LANES * NB);    // beat counter inside a group

  cplx_t         mem [2*N*LANES];                // address {bank, kz, kx mod 8}
  logic [1:0]    full;
  logic [GW-1:0] grp [2];                        // group held by each bank
  logic          wbank, rbank;
  logic [WW-1:0] wcnt;
  logic [LOGN-1:0] kz;
  logic [GW-1:0] wgrp, groups_done;
  logic [AW-1:0] base;
  logic          wr, rd;

  assign in_ready = !full[wbank] && !done;
  assign wr       = in_valid && in_ready;
  assign wr_valid = full[rbank];
  assign rd       = wr_valid && wr_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full        <= '0;
      wbank       <= 1'b0;
      rbank       <= 1'b0;
      wcnt        <= '0;
      kz          <= '0;
      wgrp        <= '0;
      groups_done <= '0;
      done        <= 1'b0;
      base        <= '0;
      grp[0]      <= '0;
      grp[1]      <= '0;
    end else begin
      if (start) begin
        done        <= 1'b0;
        base        <= dst_base;
        wgrp        <= '0;
        groups_done <= '0;
      end
      if (wr) begin
        wcnt <= wcnt + 1'b1;
        if (wcnt == WW'(LANES * NB - 1)) begin
          grp[wbank] <= wgrp;
          wgrp       <= wgrp + 1'b1;
          wbank      <= !wbank;
        end
      end
      if (rd) begin
        kz <= kz + 1'b1;
        if (kz == LOGN'(N - 1)) begin
          rbank       <= !rbank;
          groups_done <= groups_done + 1'b1;
          if (groups_done == GW'(GROUPS - 1)) done <= 1'b1;
        end
      end
      for (int k = 0; k < 2; k++) begin
        if (wr && wcnt == WW'(LANES * NB - 1) && wbank == k[0]) full[k] <= 1'b1;
        if (rd && kz == LOGN'(N - 1) && rbank == k[0]) full[k] <= 1'b0;
      end
    end
  end

  // Write into the reorder buffer: wcnt = r * NB + b, row r holds kx = 8a + r.
  always_ff @(posedge clk) begin
    if (wr)
      for (int l = 0; l < LANES; l++)
        mem[{wbank, LOGN'(bitrev(LANES * (int'(wcnt) % NB) + l, LOGN)), LW'(int'(wcnt) / NB)}]
          <= in_data[l];
  end

  // Group g covers ky = g / NB, a = g mod NB; line address a + NB*ky + NB*N*kz = g + NB*N*kz.
  always_comb begin
    for (int l = 0; l < LANES; l++) wr_data[l] = mem[{rbank, kz, LW'(l)}];
    wr_addr = base + AW'(grp[rbank]) + AW'(NB * N) * AW'(kz);
  end

endmodule
