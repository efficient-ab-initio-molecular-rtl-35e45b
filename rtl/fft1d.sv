// fft1d: streaming N-point 1D FFT in single precision, eight complex points per cycle.
//
// Function (from the paper): a frame of N points enters as N/8 beats of eight points and leaves
// N/8 beats later per frame, so a new transform can start every N/8 cycles. Input is in natural
// order (beat b, lane l holds x[8b+l]); output is in bit-reversed order (beat b, lane l holds
// X[bitrev(8b+l)]), which the transposes and the store unit after it undo by addressing. The
// paper's engines use bit-reversed order at their ports as well; which side is natural is a
// choice of this design. X[k] = sum_n x[n] W_N^(nk), W_N = exp(-i 2 pi / N).
//
// How it works: log2(N) radix-2 DIF stages (fft_stage), each with a two-bank frame memory,
// plus an input and an output frame memory. All of them advance in lockstep "frame slots" of
// N/8 cycles: in each slot the input frame is written, every stage transforms the frame its
// predecessor wrote in the previous slot, and the output memory is read out. A frame therefore
// appears at the output log2(N)+1 slots after it started entering (latency (log2 N + 1) * N/8
// cycles from its first input beat to its first output beat, while nothing stalls).
//
// Handshake (valid/ready on both sides, a choice of this design): at a slot boundary a slot is
// a data slot if in_valid is high, or an empty ("bubble") slot if frames are still in flight,
// so that the last frames drain when the input stops. Within a data slot the pipeline advances
// only on accepted input beats; a bubble slot advances by itself and refuses input. When the
// output holds a valid frame and out_ready is low, the whole engine stalls.
module fft1d
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
  output logic  bubble     // high while an empty slot is being clocked through (drain)
);

  localparam int BW = $clog2(NB + 1);

  logic [BW-1:0]   beat;
  logic            wbank;
  logic            slot_data;          // current slot carries input data
  logic [LOGN+1:0] vpipe;              // frame valid per pipeline position
  logic            inflight, go_nout, adv, first, slot_is_data;

  logic [LOGN-1:0] st_idx  [LOGN+1][LANES];
  beat_t           st_data [LOGN+1];
  cplx_t           obuf    [2*N];     // address {bank, index}

  assign first    = (beat == '0);
  assign inflight = |vpipe[LOGN+1:1];
  // Data slot: decided by in_valid on the first beat, remembered for the rest of the slot.
  assign slot_is_data = first ? in_valid : slot_data;
  // Advance condition, not counting the output side.
  assign go_nout  = first ? (in_valid || inflight) : (slot_data ? in_valid : 1'b1);
  assign adv      = go_nout && (!vpipe[LOGN+1] || out_ready);
  assign in_ready = (!vpipe[LOGN+1] || out_ready) && (first || slot_data);
  assign out_valid = vpipe[LOGN+1] && go_nout;
  assign bubble   = adv && !slot_is_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      beat      <= '0;
      wbank     <= 1'b0;
      slot_data <= 1'b0;
      vpipe     <= '0;
    end else if (adv) begin
      if (first) slot_data <= in_valid;
      if (int'(beat) == NB - 1) begin
        beat  <= '0;
        wbank <= !wbank;
        vpipe <= {vpipe[LOGN:1], slot_is_data, 1'b0};
      end else begin
        beat <= beat + 1'b1;
      end
    end
  end

  // Input frame writes into stage 0's memory in natural order.
  for (genvar l = 0; l < LANES; l++) begin : g_in
    assign st_idx[0][l] = LOGN'(int'(beat) * LANES + l);
  end
  assign st_data[0] = in_data;

  for (genvar s = 0; s < LOGN; s++) begin : g_st
    fft_stage #(.N(N), .S(s)) u_stage (
      .clk     (clk),
      .wr_en   (adv && (s != 0 || slot_is_data)),
      .wr_bank (wbank),
      .wr_idx  (st_idx[s]),
      .wr_data (st_data[s]),
      .beat    (beat),
      .out_idx (st_idx[s+1]),
      .out_data(st_data[s+1])
    );
  end

  // Output frame memory: written by the last stage, read in index order.
  always_ff @(posedge clk) begin
    if (adv)
      for (int l = 0; l < LANES; l++) obuf[{wbank, st_idx[LOGN][l]}] <= st_data[LOGN][l];
  end

  always_comb begin
    for (int l = 0; l < LANES; l++) out_data[l] = obuf[{!wbank, LOGN'(int'(beat) * LANES + l)}];
  end

  // A beat offered and not taken stays unchanged until taken.
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> $stable(out_data) || !out_valid);

endmodule
