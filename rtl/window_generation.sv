// window_generation: resolution degrading and time-window generation for one
// channel.
//
// The corrected hit times (0..2*2^N_BITS-2, input units) lose their P_TRUNC
// low bits (resolution degrading), which leaves a slice index in 0..2S-1,
// S = 2^(N_BITS-P_TRUNC) slices per time slot (TS). Each valid hit becomes a
// stream of `width` '1' bits starting at its slice, over a two-TS span: the
// "current" TS (bits 0..S-1) and the "next" TS (bits S..2S-1). Bit k of
// every TS word is slice k, earliest first.
//
// A 3*S-bit shift register, shifted by S every clock, accumulates the
// streams. Word 0 (bits 0..S-1) is the finished TS, handed to the logic
// evaluation; word 1 receives the current-TS part of the new streams OR-ed
// with what earlier hits left there; word 2 holds the next-TS part. This is
// the two-TS OR-ing of consecutive slots.
//
// Pipeline (three clocks, as in the paper): clock 1 decodes each hit into a
// 2S-bit mask; clock 2 shifts the register and ORs the masks into words 1
// and 2; word 0 is the output one clock later. So slices(t) describes the
// TS whose hits were at the inputs at t-3.
//
// Stream bits beyond the end of the next TS are dropped (width + slice
// larger than 2S); width = 0 disables the channel. These limits, the bit
// order and the split of the three clocks are this design's choices.
module window_generation #(
  parameter int unsigned N_BITS  = ftl_pkg::N_BITS_DEF,
  parameter int unsigned M_HITS  = ftl_pkg::M_HITS_DEF,
  parameter int unsigned P_TRUNC = ftl_pkg::P_DEF,
  localparam int unsigned TW     = N_BITS + 1,
  localparam int unsigned S      = 2 ** (N_BITS - P_TRUNC),
  localparam int unsigned SLW    = TW - P_TRUNC,
  localparam int unsigned WW     = $clog2(2 * S + 1)
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic [WW-1:0]        width,
  input  logic [M_HITS-1:0]    valid,
  input  logic [M_HITS*TW-1:0] time_corr,
  output logic [S-1:0]         slices
);

  logic [2*S-1:0] mask_d [M_HITS];
  logic [2*S-1:0] mask_q [M_HITS];
  logic [2*S-1:0] mask_or;
  logic [3*S-1:0] sr;

  // Resolution degrading and stream decoding.
  always_comb begin
    for (int h = 0; h < M_HITS; h++) begin
      logic [SLW-1:0] start;
      start = time_corr[h*TW + P_TRUNC +: SLW];
      for (int j = 0; j < 2 * S; j++)
        mask_d[h][j] = valid[h] && (j >= int'(start)) && (j < int'(start) + int'(width));
    end
  end

  always_comb begin
    mask_or = '0;
    for (int h = 0; h < M_HITS; h++) mask_or |= mask_q[h];
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int h = 0; h < M_HITS; h++) mask_q[h] <= '0;
      sr <= '0;
    end else begin
      for (int h = 0; h < M_HITS; h++) mask_q[h] <= mask_d[h];
      sr <= (sr >> S) | {mask_or, {S{1'b0}}};
    end
  end

  assign slices = sr[S-1:0];

endmodule
