// channel_elaboration: the complete preprocessing of one input channel,
// coarse correction -> fine correction (with validity check) -> resolution
// degrading -> window generation.
//
// Input: the M_HITS hit words of the channel for the current time slot (TS).
// Output: one S-bit word per TS, bit k = channel active in slice k, after
// alignment and window stretching. The three constants come from the host.
//
// Timing: slices(t) describes the TS that entered at
// t - (coarse_delay + 1 + 3): the RAM delay, one clock of fine correction and
// three of window generation, the latencies the paper gives for these stages.
module channel_elaboration #(
  parameter int unsigned N_BITS  = ftl_pkg::N_BITS_DEF,
  parameter int unsigned M_HITS  = ftl_pkg::M_HITS_DEF,
  parameter int unsigned P_TRUNC = ftl_pkg::P_DEF,
  parameter int unsigned DEPTH   = ftl_pkg::DEPTH_DEF,
  localparam int unsigned TW     = N_BITS + 1,
  localparam int unsigned DW     = $clog2(DEPTH + 1),
  localparam int unsigned S      = 2 ** (N_BITS - P_TRUNC),
  localparam int unsigned WW     = $clog2(2 * S + 1)
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic [DW-1:0]            coarse_delay,
  input  logic [N_BITS-1:0]        fine_offset,
  input  logic [WW-1:0]            width,
  input  logic [M_HITS*N_BITS-1:0] hits_in,
  output logic [S-1:0]             slices
);

  logic [M_HITS*N_BITS-1:0] hits_dly;
  logic [M_HITS-1:0]        valid;
  logic [M_HITS*TW-1:0]     time_corr;

  coarse_correction #(.N_BITS(N_BITS), .M_HITS(M_HITS), .DEPTH(DEPTH)) u_coarse (
    .clk, .rst, .delay(coarse_delay), .hits_in, .hits_out(hits_dly));

  fine_correction #(.N_BITS(N_BITS), .M_HITS(M_HITS)) u_fine (
    .clk, .rst, .offset(fine_offset), .hits_in(hits_dly), .valid, .time_corr);

  window_generation #(.N_BITS(N_BITS), .M_HITS(M_HITS), .P_TRUNC(P_TRUNC)) u_window (
    .clk, .rst, .width, .valid, .time_corr, .slices);

endmodule
