// channel_reduction: reduces NCH channels of a homogeneous detector section
// to one channel of "cluster times", so that large detectors can share a
// few inputs of the trigger module.
//
// Every input channel is elaborated exactly as in the trigger module
// (coarse delay, fine offset, resolution degrading, window generation).
// The channel words are then combined slice by slice into an OR word and a
// multiplicity count, and the time cluster search emits, per time slot
// (TS), up to M_HITS cluster times whose multiplicity reached the
// programmable threshold (1 = OR, >1 = majority OR).
//
// Upload bus: writes with cfg.target == TARGET set the per-channel constants
// (CFG_COARSE, CFG_FINE, CFG_WIDTH) and, with CFG_LUT_THR, the multiplicity
// threshold (data; reset value 1).
//
// Timing: hits_out(t) holds the clusters of the TS that entered the coarse
// correction of a channel at t - (coarse_delay + 7): 1 fine correction,
// 3 window generation, 1 OR/multiplicity and 2 cluster search clocks.
// Output format: M_HITS fields of N_BITS, no-hit = all ones, the same as a
// front-end channel.
module channel_reduction #(
  parameter int unsigned NCH     = 20,
  parameter int unsigned TARGET  = 1,
  parameter int unsigned N_BITS  = ftl_pkg::N_BITS_DEF,
  parameter int unsigned M_HITS  = ftl_pkg::M_HITS_DEF,
  parameter int unsigned P_TRUNC = ftl_pkg::P_DEF,
  parameter int unsigned DEPTH   = ftl_pkg::DEPTH_DEF,
  localparam int unsigned DW     = $clog2(DEPTH + 1),
  localparam int unsigned S      = 2 ** (N_BITS - P_TRUNC),
  localparam int unsigned WW     = $clog2(2 * S + 1),
  localparam int unsigned CW     = $clog2(NCH + 1)
) (
  input  logic                     clk,
  input  logic                     rst,
  input  ftl_pkg::cfg_wr_t         cfg,
  input  logic [M_HITS*N_BITS-1:0] hits_in [NCH],
  output logic [M_HITS*N_BITS-1:0] hits_out
);
  import ftl_pkg::*;

  logic [DW-1:0]     coarse_delay [NCH];
  logic [N_BITS-1:0] fine_offset  [NCH];
  logic [WW-1:0]     width        [NCH];
  logic [S-1:0]      slices       [NCH];
  logic [S-1:0]      or_word;
  logic [CW-1:0]     mult [S];
  logic [CW-1:0]     threshold;

  param_regs #(.NCH(NCH), .TARGET(TARGET), .N_BITS(N_BITS), .P_TRUNC(P_TRUNC), .DEPTH(DEPTH))
    u_regs (.clk, .rst, .cfg, .coarse_delay, .fine_offset, .width);

  always_ff @(posedge clk) begin
    if (rst)
      threshold <= CW'(1);
    else if (cfg.we && cfg.target == 4'(TARGET) && cfg.kind == CFG_LUT_THR)
      threshold <= cfg.data[CW-1:0];
  end

  for (genvar c = 0; c < NCH; c++) begin : g_ch
    channel_elaboration #(.N_BITS(N_BITS), .M_HITS(M_HITS), .P_TRUNC(P_TRUNC), .DEPTH(DEPTH))
      u_elab (.clk, .rst, .coarse_delay(coarse_delay[c]), .fine_offset(fine_offset[c]),
              .width(width[c]), .hits_in(hits_in[c]), .slices(slices[c]));
  end

  slice_or_multiplicity #(.NCH(NCH), .S(S)) u_orm (.clk, .rst, .slices_in(slices), .or_word, .mult);

  time_cluster_search #(.NCH(NCH), .N_BITS(N_BITS), .M_HITS(M_HITS), .P_TRUNC(P_TRUNC)) u_tcs (
    .clk, .rst, .threshold, .or_word, .mult, .hits_out);

endmodule
