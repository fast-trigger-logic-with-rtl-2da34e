// trigger_module: the fixed-latency, dead-time-free trigger of NCH channels.
//
// Each channel runs through its own channel_elaboration (coarse delay,
// fine offset, resolution degrading, window generation); the NCH resulting
// time-slot (TS) words feed the LUT logic evaluation, which tests the
// programmed condition in every time slice and ORs the slices into one
// accept bit per TS.
//
// Upload bus: writes with cfg.target == TARGET set the per-channel constants
// (CFG_COARSE, CFG_FINE, CFG_WIDTH; index = channel) or one LUT entry
// (CFG_LUT_THR; index = channel pattern, data[0] = response).
//
// Timing: response(t) and slice_resp(t) belong to the TS that entered the
// coarse correction of a channel at t - (coarse_delay + 5): the RAM delay,
// then the 5 clocks of the algorithm (1 fine correction, 3 window
// generation, 1 LUT read), the figure the paper quotes. A new TS is accepted
// every clock.
module trigger_module #(
  parameter int unsigned NCH     = 8,
  parameter int unsigned TARGET  = 0,
  parameter int unsigned N_BITS  = ftl_pkg::N_BITS_DEF,
  parameter int unsigned M_HITS  = ftl_pkg::M_HITS_DEF,
  parameter int unsigned P_TRUNC = ftl_pkg::P_DEF,
  parameter int unsigned DEPTH   = ftl_pkg::DEPTH_DEF,
  localparam int unsigned DW     = $clog2(DEPTH + 1),
  localparam int unsigned S      = 2 ** (N_BITS - P_TRUNC),
  localparam int unsigned WW     = $clog2(2 * S + 1)
) (
  input  logic                     clk,
  input  logic                     rst,
  input  ftl_pkg::cfg_wr_t         cfg,
  input  logic [M_HITS*N_BITS-1:0] hits_in [NCH],
  output logic [S-1:0]             slice_resp,
  output logic                     response
);
  import ftl_pkg::*;

  logic [DW-1:0]     coarse_delay [NCH];
  logic [N_BITS-1:0] fine_offset  [NCH];
  logic [WW-1:0]     width        [NCH];
  logic [S-1:0]      slices       [NCH];
  logic              lut_we;

  param_regs #(.NCH(NCH), .TARGET(TARGET), .N_BITS(N_BITS), .P_TRUNC(P_TRUNC), .DEPTH(DEPTH))
    u_regs (.clk, .rst, .cfg, .coarse_delay, .fine_offset, .width);

  for (genvar c = 0; c < NCH; c++) begin : g_ch
    channel_elaboration #(.N_BITS(N_BITS), .M_HITS(M_HITS), .P_TRUNC(P_TRUNC), .DEPTH(DEPTH))
      u_elab (.clk, .rst, .coarse_delay(coarse_delay[c]), .fine_offset(fine_offset[c]),
              .width(width[c]), .hits_in(hits_in[c]), .slices(slices[c]));
  end

  always_comb lut_we = cfg.we && (cfg.target == 4'(TARGET)) && (cfg.kind == CFG_LUT_THR);

  lut_logic_evaluation #(.NCH(NCH), .S(S)) u_lut (
    .clk, .slices_in(slices), .lut_we, .lut_addr(cfg.index[NCH-1:0]), .lut_wdata(cfg.data[0]),
    .slice_resp, .response);

endmodule
