// fast_trigger_system: a first-level trigger built from the two modules:
// NRED channel reduction modules, each folding RED_CH detector channels into
// cluster times, feed trigger inputs 0..NRED-1; trigger inputs
// NRED..NCH-1 take front-end channels directly. The trigger module
// evaluates the programmed LUT condition on all NCH inputs every time slot
// (TS) and raises `response` for each accepted TS.
//
// Ports: direct_hits[i] is trigger input NRED+i; red_hits[r][c] is channel c
// of reduction module r. All hit words are M_HITS fields of N_BITS, all ones
// meaning no hit. A single upload bus, cfg, loads everything: target 0 is
// the trigger module, target r+1 reduction module r.
//
// Timing: for a direct channel the response comes coarse_delay + 5 clocks
// after its hits; a reduced channel adds its own coarse_delay + 7 clocks in
// front, which the trigger's coarse delay for that input can compensate.
//
// Combining the two modules this way is the arrangement the paper proposes;
// the number of reduction modules (NRED, default 1) is this design's choice.
module fast_trigger_system #(
  parameter int unsigned NCH     = 8,
  parameter int unsigned NRED    = 1,
  parameter int unsigned RED_CH  = 20,
  parameter int unsigned N_BITS  = ftl_pkg::N_BITS_DEF,
  parameter int unsigned M_HITS  = ftl_pkg::M_HITS_DEF,
  parameter int unsigned P_TRUNC = ftl_pkg::P_DEF,
  parameter int unsigned DEPTH   = ftl_pkg::DEPTH_DEF,
  localparam int unsigned S      = 2 ** (N_BITS - P_TRUNC),
  localparam int unsigned HW     = M_HITS * N_BITS
) (
  input  logic             clk,
  input  logic             rst,
  input  ftl_pkg::cfg_wr_t cfg,
  input  logic [HW-1:0]    direct_hits [NCH-NRED],
  input  logic [HW-1:0]    red_hits    [NRED][RED_CH],
  output logic [S-1:0]     slice_resp,
  output logic             response
);

  logic [HW-1:0] trig_in [NCH];

  for (genvar r = 0; r < NRED; r++) begin : g_red
    channel_reduction #(.NCH(RED_CH), .TARGET(r + 1), .N_BITS(N_BITS), .M_HITS(M_HITS),
                        .P_TRUNC(P_TRUNC), .DEPTH(DEPTH))
      u_red (.clk, .rst, .cfg, .hits_in(red_hits[r]), .hits_out(trig_in[r]));
  end

  for (genvar i = NRED; i < NCH; i++) begin : g_direct
    assign trig_in[i] = direct_hits[i - NRED];
  end

  trigger_module #(.NCH(NCH), .TARGET(0), .N_BITS(N_BITS), .M_HITS(M_HITS),
                   .P_TRUNC(P_TRUNC), .DEPTH(DEPTH))
    u_trig (.clk, .rst, .cfg, .hits_in(trig_in), .slice_resp, .response);

  initial assert (NRED >= 1 && NRED < NCH && NRED < 16)
    else $error("fast_trigger_system: need 1 <= NRED < NCH and NRED < 16");

endmodule
