// param_regs: per-channel alignment and window constants of one module,
// loaded by the host over the upload bus.
//
// A write with cfg.target == TARGET and kind CFG_COARSE, CFG_FINE or
// CFG_WIDTH stores the low bits of cfg.data for channel cfg.index; writes
// to channels beyond NCH are ignored. The outputs are static during data
// taking, so loading does not change the latency of the data path.
//
// Timing: a write takes effect on the clock edge that samples it.
// Reset values (this design's choice): coarse delay 1 TS, fine offset 0,
// width 0 (channel silent until configured). The paper only says that the
// alignment parameters are programmable per channel and loaded from a PC.
module param_regs #(
  parameter int unsigned NCH    = 8,
  parameter int unsigned TARGET = 0,
  parameter int unsigned N_BITS = ftl_pkg::N_BITS_DEF,
  parameter int unsigned P_TRUNC = ftl_pkg::P_DEF,
  parameter int unsigned DEPTH  = ftl_pkg::DEPTH_DEF,
  localparam int unsigned DW    = $clog2(DEPTH + 1),
  localparam int unsigned S     = 2 ** (N_BITS - P_TRUNC),
  localparam int unsigned WW    = $clog2(2 * S + 1)
) (
  input  logic              clk,
  input  logic              rst,
  input  ftl_pkg::cfg_wr_t  cfg,
  output logic [DW-1:0]     coarse_delay [NCH],
  output logic [N_BITS-1:0] fine_offset  [NCH],
  output logic [WW-1:0]     width        [NCH]
);
  import ftl_pkg::*;

  logic hit;
  always_comb hit = cfg.we && (cfg.target == 4'(TARGET)) && (32'(cfg.index) < NCH);

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int c = 0; c < NCH; c++) begin
        coarse_delay[c] <= DW'(1);
        fine_offset[c]  <= '0;
        width[c]        <= '0;
      end
    end else if (hit) begin
      for (int c = 0; c < NCH; c++) begin
        if (cfg.index == 16'(c)) begin
          unique case (cfg.kind)
            CFG_COARSE: coarse_delay[c] <= cfg.data[DW-1:0];
            CFG_FINE:   fine_offset[c]  <= cfg.data[N_BITS-1:0];
            CFG_WIDTH:  width[c]        <= cfg.data[WW-1:0];
            default: ;
          endcase
        end
      end
    end
  end

endmodule
