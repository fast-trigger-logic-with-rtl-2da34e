// fine_correction: validity check and fine time alignment of the hits of
// one channel in one time slot (TS).
//
// Each of the M_HITS hit words is compared with the no-hit code (all N_BITS
// at '1') and, in parallel, the channel's constant offset is added to it.
// The sum keeps one extra bit: with times 0..249 and offsets 0..249 the
// corrected time lies in 0..498, i.e. it may fall in the next TS, which the
// window generation handles. Only positive offsets exist, as the paper
// requires for the two-TS window scheme.
//
// Interface: hits_in field h at [h*N_BITS +: N_BITS]; valid[h] and
// time_corr[h*(N_BITS+1) +: N_BITS+1] describe the same hit.
// Timing: one register stage (the paper's one clock for fine correction).
//
// Treating only the all-ones word as "no hit" follows the paper; the reset
// value (no hits) is this design's choice.
module fine_correction #(
  parameter int unsigned N_BITS = ftl_pkg::N_BITS_DEF,
  parameter int unsigned M_HITS = ftl_pkg::M_HITS_DEF,
  localparam int unsigned TW    = N_BITS + 1
) (
  input  logic                   clk,
  input  logic                   rst,
  input  logic [N_BITS-1:0]      offset,
  input  logic [M_HITS*N_BITS-1:0] hits_in,
  output logic [M_HITS-1:0]      valid,
  output logic [M_HITS*TW-1:0]   time_corr
);

  always_ff @(posedge clk) begin
    if (rst) begin
      valid     <= '0;
      time_corr <= '0;
    end else begin
      for (int h = 0; h < M_HITS; h++) begin
        valid[h]                <= (hits_in[h*N_BITS +: N_BITS] != '1);
        time_corr[h*TW +: TW]   <= TW'(hits_in[h*N_BITS +: N_BITS]) + TW'(offset);
      end
    end
  end

endmodule
