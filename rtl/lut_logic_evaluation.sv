// lut_logic_evaluation: evaluates an arbitrary logical condition of NCH
// channels in every time slice of a time slot (TS) and ORs the results.
//
// The NCH channel words (S bits each) are regrouped into S words of NCH
// bits, one per slice, channel c giving address bit c. Each slice word
// addresses its own copy of the trigger look-up table, a 2^NCH x 1 bit RAM
// preloaded by the host with the response wanted for every channel
// pattern. All S copies are read in the same clock, so every TS is evaluated
// and there is no dead time; the TS is accepted when any slice answers '1'.
//
// Upload: lut_we writes lut_wdata at lut_addr into all S copies at once.
// Timing: the RAM read is registered, so slice_resp and response at clock t
// belong to the slice words presented at t-1. The OR is combinational on
// the RAM outputs.
//
// The LUT-per-slice scheme follows the paper; the address bit order, the
// one-bit upload and the placement of the OR in the RAM-read clock are this
// design's choices. LUT contents are not reset: they must be loaded first.
module lut_logic_evaluation #(
  parameter int unsigned NCH = 8,
  parameter int unsigned S   = 2 ** (ftl_pkg::N_BITS_DEF - ftl_pkg::P_DEF)
) (
  input  logic           clk,
  input  logic [S-1:0]   slices_in [NCH],
  input  logic           lut_we,
  input  logic [NCH-1:0] lut_addr,
  input  logic           lut_wdata,
  output logic [S-1:0]   slice_resp,
  output logic           response
);

  for (genvar k = 0; k < S; k++) begin : g_slice
    logic           lut [2**NCH];
    logic [NCH-1:0] addr;

    always_comb
      for (int c = 0; c < NCH; c++) addr[c] = slices_in[c][k];

    always_ff @(posedge clk) begin
      if (lut_we) lut[lut_addr] <= lut_wdata;
      slice_resp[k] <= lut[addr];
    end
  end

  assign response = |slice_resp;

endmodule
