// slice_or_multiplicity: first combining step of the channel reduction.
//
// For every time slice k of the current time slot, or_word[k] is the OR of
// bit k of all NCH channel words and mult[k] is how many of those bits are
// '1' (the "multiplicity" of the slice). Both follow the paper's Fig. 5
// scheme; registering the result (one clock) is this design's choice.
module slice_or_multiplicity #(
  parameter int unsigned NCH = 20,
  parameter int unsigned S   = 2 ** (ftl_pkg::N_BITS_DEF - ftl_pkg::P_DEF),
  localparam int unsigned CW = $clog2(NCH + 1)
) (
  input  logic          clk,
  input  logic          rst,
  input  logic [S-1:0]  slices_in [NCH],
  output logic [S-1:0]  or_word,
  output logic [CW-1:0] mult [S]
);

  always_ff @(posedge clk) begin
    if (rst) begin
      or_word <= '0;
      for (int k = 0; k < S; k++) mult[k] <= '0;
    end else begin
      for (int k = 0; k < S; k++) begin
        logic [CW-1:0] n;
        n = '0;
        for (int c = 0; c < NCH; c++) n += CW'(slices_in[c][k]);
        mult[k]    <= n;
        or_word[k] <= (n != '0);
      end
    end
  end

endmodule
