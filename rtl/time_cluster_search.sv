// time_cluster_search: turns the OR / multiplicity words of a group of
// channels back into hit times ("cluster times").
//
// A cluster is a run of consecutive '1' bits in the OR word. It is reported
// if at least one of its slices has a multiplicity >= threshold: threshold 1
// makes the block an OR of the channels, a higher threshold a majority OR.
// The reported time is the first slice of the run expressed in input time
// units (slice index * 2^P_TRUNC), so the output has the same format as a
// front-end channel: M_HITS fields of N_BITS, unused fields all ones.
//
// How it works: the incoming word is held for one time slot (TS) so that a
// run starting in TS n can be followed into TS n+1. A backward scan over
// the 2S slices of the two TS marks the slices from which a qualifying slice
// is reachable inside the same run; a run start in TS n that is so marked
// is a cluster. A run continuing from TS n-1 is not a new start. The
// earliest M_HITS clusters of the TS are output.
//
// Timing: hits_out(t) holds the clusters of the word presented at t-2.
//
// The run / threshold / first-bit rule follows the paper. The one-TS look
// ahead (a run is judged on at most its part in TS n and n+1), keeping the
// earliest M_HITS clusters, and the time encoding are this design's choices.
module time_cluster_search #(
  parameter int unsigned NCH     = 20,
  parameter int unsigned N_BITS  = ftl_pkg::N_BITS_DEF,
  parameter int unsigned M_HITS  = ftl_pkg::M_HITS_DEF,
  parameter int unsigned P_TRUNC = ftl_pkg::P_DEF,
  localparam int unsigned S      = 2 ** (N_BITS - P_TRUNC),
  localparam int unsigned CW     = $clog2(NCH + 1)
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic [CW-1:0]            threshold,
  input  logic [S-1:0]             or_word,
  input  logic [CW-1:0]            mult [S],
  output logic [M_HITS*N_BITS-1:0] hits_out
);

  logic [S-1:0]            a_or;        // TS under examination
  logic [CW-1:0]           a_mult [S];
  logic                    prev_last;   // last slice of the TS before it
  logic [2*S:0]            reach;       // qualifying slice reachable in run
  logic [S-1:0]            cluster;     // qualifying run starts in a_or
  logic [M_HITS*N_BITS-1:0] times;

  always_comb begin
    reach[2*S] = 1'b0;
    for (int j = 2 * S - 1; j >= 0; j--) begin
      logic          v;
      logic [CW-1:0] m;
      v = (j < S) ? a_or[j] : or_word[j - S];
      m = (j < S) ? a_mult[j] : mult[j - S];
      reach[j] = v && ((m >= threshold) || reach[j + 1]);
    end
    for (int i = 0; i < S; i++)
      cluster[i] = a_or[i] && !((i == 0) ? prev_last : a_or[(i == 0) ? 0 : i - 1]) && reach[i];
  end

  always_comb begin
    int n;
    n = 0;
    times = '1;
    for (int i = 0; i < S; i++) begin
      if (cluster[i] && n < int'(M_HITS)) begin
        times[n*N_BITS +: N_BITS] = N_BITS'(i << P_TRUNC);
        n++;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      a_or      <= '0;
      prev_last <= 1'b0;
      for (int k = 0; k < S; k++) a_mult[k] <= '0;
      hits_out  <= '1;
    end else begin
      a_or      <= or_word;
      a_mult    <= mult;
      prev_last <= a_or[S-1];
      hits_out  <= times;
    end
  end

endmodule
