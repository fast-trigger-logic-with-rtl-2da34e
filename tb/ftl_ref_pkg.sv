// ftl_ref_pkg: behavioural reference model of the trigger algorithm, used
// by the testbenches to compute expected outputs independently of the RTL.
// It works time slot by time slot at the default sizes (8-bit times, 3 hits
// per TS, 3 bits dropped, 32 slices per TS) and is written as plain loops
// over hits and slices, not as a copy of the pipelined RTL.
package ftl_ref_pkg;

  localparam int N = 8;
  localparam int M = 3;
  localparam int P = 3;
  localparam int S = 32;

  typedef int mult_t [S];

  // Random hit word set: each field present with probability pct %.
  function automatic logic [M*N-1:0] rand_hits(int pct);
    logic [M*N-1:0] h;
    for (int i = 0; i < M; i++)
      h[i*N +: N] = (($urandom % 100) < pct) ? N'($urandom % 250) : '1;
    return h;
  endfunction

  // Stream contribution of one channel's TS over two TS (bit k < S: this
  // TS, bit k >= S: next TS).
  function automatic logic [2*S-1:0] stream2(logic [M*N-1:0] hits, int offset, int width);
    logic [2*S-1:0] r = '0;
    for (int i = 0; i < M; i++) begin
      automatic int t = int'(hits[i*N +: N]);
      if (t != 255) begin
        automatic int s = (t + offset) / 8;
        for (int k = s; k < s + width && k < 2 * S; k++) r[k] = 1'b1;
      end
    end
    return r;
  endfunction

  // Cluster times of TS `cur`, given the last bit of the previous OR word
  // and the OR/multiplicity words of this and the next TS.
  function automatic logic [M*N-1:0] clusters(logic prev_last, logic [S-1:0] cur_or,
      logic [S-1:0] nxt_or, mult_t cur_m, mult_t nxt_m, int thr);
    logic [M*N-1:0] r = '1;
    int n = 0;
    for (int i = 0; i < S; i++) begin
      automatic logic prv = (i == 0) ? prev_last : cur_or[i-1];
      if (cur_or[i] && !prv) begin
        // walk the run over this and the next TS
        automatic bit ok = 0;
        for (int j = i; j < 2 * S; j++) begin
          automatic logic v = (j < S) ? cur_or[j] : nxt_or[j-S];
          automatic int   m = (j < S) ? cur_m[j] : nxt_m[j-S];
          if (!v) break;
          if (m >= thr) ok = 1;
        end
        if (ok && n < M) begin
          r[n*N +: N] = N'(i * 8);
          n++;
        end
      end
    end
    return r;
  endfunction

endpackage
