// tb_time_cluster_search: first replays the example of the paper's Fig. 5
// on a 16-slice instance (4 low bits dropped): OR word 0111110001111000,
// multiplicities 0123210001221000. Threshold 3 must give one cluster at
// slice 1 (time 16), threshold 1 two clusters at slices 1 and 9 (times 16
// and 144). Then random OR/multiplicity words on the default 32-slice
// instance are checked against the reference cluster model, two clocks
// later, counting OR-mode clusters, clusters suppressed by the majority
// threshold, runs continuing across TS and TS with more than three runs.
module tb_time_cluster_search;
  import ftl_ref_pkg::*;
  localparam int NT = 3000;
  logic clk = 0, rst = 1;
  // Fig. 5 instance
  logic [4:0]  thr5;
  logic [15:0] or5;
  logic [4:0]  m5 [16];
  logic [23:0] out5;
  // default instance
  logic [4:0]  thr;
  logic [31:0] orw;
  logic [4:0]  mult [32];
  logic [23:0] out;
  logic [31:0] ORW [0:NT];
  mult_t       MW  [0:NT];
  int          THR [0:NT];
  int checks = 0, failures = 0, suppressed = 0, found = 0, crossing = 0, crowded = 0;

  time_cluster_search #(.NCH(20), .P_TRUNC(4)) dut5 (.clk, .rst, .threshold(thr5), .or_word(or5), .mult(m5), .hits_out(out5));
  time_cluster_search #(.NCH(20)) dut (.clk, .rst, .threshold(thr), .or_word(orw), .mult, .hits_out(out));

  always #5 clk = ~clk;

  initial begin
    #500000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fig5(int th, logic [23:0] expect_out);
    const int ms [16] = '{0,1,2,3,2,1,0,0,0,1,2,2,1,0,0,0};
    thr5 = 5'(th);
    for (int k = 0; k < 16; k++) begin m5[k] = 5'(ms[k]); or5[k] = ms[k] > 0; end
    @(negedge clk);
    or5 = '0; for (int k = 0; k < 16; k++) m5[k] = '0;
    @(negedge clk);
    checks++;
    if (out5 !== expect_out) begin failures++; $display("Fig. 5 threshold %0d: got %h exp %h", th, out5, expect_out); end
    @(negedge clk);
  endtask

  initial begin
    thr5 = 1; or5 = '0; thr = 1; orw = '0;
    for (int k = 0; k < 16; k++) m5[k] = '0;
    for (int k = 0; k < 32; k++) mult[k] = '0;
    @(negedge clk); @(negedge clk);
    rst = 0;
    fig5(3, {8'hFF, 8'hFF, 8'd16});
    fig5(1, {8'hFF, 8'd144, 8'd16});
    // random part: words presented in iteration t appear two clocks later
    for (int t = 0; t < NT; t++) begin
      automatic logic [31:0] o = '0;
      automatic int th = (t / 500) % 3 + 1;
      for (int k = 0; k < 32; k++) begin
        automatic int m = ($urandom % 3 == 0) ? int'($urandom % 5) : 0;
        if (k > 0 && o[k-1] && $urandom % 3 != 0) m = 1 + int'($urandom % 4);
        MW[t][k] = m; o[k] = (m > 0); mult[k] = 5'(m);
      end
      ORW[t] = o; orw = o; THR[t] = th; thr = 5'(th);
      @(negedge clk);
      if (t >= 2) begin
        automatic int u = t - 1;  // TS whose clusters are visible now
        automatic logic [23:0] e = clusters(ORW[u-1][31], ORW[u], ORW[u+1], MW[u], MW[u+1], THR[u+1]);
        automatic logic [23:0] eor = clusters(ORW[u-1][31], ORW[u], ORW[u+1], MW[u], MW[u+1], 1);
        checks++;
        if (out !== e) begin failures++; $display("t=%0d got %h exp %h", t, out, e); end
        if (e != eor) suppressed++;
        if (e[7:0] != 8'hFF) found++;
        if (ORW[u][31] && ORW[u+1][0]) crossing++;
        if (eor[23:16] != 8'hFF && $countones(ORW[u] & ~{ORW[u][30:0], ORW[u-1][31]}) > 3) crowded++;
      end
    end
    checks++;
    if (suppressed == 0 || found == 0 || crossing == 0 || crowded == 0) failures++;
    $display("found=%0d suppressed=%0d crossing=%0d crowded=%0d", found, suppressed, crossing, crowded);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
