// tb_channel_reduction: 20-channel reduction module end to end. Channel
// constants are loaded over the upload bus; random hits are played first
// with multiplicity threshold 1 (OR mode) and then with threshold 3
// (majority OR). The cluster times of each TS are compared with the
// reference model (per-channel streams, OR and count per slice, run
// search) coarse_delay + 7 clocks after the hits.
module tb_channel_reduction;
  import ftl_pkg::*;
  import ftl_ref_pkg::*;
  localparam int NCH = 20, NT = 1200;
  logic clk = 0, rst = 1;
  cfg_wr_t cfg;
  logic [23:0] hits [NCH];
  logic [23:0] out;
  logic [63:0] str [NCH][0:NT-1];
  int cd [NCH], fo [NCH], wd [NCH];
  int checks = 0, failures = 0, found = 0, suppressed = 0;

  channel_reduction #(.NCH(NCH), .TARGET(3)) dut (.clk, .rst, .cfg, .hits_in(hits), .hits_out(out));

  always #5 clk = ~clk;

  initial begin
    #3000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(cfg_kind_e k, int idx, int dat);
    cfg.we = 1; cfg.target = 3; cfg.kind = k; cfg.index = 16'(idx); cfg.data = 16'(dat);
    @(negedge clk);
    cfg.we = 0;
  endtask

  function automatic logic [31:0] word(int c, int t);
    logic [31:0] r = '0;
    if (t >= 0 && t < NT) r |= str[c][t][31:0];
    if (t >= 1 && t <= NT) r |= str[c][t-1][63:32];
    return r;
  endfunction

  // OR word and multiplicities entering the cluster search in iteration x
  function automatic void orm(int x, output logic [31:0] o, output mult_t m);
    o = '0;
    for (int k = 0; k < 32; k++) m[k] = 0;
    for (int c = 0; c < NCH; c++) begin
      automatic logic [31:0] w = word(c, x - cd[c] - 4);
      for (int k = 0; k < 32; k++) m[k] += int'(w[k]);
      o |= w;
    end
  endfunction

  task automatic play(int thr);
    wr(CFG_LUT_THR, 0, thr);
    for (int c = 0; c < NCH; c++) hits[c] = '1;
    repeat (40) @(negedge clk);
    for (int t = 0; t < NT; t++) begin
      for (int c = 0; c < NCH; c++) begin
        hits[c] = rand_hits(2);
        str[c][t] = stream2(hits[c], fo[c], wd[c]);
      end
      @(negedge clk);
      begin
        automatic logic [31:0] op, oc, on;
        automatic mult_t mp, mc, mn;
        automatic logic [23:0] e, eor;
        orm(t - 3, op, mp); orm(t - 2, oc, mc); orm(t - 1, on, mn);
        e   = clusters(op[31], oc, on, mc, mn, thr);
        eor = clusters(op[31], oc, on, mc, mn, 1);
        checks++;
        if (out !== e) begin failures++; $display("thr=%0d t=%0d got %h exp %h", thr, t, out, e); end
        if (e[7:0] != 8'hFF) found++;
        if (e != eor) suppressed++;
      end
    end
  endtask

  initial begin
    cfg = '0;
    for (int c = 0; c < NCH; c++) hits[c] = '1;
    @(negedge clk); @(negedge clk);
    rst = 0;
    for (int c = 0; c < NCH; c++) begin
      cd[c] = 1 + int'($urandom % 6); fo[c] = int'($urandom % 250); wd[c] = 2 + int'($urandom % 8);
      wr(CFG_COARSE, c, cd[c]); wr(CFG_FINE, c, fo[c]); wr(CFG_WIDTH, c, wd[c]);
    end
    play(1);
    play(3);
    checks++;
    if (found == 0 || suppressed == 0) failures++;
    $display("found=%0d suppressed=%0d", found, suppressed);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
