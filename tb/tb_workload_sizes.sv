// tb_workload_sizes: the two largest configurations quoted for the
// reference device, run at reduced length.
//  A) trigger module with 15 inputs (32 LUT copies of 2^15 bits, 1 Mbit):
//     a random table is loaded, random hits are played and every TS
//     response is checked at coarse_delay + 5 clocks.
//  B) channel reduction module with 45 inputs of one hit per TS: played in
//     OR mode and with threshold 2; the single cluster field of every TS is
//     checked against the reference model at coarse_delay + 7 clocks.
module tb_workload_sizes;
  import ftl_pkg::*;
  import ftl_ref_pkg::*;
  localparam int NA = 15, NB = 45, NT = 400;
  logic clk = 0, rst = 1;
  cfg_wr_t cfg;
  logic [23:0] ahits [NA];
  logic [31:0] asresp;
  logic        aresp;
  logic [7:0]  bhits [NB];
  logic [7:0]  bout;
  logic [63:0] astr [NA][0:NT-1];
  logic [63:0] bstr [NB][0:NT-1];
  int acd [NA], afo [NA], awd [NA];
  int bcd [NB], bfo [NB], bwd [NB];
  bit lut [2**NA];
  int checks = 0, failures = 0, accepts = 0, rejects = 0, found = 0;

  trigger_module #(.NCH(NA), .TARGET(0)) dut_a (.clk, .rst, .cfg, .hits_in(ahits),
                                               .slice_resp(asresp), .response(aresp));
  channel_reduction #(.NCH(NB), .TARGET(1), .M_HITS(1)) dut_b (.clk, .rst, .cfg, .hits_in(bhits),
                                                              .hits_out(bout));

  always #5 clk = ~clk;

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(int tgt, cfg_kind_e k, int idx, int dat);
    cfg.we = 1; cfg.target = 4'(tgt); cfg.kind = k; cfg.index = 16'(idx); cfg.data = 16'(dat);
    @(negedge clk);
    cfg.we = 0;
  endtask

  function automatic logic [31:0] aword(int c, int t);
    logic [31:0] r = '0;
    if (t >= 0 && t < NT) r |= astr[c][t][31:0];
    if (t >= 1 && t <= NT) r |= astr[c][t-1][63:32];
    return r;
  endfunction

  function automatic logic [31:0] bword(int c, int t);
    logic [31:0] r = '0;
    if (t >= 0 && t < NT) r |= bstr[c][t][31:0];
    if (t >= 1 && t <= NT) r |= bstr[c][t-1][63:32];
    return r;
  endfunction

  function automatic void orm(int x, output logic [31:0] o, output mult_t m);
    o = '0;
    for (int k = 0; k < 32; k++) m[k] = 0;
    for (int c = 0; c < NB; c++) begin
      automatic logic [31:0] w = bword(c, x - bcd[c] - 4);
      for (int k = 0; k < 32; k++) m[k] += int'(w[k]);
      o |= w;
    end
  endfunction

  task automatic play(int thr);
    wr(1, CFG_LUT_THR, 0, thr);
    for (int c = 0; c < NA; c++) ahits[c] = '1;
    for (int c = 0; c < NB; c++) bhits[c] = '1;
    repeat (40) @(negedge clk);
    for (int t = 0; t < NT; t++) begin
      automatic logic [31:0] es = '0;
      for (int c = 0; c < NA; c++) begin
        ahits[c] = rand_hits(5);
        astr[c][t] = stream2(ahits[c], afo[c], awd[c]);
      end
      for (int c = 0; c < NB; c++) begin
        automatic logic [23:0] h = {16'hFFFF, (($urandom % 100) < 3) ? 8'($urandom % 250) : 8'hFF};
        bhits[c] = h[7:0];
        bstr[c][t] = stream2(h, bfo[c], bwd[c]);
      end
      @(negedge clk);
      for (int k = 0; k < 32; k++) begin
        automatic int a = 0;
        for (int c = 0; c < NA; c++) a |= int'(aword(c, t - acd[c] - 4)[k]) << c;
        es[k] = lut[a];
      end
      checks++;
      if (asresp !== es || aresp !== (|es)) begin
        failures++; $display("15ch t=%0d got %h exp %h", t, asresp, es);
      end
      if (|es) accepts++; else rejects++;
      begin
        automatic logic [31:0] op, oc, on;
        automatic mult_t mp, mc, mn;
        automatic logic [23:0] e;
        orm(t - 3, op, mp); orm(t - 2, oc, mc); orm(t - 1, on, mn);
        e = clusters(op[31], oc, on, mc, mn, thr);
        checks++;
        if (bout !== e[7:0]) begin failures++; $display("45ch thr=%0d t=%0d got %h exp %h", thr, t, bout, e[7:0]); end
        if (e[7:0] != 8'hFF) found++;
      end
    end
  endtask

  initial begin
    cfg = '0;
    for (int c = 0; c < NA; c++) ahits[c] = '1;
    for (int c = 0; c < NB; c++) bhits[c] = '1;
    @(negedge clk); @(negedge clk);
    rst = 0;
    for (int c = 0; c < NA; c++) begin
      acd[c] = 1 + int'($urandom % 16); afo[c] = int'($urandom % 250); awd[c] = 1 + int'($urandom % 8);
      wr(0, CFG_COARSE, c, acd[c]); wr(0, CFG_FINE, c, afo[c]); wr(0, CFG_WIDTH, c, awd[c]);
    end
    for (int c = 0; c < NB; c++) begin
      bcd[c] = 1 + int'($urandom % 4); bfo[c] = int'($urandom % 250); bwd[c] = 2 + int'($urandom % 6);
      wr(1, CFG_COARSE, c, bcd[c]); wr(1, CFG_FINE, c, bfo[c]); wr(1, CFG_WIDTH, c, bwd[c]);
    end
    for (int a = 0; a < 2**NA; a++) begin
      lut[a] = (a != 0) && ($urandom % 100 < 20);
      wr(0, CFG_LUT_THR, a, int'(lut[a]));
    end
    play(1);
    play(2);
    checks++;
    if (accepts == 0 || rejects == 0 || found == 0) failures++;
    $display("accepts=%0d rejects=%0d clusters=%0d", accepts, rejects, found);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
