// tb_fast_trigger_system: the whole trigger at its default size (8 trigger
// inputs; input 0 fed by a 20-channel reduction module, inputs 1..7 direct).
// All constants and a random trigger table are loaded over the upload bus,
// random hits are played, and every TS response is compared with a
// reference model of both modules. The reduction module runs first in OR
// mode (threshold 1), then, after a mode switch, as a majority OR
// (threshold 2). The test counts how often each mechanism of the design
// was exercised and fails if one never was: coarse delays above one TS,
// several hits of one channel in one TS, a fine correction moving a hit
// into the next TS, a window stretching into the next TS, two TS merged in
// one word, a cluster found, a cluster suppressed by the threshold, more
// clusters in a TS than output fields, accepted and rejected TS.
module tb_fast_trigger_system;
  import ftl_pkg::*;
  import ftl_ref_pkg::*;
  localparam int NCH = 8, RCH = 20, NT = 1500;
  logic clk = 0, rst = 1;
  cfg_wr_t cfg;
  logic [23:0] dhits [NCH-1];
  logic [23:0] rhits [1][RCH];
  logic [31:0] sresp;
  logic        resp;
  logic [63:0] rstr [RCH][0:NT-1];   // reduction channels' streams
  logic [63:0] tstr [NCH][0:NT-1];   // trigger inputs' streams
  int rcd [RCH], rfo [RCH], rwd [RCH];
  int tcd [NCH], tfo [NCH], twd [NCH];
  bit lut [256];
  int checks = 0, failures = 0;
  int n_coarse = 0, n_multi = 0, n_fine_spill = 0, n_win_spill = 0, n_merge = 0;
  int n_cluster = 0, n_suppr = 0, n_crowd = 0, n_accept = 0, n_reject = 0, n_switch = 0;

  fast_trigger_system dut (.clk, .rst, .cfg, .direct_hits(dhits), .red_hits(rhits),
                           .slice_resp(sresp), .response(resp));

  always #5 clk = ~clk;

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(int tgt, cfg_kind_e k, int idx, int dat);
    cfg.we = 1; cfg.target = 4'(tgt); cfg.kind = k; cfg.index = 16'(idx); cfg.data = 16'(dat);
    @(negedge clk);
    cfg.we = 0;
  endtask

  function automatic logic [31:0] rword(int c, int t);
    logic [31:0] r = '0;
    if (t >= 0 && t < NT) r |= rstr[c][t][31:0];
    if (t >= 1 && t <= NT) r |= rstr[c][t-1][63:32];
    return r;
  endfunction

  function automatic logic [31:0] tword(int c, int t);
    logic [31:0] r = '0;
    if (t >= 0 && t < NT) r |= tstr[c][t][31:0];
    if (t >= 1 && t <= NT) r |= tstr[c][t-1][63:32];
    return r;
  endfunction

  function automatic void orm(int x, output logic [31:0] o, output mult_t m);
    o = '0;
    for (int k = 0; k < 32; k++) m[k] = 0;
    for (int c = 0; c < RCH; c++) begin
      automatic logic [31:0] w = rword(c, x - rcd[c] - 4);
      for (int k = 0; k < 32; k++) m[k] += int'(w[k]);
      o |= w;
    end
  endfunction

  // cluster times the reduction module shows at check u
  function automatic logic [23:0] red_out(int u, int thr, output logic [23:0] eor);
    logic [31:0] op, oc, on;
    mult_t mp, mc, mn;
    orm(u - 3, op, mp); orm(u - 2, oc, mc); orm(u - 1, on, mn);
    eor = clusters(op[31], oc, on, mc, mn, 1);
    return clusters(op[31], oc, on, mc, mn, thr);
  endfunction

  task automatic play(int thr);
    wr(1, CFG_LUT_THR, 0, thr);
    n_switch++;
    for (int c = 0; c < NCH - 1; c++) dhits[c] = '1;
    for (int c = 0; c < RCH; c++) rhits[0][c] = '1;
    repeat (60) @(negedge clk);
    for (int t = 0; t < NT; t++) begin
      automatic logic [23:0] ro, ror;
      automatic logic [31:0] es = '0;
      for (int c = 0; c < RCH; c++) begin
        rhits[0][c] = rand_hits(2);
        if (t % 97 == 5 && c < 4) rhits[0][c] = {16'hFFFF, 8'(c * 64)};  // four separate runs
        rstr[c][t] = stream2(rhits[0][c], rfo[c], rwd[c]);
      end
      for (int c = 1; c < NCH; c++) begin
        dhits[c-1] = rand_hits(8);
        tstr[c][t] = stream2(dhits[c-1], tfo[c], twd[c]);
        for (int i = 0; i < 3; i++) if (dhits[c-1][i*8 +: 8] != 8'hFF) begin
          if ((int'(dhits[c-1][i*8 +: 8]) + tfo[c]) / 8 >= 32) n_fine_spill++;
          else if ((int'(dhits[c-1][i*8 +: 8]) + tfo[c]) / 8 + twd[c] > 32) n_win_spill++;
        end
        if (dhits[c-1][15:8] != 8'hFF) n_multi++;
      end
      // trigger input 0 in iteration t is what the reduction showed at check t-1
      ro = red_out(t - 1, thr, ror);
      tstr[0][t] = stream2(ro, tfo[0], twd[0]);
      if (ro[7:0] != 8'hFF) n_cluster++;
      if (ro != ror) n_suppr++;
      if (ror[23:16] != 8'hFF) n_crowd++;
      @(negedge clk);
      for (int k = 0; k < 32; k++) begin
        automatic int a = 0;
        for (int c = 0; c < NCH; c++) a |= int'(tword(c, t - tcd[c] - 4)[k]) << c;
        es[k] = lut[a];
      end
      for (int c = 1; c < NCH; c++)
        if (t >= 1 && tstr[c][t][31:0] != 0 && tstr[c][t-1][63:32] != 0) n_merge++;
      checks++;
      if (sresp !== es || resp !== (|es)) begin
        failures++; $display("thr=%0d t=%0d got %h exp %h", thr, t, sresp, es);
      end
      if (|es) n_accept++; else n_reject++;
    end
  endtask

  initial begin
    cfg = '0;
    for (int c = 0; c < NCH - 1; c++) dhits[c] = '1;
    for (int c = 0; c < RCH; c++) rhits[0][c] = '1;
    @(negedge clk); @(negedge clk);
    rst = 0;
    for (int c = 0; c < RCH; c++) begin
      rcd[c] = (c < 4) ? 2 : 1 + int'($urandom % 6);
      rfo[c] = (c < 4) ? 0 : int'($urandom % 250);
      rwd[c] = (c < 4) ? 3 : 2 + int'($urandom % 8);
      wr(1, CFG_COARSE, c, rcd[c]); wr(1, CFG_FINE, c, rfo[c]); wr(1, CFG_WIDTH, c, rwd[c]);
    end
    for (int c = 0; c < NCH; c++) begin
      tcd[c] = 1 + int'($urandom % 16); tfo[c] = int'($urandom % 250); twd[c] = 2 + int'($urandom % 10);
      if (tcd[c] > 1) n_coarse++;
      wr(0, CFG_COARSE, c, tcd[c]); wr(0, CFG_FINE, c, tfo[c]); wr(0, CFG_WIDTH, c, twd[c]);
    end
    for (int a = 0; a < 256; a++) begin
      lut[a] = (a != 0) && ($urandom % 100 < 30);
      wr(0, CFG_LUT_THR, a, int'(lut[a]));
    end
    play(1);
    play(2);
    $display("coarse>1=%0d multi-hit=%0d fine-spill=%0d window-spill=%0d merge=%0d", n_coarse, n_multi, n_fine_spill, n_win_spill, n_merge);
    $display("clusters=%0d suppressed=%0d crowded=%0d accepts=%0d rejects=%0d mode-switches=%0d", n_cluster, n_suppr, n_crowd, n_accept, n_reject, n_switch);
    begin
      automatic int cnt [10] = '{n_coarse, n_multi, n_fine_spill, n_win_spill, n_merge, n_cluster, n_suppr, n_crowd, n_accept, n_reject};
      for (int i = 0; i < 10; i++) begin
        checks++;
        if (cnt[i] == 0) begin failures++; $display("mechanism %0d never exercised", i); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
