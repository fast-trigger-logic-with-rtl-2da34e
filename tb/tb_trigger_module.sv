// tb_trigger_module: the 8-channel trigger module end to end. Per-channel
// coarse delays, fine offsets and widths and a random trigger table are
// loaded over the upload bus; random hits are then played and the response
// of every TS is compared with the reference model at exactly
// coarse_delay + 5 clocks after the hits (the paper's 5-clock algorithm
// latency plus the RAM delay). A second table, "channel 0 AND NOT
// channel 1" (a coincidence with a veto), is then loaded and checked the
// same way.
module tb_trigger_module;
  import ftl_pkg::*;
  import ftl_ref_pkg::*;
  localparam int NCH = 8, NT = 1500;
  logic clk = 0, rst = 1;
  cfg_wr_t cfg;
  logic [23:0] hits [NCH];
  logic [31:0] sresp;
  logic        resp;
  logic [63:0] str [NCH][0:NT-1];
  int cd [NCH], fo [NCH], wd [NCH];
  bit lut [256];
  int checks = 0, failures = 0, accepts = 0, rejects = 0;

  trigger_module #(.NCH(NCH)) dut (.clk, .rst, .cfg, .hits_in(hits), .slice_resp(sresp), .response(resp));

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(cfg_kind_e k, int idx, int dat);
    cfg.we = 1; cfg.target = 0; cfg.kind = k; cfg.index = 16'(idx); cfg.data = 16'(dat);
    @(negedge clk);
    cfg.we = 0;
  endtask

  function automatic logic [31:0] word(int c, int t);
    logic [31:0] r = '0;
    if (t >= 0) r |= str[c][t][31:0];
    if (t >= 1) r |= str[c][t-1][63:32];
    return r;
  endfunction

  task automatic play(string name);
    // drain what an earlier run left in the pipeline
    for (int c = 0; c < NCH; c++) hits[c] = '1;
    repeat (40) @(negedge clk);
    for (int t = 0; t < NT; t++) begin
      automatic logic [31:0] es = '0;
      for (int c = 0; c < NCH; c++) begin
        hits[c] = rand_hits(8);
        str[c][t] = stream2(hits[c], fo[c], wd[c]);
      end
      @(negedge clk);
      for (int k = 0; k < 32; k++) begin
        automatic int a = 0;
        for (int c = 0; c < NCH; c++) a |= int'(word(c, t - cd[c] - 4)[k]) << c;
        es[k] = lut[a];
      end
      checks++;
      if (sresp !== es || resp !== (|es)) begin
        failures++; $display("%s t=%0d got %h exp %h", name, t, sresp, es);
      end
      if (|es) accepts++; else rejects++;
    end
  endtask

  task automatic load_params();
    for (int c = 0; c < NCH; c++) begin
      wr(CFG_COARSE, c, cd[c]); wr(CFG_FINE, c, fo[c]); wr(CFG_WIDTH, c, wd[c]);
    end
  endtask

  initial begin
    cfg = '0;
    for (int c = 0; c < NCH; c++) hits[c] = '1;
    @(negedge clk); @(negedge clk);
    rst = 0;
    for (int c = 0; c < NCH; c++) begin
      cd[c] = 1 + int'($urandom % 16); fo[c] = int'($urandom % 250); wd[c] = 1 + int'($urandom % 12);
    end
    cd[0] = 1; cd[1] = 16;
    for (int a = 0; a < 256; a++) begin
      lut[a] = (a != 0) && ($urandom % 100 < 30);
      wr(CFG_LUT_THR, a, int'(lut[a]));
    end
    load_params();
    play("random table");
    // coincidence of channel 0 with a veto on channel 1
    for (int a = 0; a < 256; a++) begin
      lut[a] = a[0] && !a[1];
      wr(CFG_LUT_THR, a, int'(lut[a]));
    end
    play("ch0 and not ch1");
    $display("accepts=%0d rejects=%0d", accepts, rejects);
    checks++;
    if (accepts == 0 || rejects == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
