// tb_param_regs: checks reset values, writes of each kind to each channel,
// and that writes for another target, for an out-of-range channel or of the
// LUT/threshold kind leave the registers alone.
module tb_param_regs;
  import ftl_pkg::*;
  localparam int NCH = 8;
  logic clk = 0, rst = 1;
  cfg_wr_t cfg;
  logic [4:0] cd [NCH];
  logic [7:0] fo [NCH];
  logic [6:0] wd [NCH];
  int ecd [NCH], efo [NCH], ewd [NCH];
  int checks = 0, failures = 0;

  param_regs #(.NCH(NCH), .TARGET(2)) dut (.clk, .rst, .cfg, .coarse_delay(cd), .fine_offset(fo), .width(wd));

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare(string when);
    for (int c = 0; c < NCH; c++) begin
      checks++;
      if (int'(cd[c]) != ecd[c] || int'(fo[c]) != efo[c] || int'(wd[c]) != ewd[c]) begin
        failures++;
        $display("%s ch%0d: got %0d/%0d/%0d exp %0d/%0d/%0d", when, c, cd[c], fo[c], wd[c], ecd[c], efo[c], ewd[c]);
      end
    end
  endtask

  initial begin
    cfg = '0;
    @(negedge clk); @(negedge clk);
    rst = 0;
    for (int c = 0; c < NCH; c++) begin ecd[c] = 1; efo[c] = 0; ewd[c] = 0; end
    compare("reset");
    for (int n = 0; n < 400; n++) begin
      automatic int tgt  = ($urandom % 4 == 0) ? 1 : 2;
      automatic int kind = $urandom % 4;
      automatic int idx  = $urandom % 10;
      automatic int dat  = $urandom % 65536;
      cfg.we = 1; cfg.target = 4'(tgt); cfg.kind = cfg_kind_e'(kind);
      cfg.index = 16'(idx); cfg.data = 16'(dat);
      if (tgt == 2 && idx < NCH) begin
        if (kind == 0) ecd[idx] = dat % 32;
        if (kind == 1) efo[idx] = dat % 256;
        if (kind == 2) ewd[idx] = dat % 128;
      end
      @(negedge clk);
      cfg.we = 0;
      compare("write");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
