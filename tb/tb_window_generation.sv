// tb_window_generation: drives random corrected hits and widths and checks
// each output TS word against the reference stream model, three clocks
// after the TS entered. Counts how often a stream crossed into the next TS
// and how often a word combined contributions of two TS, and fails if
// either never happened. Also replays the case of the paper's Fig. 2: a
// hit near the end of a TS whose stream continues into the next one.
module tb_window_generation;
  import ftl_ref_pkg::*;
  localparam int NT = 3000;
  logic clk = 0, rst = 1;
  logic [6:0]  width;
  logic [2:0]  valid;
  logic [26:0] tcorr;
  logic [31:0] slices;
  logic [63:0] str [0:NT];
  int checks = 0, failures = 0, spills = 0, merges = 0;

  window_generation dut (.clk, .rst, .width, .valid, .time_corr(tcorr), .slices);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    valid = '0; tcorr = '0; width = 0;
    @(negedge clk); @(negedge clk);
    rst = 0;
    for (int t = 0; t < NT; t++) begin
      automatic logic [63:0] s = '0;
      automatic int w = (t < 20) ? ((t == 5) ? 6 : 0) : int'($urandom % 20);
      width = 7'(w);
      for (int i = 0; i < 3; i++) begin
        automatic int tc = int'($urandom % 499);
        if (t == 5) tc = (i == 0) ? 232 : 0;  // Fig. 2: stream from slice 29, 6 long
        valid[i] = (t == 5) ? (i == 0) : (($urandom % 100) < 25);
        tcorr[i*9 +: 9] = 9'(tc);
        if (valid[i]) for (int k = tc / 8; k < tc / 8 + w && k < 64; k++) s[k] = 1'b1;
      end
      str[t] = s;
      @(negedge clk);
      if (t >= 3) begin  // three registers: TS of iteration t-2 is visible now
        automatic logic [31:0] exp_w = str[t-2][31:0] | str[t-3][63:32];
        checks++;
        if (slices !== exp_w) begin
          failures++; $display("t=%0d got %h exp %h", t, slices, exp_w);
        end
        if (str[t-2][63:32] != 0) spills++;
        if (str[t-2][31:0] != 0 && str[t-3][63:32] != 0) merges++;
        if (t == 7 && exp_w != 32'he000_0000) begin
          failures++; $display("Fig. 2 case: reference word %h", exp_w);
        end
        if (t == 8 && exp_w != 32'h0000_0007) begin
          failures++; $display("Fig. 2 case: reference next word %h", exp_w);
        end
      end
    end
    checks += 2;
    if (spills == 0) begin failures++; $display("no stream crossed into the next TS"); end
    if (merges == 0) begin failures++; $display("no two-TS merge happened"); end
    $display("spills=%0d merges=%0d", spills, merges);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
