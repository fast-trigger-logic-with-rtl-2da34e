// tb_fine_correction: random hit words (with no-hit fields and the extreme
// times 0 and 249) and random offsets; checks the validity flags and the
// corrected times one clock later.
module tb_fine_correction;
  import ftl_ref_pkg::*;
  logic clk = 0, rst = 1;
  logic [7:0]  offset;
  logic [23:0] hits;
  logic [2:0]  valid;
  logic [26:0] tcorr;
  int checks = 0, failures = 0;

  fine_correction dut (.clk, .rst, .offset, .hits_in(hits), .valid, .time_corr(tcorr));

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [23:0] h_prev;
    int          o_prev;
    hits = '1; offset = 0;
    @(negedge clk); @(negedge clk);
    rst = 0;
    for (int t = 0; t < 2000; t++) begin
      h_prev = (t % 7 == 0) ? {8'd249, 8'd0, 8'hFF} : rand_hits(60);
      o_prev = (t % 11 == 0) ? 249 : int'($urandom % 250);
      hits = h_prev; offset = 8'(o_prev);
      @(negedge clk);
      for (int i = 0; i < 3; i++) begin
        automatic bit ev = (h_prev[i*8 +: 8] != 8'hFF);
        checks++;
        if (valid[i] !== ev) begin
          failures++; $display("t=%0d hit %0d valid %b exp %b", t, i, valid[i], ev);
        end else if (ev && int'(tcorr[i*9 +: 9]) != int'(h_prev[i*8 +: 8]) + o_prev) begin
          failures++; $display("t=%0d hit %0d time %0d exp %0d", t, i, tcorr[i*9 +: 9], int'(h_prev[i*8 +: 8]) + o_prev);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
