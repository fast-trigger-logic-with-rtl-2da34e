// tb_slice_or_multiplicity: random 20-channel words; checks per-slice OR
// and channel count one clock later, including an all-ones TS (count 20).
module tb_slice_or_multiplicity;
  localparam int NCH = 20, S = 32;
  logic clk = 0, rst = 1;
  logic [S-1:0] sl [NCH];
  logic [S-1:0] orw;
  logic [4:0]   mult [S];
  int checks = 0, failures = 0;

  slice_or_multiplicity #(.NCH(NCH), .S(S)) dut (.clk, .rst, .slices_in(sl), .or_word(orw), .mult);

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int c = 0; c < NCH; c++) sl[c] = '0;
    @(negedge clk); @(negedge clk);
    rst = 0;
    for (int t = 0; t < 500; t++) begin
      automatic int cnt [S];
      for (int c = 0; c < NCH; c++) sl[c] = (t == 3) ? '1 : (($urandom % 2) != 0 ? $urandom & $urandom : '0);
      for (int k = 0; k < S; k++) begin
        cnt[k] = 0;
        for (int c = 0; c < NCH; c++) cnt[k] += int'(sl[c][k]);
      end
      @(negedge clk);
      for (int k = 0; k < S; k++) begin
        checks++;
        if (int'(mult[k]) != cnt[k] || orw[k] !== (cnt[k] > 0)) begin
          failures++; $display("t=%0d slice %0d: mult %0d or %b exp %0d", t, k, mult[k], orw[k], cnt[k]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
