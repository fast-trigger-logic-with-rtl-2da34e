// tb_lut_logic_evaluation: loads a random 8-channel trigger table through
// the upload port, then drives random channel words and checks, one clock
// later, every slice's answer (table entry of that slice's channel
// pattern, channel c = address bit c) and the OR of them. Also checks the
// paper's Fig. 4 column: ch0 = 0, ch1 = 1, ch2 = 1 -> address 6.
module tb_lut_logic_evaluation;
  localparam int NCH = 8, S = 32;
  logic clk = 0;
  logic [S-1:0]   sl [NCH];
  logic           we, wd;
  logic [NCH-1:0] wa;
  logic [S-1:0]   sresp;
  logic           resp;
  bit             lut [256];
  int checks = 0, failures = 0, accepts = 0, rejects = 0;

  lut_logic_evaluation #(.NCH(NCH), .S(S)) dut (.clk, .slices_in(sl), .lut_we(we), .lut_addr(wa),
                                                .lut_wdata(wd), .slice_resp(sresp), .response(resp));

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int c = 0; c < NCH; c++) sl[c] = '0;
    we = 0; wa = '0; wd = 0;
    for (int a = 0; a < 256; a++) begin
      lut[a] = (a != 0) && ($urandom % 100 < 4);
      if (a == 6) lut[a] = 1;
      if (a == 1) lut[a] = 0;
      @(negedge clk);
      we = 1; wa = 8'(a); wd = lut[a];
    end
    @(negedge clk);
    we = 0;
    for (int t = 0; t < 1000; t++) begin
      automatic logic [S-1:0] exp_s = '0;
      for (int c = 0; c < NCH; c++) sl[c] = $urandom & $urandom & $urandom;
      if (t == 10) begin  // Fig. 4 column in slice 7 only
        for (int c = 0; c < NCH; c++) sl[c] = '0;
        sl[1][7] = 1; sl[2][7] = 1; sl[0][3] = 1;
      end
      for (int k = 0; k < S; k++) begin
        automatic int a = 0;
        for (int c = 0; c < NCH; c++) a |= int'(sl[c][k]) << c;
        exp_s[k] = lut[a];
      end
      @(negedge clk);
      checks += 2;
      if (sresp !== exp_s) begin failures++; $display("t=%0d slices %h exp %h", t, sresp, exp_s); end
      if (resp !== (|exp_s)) begin failures++; $display("t=%0d response %b", t, resp); end
      if (t == 10 && sresp !== 32'h0000_0080) begin failures++; $display("Fig. 4 case failed"); end
      if (|exp_s) accepts++; else rejects++;
    end
    checks++;
    if (accepts == 0 || rejects == 0) begin failures++; $display("accepts=%0d rejects=%0d", accepts, rejects); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
