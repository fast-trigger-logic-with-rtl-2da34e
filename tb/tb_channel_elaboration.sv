// tb_channel_elaboration: one channel's full preprocessing chain with
// random hits, checked against the reference stream model for several
// (coarse delay, fine offset, width) settings. The expected word of input
// TS t must appear exactly coarse_delay + 4 clocks later.
module tb_channel_elaboration;
  import ftl_ref_pkg::*;
  localparam int NT = 600;
  logic clk = 0, rst = 1;
  logic [4:0]  cdel;
  logic [7:0]  foff;
  logic [6:0]  width;
  logic [23:0] hits;
  logic [31:0] slices;
  logic [63:0] str [0:NT-1];
  int checks = 0, failures = 0;

  channel_elaboration dut (.clk, .rst, .coarse_delay(cdel), .fine_offset(foff), .width,
                           .hits_in(hits), .slices);

  always #5 clk = ~clk;

  initial begin
    #500000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] expw(int t);
    logic [31:0] r = '0;
    if (t >= 0) r |= str[t][31:0];
    if (t >= 1) r |= str[t-1][63:32];
    return r;
  endfunction

  task automatic run(int d, int o, int w);
    cdel = 5'(d); foff = 8'(o); width = 7'(w);
    hits = '1; rst = 1;
    @(negedge clk); @(negedge clk);
    rst = 0;
    for (int t = 0; t < NT; t++) begin
      hits = rand_hits(30);
      str[t] = stream2(hits, o, w);
      @(negedge clk);
      // d + 4 registers: TS of iteration t - d - 3 is visible now
      checks++;
      if (slices !== expw(t - d - 3)) begin
        failures++; $display("d=%0d o=%0d w=%0d t=%0d got %h exp %h", d, o, w, t, slices, expw(t - d - 3));
      end
    end
  endtask

  initial begin
    run(1, 0, 1);
    run(3, 120, 6);
    run(16, 249, 10);
    run(7, 37, 40);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
