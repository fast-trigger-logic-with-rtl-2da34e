// tb_coarse_correction: checks the TS delay line against a history of its
// inputs for several delays, including the smallest (1) and largest
// (DEPTH), and checks that only no-hit words come out while the RAM fills
// after reset.
module tb_coarse_correction;
  localparam int DEPTH = 16;
  logic clk = 0, rst = 1;
  logic [4:0]  delay;
  logic [23:0] din, dout;
  logic [23:0] hist [0:4095];
  int checks = 0, failures = 0, cyc = 0;

  coarse_correction #(.DEPTH(DEPTH)) dut (.clk, .rst, .delay, .hits_in(din), .hits_out(dout));

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int d, int n);
    int t0;
    delay = 5'(d);
    rst = 1;
    @(negedge clk); @(negedge clk);
    rst = 0;
    t0 = 0;
    for (int t = 0; t < n; t++) begin
      din = 24'($urandom);
      hist[t] = din;
      @(negedge clk);  // output of cycle t is now visible
      checks++;
      if (t >= d - 1) begin
        // word presented in cycle t+1-d is delivered after the edge ending cycle t
        if (dout !== hist[t + 1 - d]) begin
          failures++;
          $display("delay %0d cycle %0d: got %h exp %h", d, t, dout, hist[t + 1 - d]);
        end
      end else if (dout !== '1) begin
        failures++;
        $display("delay %0d cycle %0d: expected no-hit while filling, got %h", d, t, dout);
      end
    end
  endtask

  initial begin
    din = '1; delay = 1;
    run(1, 100);
    run(2, 100);
    run(5, 100);
    run(16, 100);
    run(9, 100);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
