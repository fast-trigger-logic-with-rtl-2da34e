// coarse_correction: per-channel delay line with a granularity of one time
// slot (TS), the first alignment stage of the trigger.
//
// Every clock the M_HITS hit words of the current TS are written into a
// dual-port RAM at a write pointer that advances by one per clock, and a
// second port reads the word written `delay` clocks earlier. The RAM read is
// registered, so a word spends exactly `delay` clocks in the block
// (1 <= delay <= DEPTH). For delay = 1 the read address equals the write
// address and the incoming word is forwarded.
//
// Interface: hits_in/hits_out are M_HITS fields of N_BITS, field h at bits
// [h*N_BITS +: N_BITS]; `delay` is a static parameter loaded by the host.
// Timing: hits_out(t) = hits_in(t - delay).
//
// The RAM delay line follows the paper. The depth (16 TS), the forwarding for
// delay 1, and the behaviour after reset are this design's choices: until
// `delay` words have been written since reset, the output is the no-hit code
// so that unwritten RAM locations never reach the trigger. An assertion
// flags a programmed delay outside 1..DEPTH (the output is then no-hit).
module coarse_correction #(
  parameter int unsigned N_BITS = ftl_pkg::N_BITS_DEF,
  parameter int unsigned M_HITS = ftl_pkg::M_HITS_DEF,
  parameter int unsigned DEPTH  = ftl_pkg::DEPTH_DEF,
  localparam int unsigned AW    = $clog2(DEPTH),
  localparam int unsigned DW    = $clog2(DEPTH + 1),
  localparam int unsigned W     = M_HITS * N_BITS
) (
  input  logic          clk,
  input  logic          rst,
  input  logic [DW-1:0] delay,
  input  logic [W-1:0]  hits_in,
  output logic [W-1:0]  hits_out
);

  logic [W-1:0]  ram [DEPTH];
  logic [AW-1:0] wptr, raddr;
  logic [DW-1:0] filled;   // words written since reset, saturating at DEPTH

  // Read address: word written delay-1 clocks before this one, because the
  // registered read adds the last clock.
  always_comb raddr = AW'((DEPTH + int'(wptr) + 1 - int'(delay)) % DEPTH);

  always_ff @(posedge clk) begin
    ram[wptr] <= hits_in;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wptr     <= '0;
      filled   <= '0;
      hits_out <= '1;
    end else begin
      wptr <= AW'((int'(wptr) + 1) % DEPTH);
      if (filled != DW'(DEPTH)) filled <= filled + 1'b1;
      if (delay == 0 || delay > DW'(DEPTH) || filled < delay - 1'b1)
        hits_out <= '1;
      else if (raddr == wptr)  hits_out <= hits_in;
      else                     hits_out <= ram[raddr];
    end
  end

  // The host must program a delay the RAM can hold.
  a_delay_range: assert property (@(posedge clk) disable iff (rst) delay >= 1 && delay <= DW'(DEPTH))
    else $error("coarse_correction: delay %0d outside 1..%0d", delay, DEPTH);

endmodule
