// discrete_delay: the z^-n delay that sets the phase of the cantilever drive.
//
// Self-excitation needs the drive to lag (or lead) the cantilever position by a
// quarter period. The filtered position signal is therefore delayed by a whole
// number n of 25 ns clock ticks, as the microscope's "Discrete Delay" does; the host
// tunes n until the oscillation amplitude is largest. The delay runs every clock
// cycle on the (sample-and-hold) output of the bandpass filter.
//
// The line is a circular buffer of MAX_DELAY words written every cycle, read through
// a register: dout in the cycle after edge t is the din sampled at edge t-n+1, i.e.
// dout follows din with a latency of exactly n cycles (n = 1 is a plain register).
// n is clamped to 1..MAX_DELAY. MAX_DELAY (1024 ticks = 25.6 us, more than one period
// of a 75 kHz cantilever) is this design's choice. Changing n takes effect at once;
// the buffer keeps the last MAX_DELAY inputs, so no stale data appears. Until n
// words have been written after reset the output is 0. MAX_DELAY must be a power of
// two (the pointers wrap naturally).
module discrete_delay #(
  parameter int unsigned W         = 16,
  parameter int unsigned MAX_DELAY = 1024
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic [$clog2(MAX_DELAY+1)-1:0]     n,
  input  logic signed [W-1:0]                din,
  output logic signed [W-1:0]                dout
);
  localparam int unsigned AW = (MAX_DELAY > 1) ? $clog2(MAX_DELAY) : 1;
  localparam int unsigned NW = $clog2(MAX_DELAY+1);

  logic signed [W-1:0] mem [MAX_DELAY];
  logic [AW-1:0] wptr, raddr;
  logic [NW-1:0] n_eff;
  logic [NW-1:0] filled;   // words written since reset, saturating at MAX_DELAY

  always_comb begin
    if (n == '0)                  n_eff = NW'(1);
    else if (n > NW'(MAX_DELAY))  n_eff = NW'(MAX_DELAY);
    else                          n_eff = n;
    raddr = wptr - AW'(n_eff - NW'(1));
  end

  // Storage: no reset, so it maps onto block RAM
  always_ff @(posedge clk) begin
    mem[wptr] <= din;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr   <= '0;
      filled <= '0;
      dout   <= '0;
    end else begin
      wptr <= wptr + AW'(1);
      if (filled != NW'(MAX_DELAY)) filled <= filled + NW'(1);
      if (n_eff == NW'(1))               dout <= din;
      else if (filled < n_eff - NW'(1))  dout <= '0;   // not yet written since reset
      else                               dout <= mem[raddr];
    end
  end

  initial assert ((MAX_DELAY & (MAX_DELAY - 1)) == 0)
    else $error("discrete_delay: MAX_DELAY must be a power of two");
endmodule
