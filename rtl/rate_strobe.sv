// rate_strobe: fractional clock divider for the converter rates.
//
// The A/D inputs are sampled at 750 kHz and the D/A outputs updated at 1 MHz, both
// derived from the 40 MHz FPGA clock. 750 kHz is 40 MHz * 3/160, not an integer
// division, so the strobe comes from a phase accumulator: every cycle INC is added,
// and when the sum reaches MOD it wraps and a one-cycle strobe is issued. The strobe
// rate is exactly f_clk * INC / MOD; strobes are at most one cycle of jitter apart
// from the ideal times. Defaults give 750 kHz; INC=1, MOD=40 gives 1 MHz.
// The divider construction is this design's own; the rates are the card's.
//
// Timing: first strobe MOD/INC cycles (rounded up) after reset is released.
module rate_strobe #(
  parameter int unsigned INC = 3,
  parameter int unsigned MOD = 160
) (
  input  logic clk,
  input  logic rst_n,
  output logic strobe
);
  localparam int unsigned AW = $clog2(MOD + INC + 1);
  logic [AW-1:0] acc;
  logic [AW-1:0] sum;

  always_comb sum = acc + AW'(INC);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc    <= '0;
      strobe <= 1'b0;
    end else if (sum >= AW'(MOD)) begin
      acc    <= sum - AW'(MOD);
      strobe <= 1'b1;
    end else begin
      acc    <= sum;
      strobe <= 1'b0;
    end
  end

  initial assert (INC > 0 && INC <= MOD) else $error("rate_strobe: need 0 < INC <= MOD");
endmodule
