// drive_stage: gain, saturation and interruption of the self-excitation drive (AO0).
//
// The delayed cantilever signal is multiplied by a host-set gain (the drive
// amplitude control) and sent to the piezo disc that shakes the cantilever. The
// drive can also be switched off for an "interrupt time"; varying that time changes
// the energy fed to the cantilever and so lets the host hold the oscillation
// amplitude steady. Here the interrupt recurs periodically: a free-running counter
// counts 0..intr_period-1 and the drive is blanked while the count is below intr_off
// (intr_period = 0 disables interruption; intr_off >= intr_period keeps the drive
// off). The recurrence, the signed Q4.12 gain format and the saturation are this
// design's choices; the paper names the gain and the interrupt time as controls.
//
// Timing: one register stage, drive = sat16(din * gain >>> 12) one cycle after din;
// blanked shows the gating applied to the same output cycle.
module drive_stage
  import spm_pkg::*;
#(
  parameter int unsigned GAIN_FRAC = 12
) (
  input  logic               clk,
  input  logic               rst_n,
  input  sample_t            din,
  input  logic signed [15:0] gain,
  input  logic               enable,
  input  logic [31:0]        intr_period,
  input  logic [31:0]        intr_off,
  output sample_t            drive,
  output logic               blanked
);
  logic [31:0] cnt;
  logic signed [31:0] prod, scaled;
  logic off_now;

  always_comb begin
    prod   = 32'(din) * 32'(gain);
    scaled = prod >>> GAIN_FRAC;
    off_now = !enable || ((intr_period != 0) && (cnt < intr_off));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt     <= '0;
      drive   <= '0;
      blanked <= 1'b1;
    end else begin
      if (intr_period == 0 || cnt >= intr_period - 1) cnt <= '0;
      else                                            cnt <= cnt + 1;
      blanked <= off_now;
      if (off_now)                 drive <= '0;
      else if (scaled > 32767)     drive <= sample_t'(16'sd32767);
      else if (scaled < -32768)    drive <= sample_t'(-16'sd32768);
      else                         drive <= sample_t'(scaled);
    end
  end
endmodule
