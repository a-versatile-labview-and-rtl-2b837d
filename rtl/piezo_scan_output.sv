// piezo_scan_output: the scan voltages on AO1-AO6 and the "setpoint reached" interrupt.
//
// The host computes every scan position (raster, line scan, manual positioning,
// field sweep) and hands the FPGA a setpoint for each of the six control outputs:
// piezo tube +X, -X, +Y, -Y, Z and the electromagnet control voltage. On go, every
// channel moves toward its setpoint by at most step codes per D/A update (tick,
// 1 MHz), so a large move is a ramp rather than a jump on the tube; step = 0 means
// jump in a single update. When all channels have arrived, irq rises and stays high
// until the host acknowledges with irq_ack; the host's scan sequence waits on it
// before measuring the next pixel. The slew limit and the level interrupt are this
// design's choices; the paper says only that the FPGA outputs the host's voltages
// and interrupts the host when it has scanned to a setpoint.
//
// Timing: the outputs change only in the cycle after a tick. irq rises in the cycle
// after the tick on which the last channel reached its setpoint; busy is high from
// the cycle after go until then. A go while busy retargets the move.
module piezo_scan_output
  import spm_pkg::*;
#(
  parameter int unsigned NCH = 6
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              tick,
  input  logic [NCH-1:0][SAMPLE_W-1:0]      setpoint,
  input  logic [15:0]                       step,
  input  logic                              go,
  input  logic                              irq_ack,
  output logic [NCH-1:0][SAMPLE_W-1:0]      ao,
  output logic                              busy,
  output logic                              irq
);
  logic [NCH-1:0][SAMPLE_W-1:0] target, nxt;
  logic all_there;

  // Next value of each channel: clamp the move to +/-step
  always_comb begin
    all_there = 1'b1;
    for (int i = 0; i < NCH; i++) begin
      automatic logic signed [SAMPLE_W:0] cur  = {ao[i][SAMPLE_W-1], ao[i]};
      automatic logic signed [SAMPLE_W:0] tgt  = {target[i][SAMPLE_W-1], target[i]};
      automatic logic signed [SAMPLE_W:0] diff = tgt - cur;
      automatic logic signed [SAMPLE_W:0] s    = {1'b0, step};
      if (step == 0 || (diff <= s && diff >= -s)) nxt[i] = target[i];
      else if (diff > s)                           nxt[i] = SAMPLE_W'(cur + s);
      else                                         nxt[i] = SAMPLE_W'(cur - s);
      if (nxt[i] != target[i]) all_there = 1'b0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      target <= '0;
      ao     <= '0;
      busy   <= 1'b0;
      irq    <= 1'b0;
    end else begin
      if (go) begin
        target <= setpoint;
        busy   <= 1'b1;
        irq    <= 1'b0;
      end else begin
        if (irq_ack) irq <= 1'b0;
        if (tick && busy) begin
          ao <= nxt;
          if (all_there) begin
            busy <= 1'b0;
            irq  <= 1'b1;
          end
        end
      end
    end
  end

  // The interrupt is only raised once the outputs equal the targets
  a_irq_at_target: assert property (@(posedge clk) disable iff (!rst_n)
                                    $rose(irq) |-> (ao == target));
endmodule
